// ant_systolic_array: output-stationary N x N array of 4-bit ANT PEs with
// the ANT decoders placed only on its boundary.
//
// Weights enter each row from the left through one weight decoder per row;
// inputs enter each column from the top through one input decoder per
// column: 2N decoders instead of N*N. Decoded <base, exponent> pairs move
// one PE per cycle to the right (weights) and down (inputs); every PE keeps
// its own output in its accumulator. With row r fed r cycles late and column
// c fed c cycles late (the caller's skew), PE(r,c) sees operand k at cycle
// k + r + c and ends with C[r][c] = sum_k W[r][k] * X[k][c].
//
// 8-bit int mode (mode8): the array works as an N/2 x N/2 array of int8 PEs.
// A 2x2 group of PEs (rows 2i, 2i+1, columns 2j, 2j+1) receives the high and
// low nibbles of the int8 weight on its two rows and of the int8 input on its
// two columns. Inside a group the pipeline register between the two PEs is
// bypassed, so the four nibble products of one k meet in the same cycle; the
// mixed-precision adder sums them and only the group's top-left PE
// accumulates. Group (i,j) then sees operand k at cycle k + i + j and the
// caller skews by the group index.
//
// Preload/drain: with shift_en every accumulator column shifts down by one
// row; chain_in enters row 0 and row N-1 leaves on chain_out. N shifts load
// N new rows (bias or partial sums) and unload the N result rows, bottom row
// first.
//
// Follows the paper: boundary decoders, operand directions, PE datapath,
// int8 as four 4-bit PEs plus an adder, 16-bit accumulators with preload.
// Own choices: the in-group register bypass, the leader PE and the
// shift-chain preload/drain.
module ant_systolic_array
  import ant_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  ant_cfg_t                w_cfg,
  input  ant_cfg_t                x_cfg,
  input  logic                    mode8,
  input  logic [CODE_W-1:0]       w_code   [N],  // row r, already skewed
  input  logic [CODE_W-1:0]       x_code   [N],  // column c, already skewed
  input  logic                    acc_en,
  input  logic                    shift_en,
  input  logic signed [ACC_W-1:0] chain_in [N],
  output logic signed [ACC_W-1:0] chain_out[N]
);
  ant_dec_t dec_w [N];
  ant_dec_t dec_x [N];

  // Boundary decoders. In mode8 even rows/columns carry the high nibble.
  for (genvar i = 0; i < N; i++) begin : g_dec
    ant_decoder u_wdec (.code(w_code[i]), .cfg(w_cfg), .mode8(mode8),
                        .hi_nib(i % 2 == 0), .dec(dec_w[i]));
    ant_decoder u_xdec (.code(x_code[i]), .cfg(x_cfg), .mode8(mode8),
                        .hi_nib(i % 2 == 0), .dec(dec_x[i]));
  end

  ant_dec_t                w_h   [N][N];  // weight into PE(r,c)
  ant_dec_t                x_v   [N][N];  // input into PE(r,c)
  ant_dec_t                w_reg [N][N];  // PE(r,c) registered weight
  ant_dec_t                x_reg [N][N];  // PE(r,c) registered input
  logic signed [ACC_W-1:0] prod  [N][N];
  logic signed [ACC_W-1:0] acc   [N][N];
  logic signed [ACC_W-1:0] gsum  [N][N];  // group sum, used at leaders only

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      // Horizontal operand path, with the in-group bypass on odd columns.
      if (c == 0) begin : g_wl
        assign w_h[r][c] = dec_w[r];
      end else if (c % 2 == 1) begin : g_wodd
        if (c == 1) begin : g_w1
          assign w_h[r][c] = mode8 ? dec_w[r] : w_reg[r][c-1];
        end else begin : g_wn
          assign w_h[r][c] = mode8 ? w_reg[r][c-2] : w_reg[r][c-1];
        end
      end else begin : g_weven
        assign w_h[r][c] = w_reg[r][c-1];
      end
      // Vertical operand path, with the in-group bypass on odd rows.
      if (r == 0) begin : g_xt
        assign x_v[r][c] = dec_x[c];
      end else if (r % 2 == 1) begin : g_xodd
        if (r == 1) begin : g_x1
          assign x_v[r][c] = mode8 ? dec_x[c] : x_reg[r-1][c];
        end else begin : g_xn
          assign x_v[r][c] = mode8 ? x_reg[r-2][c] : x_reg[r-1][c];
        end
      end else begin : g_xeven
        assign x_v[r][c] = x_reg[r-1][c];
      end

      // Mixed-precision adder at each group leader.
      if (r % 2 == 0 && c % 2 == 0) begin : g_lead
        logic signed [ACC_W-1:0] p4 [4];
        assign p4[0] = prod[r][c];
        assign p4[1] = prod[r][c+1];
        assign p4[2] = prod[r+1][c];
        assign p4[3] = prod[r+1][c+1];
        ant_mp_adder u_mpadd (.p(p4), .sum(gsum[r][c]));
      end else begin : g_nolead
        assign gsum[r][c] = '0;
      end

      localparam bit LEADER = (r % 2 == 0) && (c % 2 == 0);
      logic signed [ACC_W-1:0] chain;
      if (r == 0) begin : g_ct
        assign chain = chain_in[c];
      end else begin : g_cn
        assign chain = acc[r-1][c];
      end

      ant_pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .w_in    (w_h[r][c]),
        .x_in    (x_v[r][c]),
        .w_out   (w_reg[r][c]),
        .x_out   (x_reg[r][c]),
        .prod    (prod[r][c]),
        .acc_en  (acc_en && (!mode8 || LEADER)),
        .use_ext (mode8),
        .ext_add (gsum[r][c]),
        .shift_en(shift_en),
        .chain_in(chain),
        .acc     (acc[r][c])
      );
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_out
    assign chain_out[c] = acc[N-1][c];
  end

  initial begin
    assert (N % 2 == 0) else $error("N must be even for the 8-bit mode");
  end
endmodule
