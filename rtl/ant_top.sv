// ant_top: ANT accelerator, an output-stationary systolic array of 4-bit
// TypeFusion PEs with on-chip buffers and boundary decoders.
//
// Data path of one tile command:
//   input buffer  (N 4-bit codes per row) --\                 /-- N input decoders (top)
//                                            > skew -> array <
//   weight buffer (N 4-bit codes per row) --/                 \-- N weight decoders (left)
//   array accumulators --drain--> output buffer (N x 16 bit per row)
//                      \--> N scale-and-quantize lanes --> input buffer
// Tensors stay in their low-bit stored form in both buffers; they are only
// decoded at the array boundary. The requantized results written back to the
// input buffer are the next layer's input tensor. Any pair of the types
// int / PoT / flint (signed or unsigned) can be multiplied; in 8-bit mode
// both operands are int8 and the array acts as N/2 x N/2 int8 PEs.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//   start/cmd/busy/done : tile command (ant_cmd_t), taken when not busy.
//   ext_ibuf_*, ext_wbuf_* : write ports from off-chip memory, used while idle;
//              ext_ibuf_re/raddr/rdata reads requantized activations back.
//   ext_obuf_* : read port of the output buffer (1-cycle latency), while idle.
//   scale_*    : per-output-channel requantization scale table, N entries.
// Output buffer row layout in 8-bit mode: result (i,j) is row 2i, lane 2j.
// Input buffer layout of int8 element j: high nibble lane 2j, low 2j+1.
//
// Sizes: N = 64 (4096 PEs, 128 decoders) and 512 KB of buffers follow the
// paper; the split of the 512 KB into 128 KB input, 128 KB weight and 256 KB
// output buffer, the command format and the port structure are this design's
// choices.
//
// Lint notes that stand: the controller's 16-bit buffer addresses are wider
// than the buffers, so their top bits are unused (the command format is kept
// independent of the buffer depth); the copy of the command held by the
// controller is only read for its mode and type fields here; and the state
// output is unused at this level (it is there for debug and the unit test).
module ant_top
  import ant_pkg::*;
#(
  parameter int unsigned N          = 64,
  parameter int unsigned IBUF_DEPTH = 4096,
  parameter int unsigned WBUF_DEPTH = 4096,
  parameter int unsigned OBUF_DEPTH = 2048,
  localparam int unsigned IAW = $clog2(IBUF_DEPTH),
  localparam int unsigned WAW = $clog2(WBUF_DEPTH),
  localparam int unsigned OAW = $clog2(OBUF_DEPTH),
  localparam int unsigned NW  = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  ant_cmd_t              cmd,
  output logic                  busy,
  output logic                  done,
  input  logic                  ext_ibuf_we,
  input  logic [IAW-1:0]        ext_ibuf_addr,
  input  logic [N*CODE_W-1:0]   ext_ibuf_wdata,
  input  logic                  ext_ibuf_re,
  input  logic [IAW-1:0]        ext_ibuf_raddr,
  output logic [N*CODE_W-1:0]   ext_ibuf_rdata,
  input  logic                  ext_wbuf_we,
  input  logic [WAW-1:0]        ext_wbuf_addr,
  input  logic [N*CODE_W-1:0]   ext_wbuf_wdata,
  input  logic                  ext_obuf_re,
  input  logic [OAW-1:0]        ext_obuf_addr,
  output logic [N*ACC_W-1:0]    ext_obuf_rdata,
  input  logic                  scale_we,
  input  logic [NW-1:0]         scale_idx,
  input  ant_scale_t            scale_wdata
);
  ant_cmd_t    c;
  ant_state_e  state;
  logic        op_re, pre_re, shift_en, use_rdata, acc_en;
  logic        obuf_we, qbuf_we;
  logic [15:0] ibuf_raddr, wbuf_raddr, obuf_raddr, obuf_waddr, qbuf_waddr, drain_row;

  ant_controller #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .cmd_in(cmd), .cmd(c), .busy, .done, .state,
    .op_re, .ibuf_raddr, .wbuf_raddr, .pre_re, .obuf_raddr,
    .shift_en, .use_rdata, .acc_en,
    .obuf_we, .obuf_waddr, .qbuf_we, .qbuf_waddr, .drain_row
  );

  // ---------------- buffers ----------------
  logic [N*CODE_W-1:0] ibuf_rdata, wbuf_rdata, qrow;
  logic [N*ACC_W-1:0]  obuf_rdata, orow;

  ant_buffer #(.DEPTH(IBUF_DEPTH), .WIDTH(N*CODE_W)) u_ibuf (
    .clk,
    .we   (busy ? qbuf_we : ext_ibuf_we),
    .waddr(busy ? IAW'(qbuf_waddr) : ext_ibuf_addr),
    .wdata(busy ? qrow : ext_ibuf_wdata),
    .re   (busy ? op_re : ext_ibuf_re),
    .raddr(busy ? IAW'(ibuf_raddr) : ext_ibuf_raddr),
    .rdata(ibuf_rdata)
  );
  assign ext_ibuf_rdata = ibuf_rdata;

  ant_buffer #(.DEPTH(WBUF_DEPTH), .WIDTH(N*CODE_W)) u_wbuf (
    .clk,
    .we   (!busy && ext_wbuf_we),
    .waddr(ext_wbuf_addr),
    .wdata(ext_wbuf_wdata),
    .re   (op_re),
    .raddr(WAW'(wbuf_raddr)),
    .rdata(wbuf_rdata)
  );

  ant_buffer #(.DEPTH(OBUF_DEPTH), .WIDTH(N*ACC_W)) u_obuf (
    .clk,
    .we   (obuf_we),
    .waddr(OAW'(obuf_waddr)),
    .wdata(orow),
    .re   (busy ? pre_re : ext_obuf_re),
    .raddr(busy ? OAW'(obuf_raddr) : ext_obuf_addr),
    .rdata(obuf_rdata)
  );
  assign ext_obuf_rdata = obuf_rdata;

  // ---------------- operand feed: gate, skew ----------------
  logic              op_valid;
  logic [CODE_W-1:0] w_lane [N], x_lane [N], w_sk [N], x_sk [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) op_valid <= 1'b0;
    else        op_valid <= op_re;
  end

  for (genvar i = 0; i < N; i++) begin : g_lane
    assign w_lane[i] = op_valid ? wbuf_rdata[i*CODE_W +: CODE_W] : '0;
    assign x_lane[i] = op_valid ? ibuf_rdata[i*CODE_W +: CODE_W] : '0;
  end

  ant_skew #(.N(N), .W(CODE_W)) u_wskew (.clk, .rst_n, .mode8(c.mode8), .din(w_lane), .dout(w_sk));
  ant_skew #(.N(N), .W(CODE_W)) u_xskew (.clk, .rst_n, .mode8(c.mode8), .din(x_lane), .dout(x_sk));

  // ---------------- systolic array ----------------
  logic signed [ACC_W-1:0] chain_in [N], chain_out [N];

  for (genvar i = 0; i < N; i++) begin : g_chain
    assign chain_in[i] = use_rdata ? obuf_rdata[i*ACC_W +: ACC_W] : '0;
    assign orow[i*ACC_W +: ACC_W] = chain_out[i];
  end

  ant_systolic_array #(.N(N)) u_array (
    .clk, .rst_n,
    .w_cfg(c.w_cfg), .x_cfg(c.x_cfg), .mode8(c.mode8),
    .w_code(w_sk), .x_code(x_sk),
    .acc_en, .shift_en,
    .chain_in, .chain_out
  );

  // ---------------- requantization ----------------
  ant_scale_t scale_tab [N];
  ant_scale_t row_scale;
  logic [7:0] qcode [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) scale_tab[i] <= '{mult: 16'd1, shift: 5'd0};
    end else if (scale_we && !busy) begin
      scale_tab[scale_idx] <= scale_wdata;
    end
  end

  assign row_scale = scale_tab[c.mode8 ? NW'(drain_row >> 1) : NW'(drain_row)];

  for (genvar i = 0; i < N; i++) begin : g_quant
    ant_quantizer u_q (.x(chain_out[i]), .scale(row_scale), .cfg(c.q_cfg),
                       .mode8(c.mode8), .code(qcode[i]));
    if (i % 2 == 0) begin : g_even
      assign qrow[i*CODE_W +: CODE_W] = c.mode8 ? qcode[i][7:4] : qcode[i][3:0];
    end else begin : g_odd
      assign qrow[i*CODE_W +: CODE_W] = c.mode8 ? qcode[i-1][3:0] : qcode[i][3:0];
    end
  end

  // External buffer ports are only serviced while no command runs.
  a_ext_idle: assert property (@(posedge clk)
                               (ext_ibuf_we || ext_ibuf_re || ext_wbuf_we || ext_obuf_re || scale_we) |-> !busy)
    else $error("external buffer access while busy is ignored");
endmodule
