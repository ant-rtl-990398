// ant_pe: 4-bit int-based ANT processing element, output stationary.
//
// Each cycle the PE takes a decoded weight <i_a, e_a> from its left
// neighbour and a decoded input <i_b, e_b> from its top neighbour and forms
//   i_c = i_a * i_b          (small signed integer multiplier)
//   e_c = e_a + e_b          (4-bit exponent adder, with carry)
//   i_d = i_c << e_c         (left shifter, ACC_W-bit result)
// which is added to the ACC_W-bit (16-bit) accumulator that stays in the PE.
// Both decoded operands are registered and passed on to the right and bottom
// neighbours, one cycle per hop.
//
// Control, all synchronous to clk:
//   shift_en : the accumulator loads chain_in (preload of bias/partial sums
//              and, at the same time, drain of the result towards the array
//              edge, one PE per cycle). Has priority over acc_en.
//   acc_en   : accumulate; with use_ext the addend is ext_add (the group sum
//              of the mixed-precision 8-bit mode) instead of this PE's i_d.
// prod exposes i_d combinationally. Arithmetic wraps modulo 2^ACC_W, as an
// integer MAC does; the paper states that 4-bit flint products fit in 16 bits
// (PoT with large exponents can exceed that, see the accompanying notes).
// The datapath follows the paper; the preload/drain chain and the reset
// values are this design's own choices.
module ant_pe
  import ant_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  ant_dec_t                w_in,
  input  ant_dec_t                x_in,
  output ant_dec_t                w_out,
  output ant_dec_t                x_out,
  output logic signed [ACC_W-1:0] prod,
  input  logic                    acc_en,
  input  logic                    use_ext,
  input  logic signed [ACC_W-1:0] ext_add,
  input  logic                    shift_en,
  input  logic signed [ACC_W-1:0] chain_in,
  output logic signed [ACC_W-1:0] acc
);
  logic signed [2*BASE_W-1:0] i_c;
  logic        [EXP_W:0]      e_c;

  always_comb begin
    i_c  = w_in.base * x_in.base;
    e_c  = {1'b0, w_in.exp} + {1'b0, x_in.exp};
    prod = ACC_W'(32'(i_c) <<< e_c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_out <= '0;
      x_out <= '0;
      acc   <= '0;
    end else begin
      w_out <= w_in;
      x_out <= x_in;
      if (shift_en)    acc <= chain_in;
      else if (acc_en) acc <= acc + (use_ext ? ext_add : prod);
    end
  end
endmodule
