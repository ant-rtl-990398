// ant_mp_adder: adder tree of the mixed-precision (8-bit int) mode.
//
// Four 4-bit ANT PEs of a 2x2 group compute the partial products of two int8
// operands split into <a,4>,<b,0> and <c,4>,<d,0>: (a*c)<<8, (a*d)<<4,
// (b*c)<<4 and b*d. This two-level tree adds the four shifted products into
// the full 8x8 product, which the group's accumulator then adds. Combinational,
// ACC_W-bit, wrapping. The structure follows the paper; the two-level tree
// shape is this design's choice.
module ant_mp_adder
  import ant_pkg::*;
(
  input  logic signed [ACC_W-1:0] p [4],
  output logic signed [ACC_W-1:0] sum
);
  logic signed [ACC_W-1:0] s01, s23;
  always_comb begin
    s01 = p[0] + p[1];
    s23 = p[2] + p[3];
    sum = s01 + s23;
  end
endmodule
