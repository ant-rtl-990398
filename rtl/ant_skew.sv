// ant_skew: boundary skew of the systolic array.
//
// Delays lane i of the code row read from a buffer by i cycles (4-bit mode)
// or by i/2 cycles (8-bit mode, where lanes 2j and 2j+1 are the two nibbles
// of int8 element j and must enter together), so that operand k reaches
// PE(r,c) of the output-stationary array at a fixed cycle k + r + c.
// Lane 0 is not delayed. One register stage per cycle of delay; stored codes
// are skewed before decoding so that only 4 bits per stage are kept. This
// block is this design's own; the paper does not describe the skew.
module ant_skew #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         mode8,
  input  logic [W-1:0] din  [N],
  output logic [W-1:0] dout [N]
);
  assign dout[0] = din[0];

  for (genvar i = 1; i < N; i++) begin : g_lane
    logic [W-1:0] sr [i];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < i; s++) sr[s] <= '0;
      end else begin
        sr[0] <= din[i];
        for (int s = 1; s < i; s++) sr[s] <= sr[s-1];
      end
    end
    localparam int unsigned D8 = i / 2;
    if (D8 == 0) begin : g_d0
      assign dout[i] = mode8 ? din[i] : sr[i-1];
    end else begin : g_dn
      assign dout[i] = mode8 ? sr[D8-1] : sr[i-1];
    end
  end
endmodule
