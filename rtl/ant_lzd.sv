// ant_lzd: leading-zero detector, the one non-trivial part of the flint
// decoder. Counts the zeros above the first one of `in`, MSB first; an
// all-zero input gives W. Purely combinational, a priority scan.
module ant_lzd #(
  parameter int unsigned W = 3
) (
  input  logic [W-1:0]         in,
  output logic [$clog2(W+1)-1:0] count
);
  always_comb begin
    count = ($clog2(W+1))'(W);
    for (int i = 0; i < W; i++) begin
      if (in[i]) count = ($clog2(W+1))'(W - 1 - i);
    end
  end
endmodule
