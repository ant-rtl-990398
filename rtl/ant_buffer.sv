// ant_buffer: on-chip buffer, one write port and one read port.
//
// Holds tensors in their stored (fixed-length) form, so one word is a row of
// WIDTH bits: N 4-bit ANT codes for the input and weight buffers, N 16-bit
// results for the output buffer. Because every ANT type has the same length,
// rows stay aligned whatever type a tensor uses.
// Timing: a write (we, waddr, wdata) lands at the clock edge; a read (re,
// raddr) returns rdata one cycle later and rdata holds until the next read.
// Written as an array for synthesis to map onto SRAM macros. The buffer's
// existence and total size follow the paper; the port structure is this
// design's choice.
module ant_buffer #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
