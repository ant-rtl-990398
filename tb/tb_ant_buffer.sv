// tb_ant_buffer: random writes and reads of a small buffer against an
// associative-array model; checks the one-cycle read latency, that rdata
// holds between reads, and that a read and a write in the same cycle to the
// same row returns the old contents.
//
// Interface and timing: no ports; it makes its own clock (10 time units) and
// reset, runs its checks, prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: the buffer itself is in the paper; the sizes used here and the
// read-during-write rule are this design's choices.
module tb_ant_buffer;
  localparam int DEPTH = 64, WIDTH = 40;
  logic clk = 0;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  int checks = 0, failures = 0, cycles = 0;

  ant_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] model [DEPTH];
    logic [WIDTH-1:0] want;
    bit was_re;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill all rows first so every read has a known value
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = {8'($urandom), 32'($urandom)};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    want = '0; was_re = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (was_re || n > 0) begin
        checks++;
        if (rdata !== want) begin
          failures++;
          if (failures < 10) $display("FAIL read got %h want %h", rdata, want);
        end
      end
      we = 1'($urandom); re = 1'($urandom);
      waddr = 6'($urandom); raddr = ($urandom % 4 == 0) ? waddr : 6'($urandom);
      wdata = {8'($urandom), 32'($urandom)};
      if (re) begin want = model[raddr]; was_re = 1; end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
