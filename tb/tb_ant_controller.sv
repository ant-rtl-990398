// tb_ant_controller: random tile commands on a controller with N = 4.
// Counts, per command, the cycles in each phase and every control pulse and
// address it issues, and compares them with the expected schedule: N+1
// preload cycles with N buffer reads (only when preload is set) and N
// shifts, k_len + 2(N-1) + 1 compute cycles (k_len + N - 2 + 1 in 8-bit
// mode) with k_len sequential operand reads, N drain cycles writing output
// rows base+N-1 down to base, and N (8-bit: N/2) quantized rows.
//
// Interface and timing: no ports; it makes its own clock (10 time units) and
// reset, runs its checks, prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: the phase schedule is this design's own (the paper gives no
// controller); the output-stationary dataflow it sequences is the paper's.
module tb_ant_controller;
  import ant_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0, start;
  ant_cmd_t cmd_in, cmd;
  logic busy, done;
  ant_state_e state;
  logic op_re, pre_re, shift_en, use_rdata, acc_en, obuf_we, qbuf_we;
  logic [15:0] ibuf_raddr, wbuf_raddr, obuf_raddr, obuf_waddr, qbuf_waddr, drain_row;
  int checks = 0, failures = 0, cycles = 0;

  ant_controller #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int n_busy, n_pre, n_op, n_shift, n_acc, n_ow, n_qw, n_done, n_rd;
    int exp_l;
    bit ordered;
    start = 0; cmd_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      cmd_in = '0;
      cmd_in.k_len     = 16'($urandom % 40 + 1);
      cmd_in.ibuf_base = 16'($urandom % 1000);
      cmd_in.wbuf_base = 16'($urandom % 1000);
      cmd_in.obuf_base = 16'($urandom % 1000);
      cmd_in.qbuf_base = 16'($urandom % 1000);
      cmd_in.preload   = 1'($urandom);
      cmd_in.quant_en  = 1'($urandom);
      cmd_in.mode8     = 1'($urandom);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      n_busy = 0; n_pre = 0; n_op = 0; n_shift = 0; n_acc = 0; n_ow = 0; n_qw = 0;
      n_done = 0; ordered = 1; n_rd = 0;
      while (busy) begin
        n_busy++;
        if (pre_re) begin
          if (obuf_raddr != cmd_in.obuf_base + 16'(N - 1 - n_pre)) ordered = 0;
          n_pre++;
        end
        if (op_re) begin
          if (ibuf_raddr != cmd_in.ibuf_base + 16'(n_op) ||
              wbuf_raddr != cmd_in.wbuf_base + 16'(n_op)) ordered = 0;
          n_op++;
        end
        if (shift_en) n_shift++;
        if (acc_en) n_acc++;
        if (obuf_we) begin
          if (obuf_waddr != cmd_in.obuf_base + 16'(N - 1 - n_ow)) ordered = 0;
          n_ow++;
        end
        if (qbuf_we) n_qw++;
        @(negedge clk);
        if (done) n_done++;
      end
      exp_l = int'(cmd_in.k_len) + (cmd_in.mode8 ? N - 2 : 2 * (N - 1)) + 1;
      check(n_busy == (N + 1) + exp_l + N + 1, $sformatf("busy cycles %0d", n_busy));
      check(n_acc == exp_l, $sformatf("compute cycles %0d want %0d", n_acc, exp_l));
      check(n_op == int'(cmd_in.k_len), "operand reads");
      check(n_pre == (cmd_in.preload ? N : 0), "preload reads");
      check(n_shift == 2 * N, "shifts");
      check(n_ow == N, "output rows");
      check(n_qw == (cmd_in.quant_en ? (cmd_in.mode8 ? N / 2 : N) : 0), "quantized rows");
      check(ordered, "address order");
      check(n_done == 1, "done pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
