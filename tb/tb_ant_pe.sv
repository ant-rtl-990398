// tb_ant_pe: random check of the ANT PE.
// Drives random decoded operands and control; a reference model kept in the
// testbench computes (i_a*i_b) << (e_a+e_b) modulo 2^16 and the accumulator
// update (shift chain load first, then accumulate own or external addend).
// Also checks that operands reach w_out/x_out one cycle later.
//
// Interface and timing: no ports; it makes its own clock (10 time units) and
// reset, runs its checks, prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: the multiply-shift-accumulate follows the paper's PE
// equations; the shift chain and the external addend are this design's own.
module tb_ant_pe;
  import ant_pkg::*;

  logic clk = 0, rst_n = 0;
  ant_dec_t w_in, x_in, w_out, x_out;
  logic signed [ACC_W-1:0] prod, ext_add, chain_in, acc;
  logic acc_en, use_ext, shift_en;
  int checks = 0, failures = 0;
  int cycles = 0;

  ant_pe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] ref_prod(ant_dec_t a, ant_dec_t b);
    longint p;
    p = longint'(a.base) * longint'(b.base);
    p = p <<< (int'(a.exp) + int'(b.exp));
    return 16'(p);
  endfunction

  initial begin
    logic signed [15:0] model;
    ant_dec_t pw, px;
    w_in = '0; x_in = '0; acc_en = 0; use_ext = 0; shift_en = 0;
    ext_add = '0; chain_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = 0;
    @(negedge clk);
    for (int n = 0; n < 5000; n++) begin
      w_in.base = 5'($urandom);
      x_in.base = 5'($urandom);
      // mostly the exponent ranges that 4-bit types produce, sometimes any
      w_in.exp  = ($urandom % 4 == 0) ? 4'($urandom) : 4'($urandom % 7);
      x_in.exp  = ($urandom % 4 == 0) ? 4'($urandom) : 4'($urandom % 7);
      acc_en    = ($urandom % 4) != 0;
      use_ext   = ($urandom % 4) == 0;
      shift_en  = ($urandom % 8) == 0;
      ext_add   = 16'($urandom);
      chain_in  = 16'($urandom);
      #1;
      checks++;
      if (prod !== ref_prod(w_in, x_in)) begin
        failures++;
        $display("FAIL prod %0d*%0d<<(%0d+%0d): got %0d want %0d",
                 w_in.base, x_in.base, w_in.exp, x_in.exp, prod, ref_prod(w_in, x_in));
      end
      if (shift_en)    model = chain_in;
      else if (acc_en) model = model + (use_ext ? ext_add : ref_prod(w_in, x_in));
      pw = w_in; px = x_in;
      @(negedge clk);
      checks++;
      if (acc !== model) begin
        failures++;
        $display("FAIL acc got %0d want %0d", acc, model);
      end
      checks++;
      if (w_out !== pw || x_out !== px) begin
        failures++;
        $display("FAIL operand forwarding");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
