// tb_ant_mp_adder: the mixed-precision adder must turn the four nibble
// products of two random int8 numbers, each formed as in the 4-bit PEs
// (<a,4>,<b,0> x <c,4>,<d,0>), into their full 8x8-bit product.
//
// Interface and timing: no ports; the unit is combinational, so inputs are
// applied and checked after a #1 settle. It prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: the four-PE int8 product follows the paper's mixed-precision
// scheme; the nibble split (signed high, unsigned low) is this design's own.
module tb_ant_mp_adder;
  import ant_pkg::*;

  logic signed [ACC_W-1:0] p [4];
  logic signed [ACC_W-1:0] sum;
  int checks = 0, failures = 0;

  ant_mp_adder dut (.p, .sum);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x, y, a, b, c, d;
    for (int n = 0; n < 2000; n++) begin
      x = int'($urandom % 256) - 128;
      y = int'($urandom % 256) - 128;
      a = x >>> 4; b = x & 15;   // signed high nibble, unsigned low nibble
      c = y >>> 4; d = y & 15;
      p[0] = 16'((a * c) <<< 8);
      p[1] = 16'((a * d) <<< 4);
      p[2] = 16'((b * c) <<< 4);
      p[3] = 16'(b * d);
      #1;
      checks++;
      if (int'(sum) != x * y) begin
        failures++;
        $display("FAIL %0d*%0d: got %0d", x, y, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
