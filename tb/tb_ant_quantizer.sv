// tb_ant_quantizer: random check of the scale-and-quantize unit.
// For random 16-bit inputs, scales and output types the testbench computes
// the scaled integer y = round(|x| * mult / 2^shift) and then searches the
// type's whole value table (the same tables the decoder is checked against)
// for the nearest representable value, ties to the larger magnitude. The
// unit's code must decode to exactly that value. This search is independent
// of the interval/first-one method the unit uses.
//
// Interface and timing: no ports; the unit is combinational, so inputs are
// applied and checked after a #1 settle. It prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: nearest-value rounding follows the paper's quantization
// algorithm; ties to the larger magnitude and the scale format are own choices.
module tb_ant_quantizer;
  import ant_pkg::*;

  logic signed [ACC_W-1:0] x;
  ant_scale_t scale;
  ant_cfg_t   cfg;
  logic       mode8;
  logic [7:0] code;
  int checks = 0, failures = 0;
  int flint_hits [16];

  ant_quantizer dut (.x, .scale, .cfg, .mode8, .code);

  int uflint [16] = '{0, 1, 2, 3, 4, 5, 6, 7, 64, 32, 16, 24, 8, 10, 12, 14};
  int sflint [8]  = '{0, 1, 2, 3, 16, 8, 4, 6};

  function automatic longint val_of(int c, ant_type_e t, bit s, bit m8);
    longint v;
    if (m8) return (s && c >= 128) ? c - 256 : c;
    case (t)
      T_INT:   return (s && c >= 8) ? c - 16 : c;
      T_POT:   if (!s) return (c == 0) ? 0 : (longint'(1) << c);
               else begin
                 v = ((c & 7) == 0) ? 0 : (longint'(1) << (c & 7));
                 return (c >= 8) ? -v : v;
               end
      default: if (!s) return uflint[c];
               else return (c >= 8) ? -sflint[c & 7] : sflint[c & 7];
    endcase
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ax, y, target, best, v, d, bd;
    int ncodes;
    for (int n = 0; n < 20000; n++) begin
      x           = 16'($urandom);
      if (n % 2 == 0) x = 16'(int'($urandom % 200) - 60);  // small values, fine steps
      scale.mult  = ($urandom % 2) ? 16'($urandom % 64 + 1) : 16'($urandom);
      scale.shift = 5'($urandom % 24);
      if (n % 2 == 0) begin scale.mult = 16'(1 << ($urandom % 4)); scale.shift = 5'($urandom % 4); end
      cfg.dtype     = ant_type_e'($urandom % 3);
      cfg.is_signed = 1'($urandom);
      mode8         = ($urandom % 5) == 0;
      #1;
      ax = (x < 0) ? -longint'(x) : longint'(x);
      y  = (ax * longint'(scale.mult) + ((scale.shift == 0) ? 0 : (longint'(1) << (scale.shift - 1)))) >>> scale.shift;
      target = (x < 0) ? -y : y;
      ncodes = mode8 ? 256 : 16;
      best = 0; bd = -1;
      for (int cc = 0; cc < ncodes; cc++) begin
        v = val_of(cc, cfg.dtype, cfg.is_signed, mode8);
        d = (v > target) ? v - target : target - v;
        if (bd < 0 || d < bd || (d == bd && (v < 0 ? -v : v) > (best < 0 ? -best : best))) begin
          best = v; bd = d;
        end
      end
      checks++;
      if (val_of(mode8 ? int'(code) : int'(code[3:0]), cfg.dtype, cfg.is_signed, mode8) != best
          || (!mode8 && code[7:4] != 0)) begin
        failures++;
        if (failures < 10)
          $display("FAIL x=%0d mult=%0d shift=%0d type=%0d s=%0d m8=%0d y=%0d: code %h want value %0d",
                   x, scale.mult, scale.shift, cfg.dtype, cfg.is_signed, mode8, y, code, best);
      end
      if (!mode8 && cfg.dtype == T_FLINT && !cfg.is_signed) flint_hits[code[3:0]]++;
    end
    // every unsigned flint code must have been produced at least once
    for (int cc = 0; cc < 16; cc++) begin
      checks++;
      if (flint_hits[cc] == 0) begin
        failures++;
        $display("FAIL flint code %0d never produced", cc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
