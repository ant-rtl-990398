// tb_ant_decoder: exhaustive check of the int-based ANT decoder.
// Every 4-bit code is decoded under every type, signedness and int8 nibble
// position; base << exponent is compared with value tables written out
// independently from the flint value tables (0,1,2,3,4..7,8,10,12,14,16,24,
// 32,64 for unsigned flint). For unsigned flint the <base, exponent> split
// itself is also compared with the int-based flint table.
//
// Interface and timing: no ports; the unit is combinational, so inputs are
// applied and checked after a #1 settle. It prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: the flint value tables follow the paper's equations and
// table; the PoT zero code and signed PoT layout are this design's choices.
module tb_ant_decoder;
  import ant_pkg::*;

  logic [3:0] code;
  ant_cfg_t   cfg;
  logic       mode8, hi_nib;
  ant_dec_t   dec;
  int checks = 0, failures = 0;

  ant_decoder dut (.code, .cfg, .mode8, .hi_nib, .dec);

  // unsigned flint values by code
  int uflint [16] = '{0, 1, 2, 3, 4, 5, 6, 7, 64, 32, 16, 24, 8, 10, 12, 14};
  // expected <base, exp> of unsigned flint codes 8..15
  int ubase  [8]  = '{1, 2, 4, 6, 8, 10, 12, 14};
  int uexp   [8]  = '{6, 4, 2, 2, 0, 0, 0, 0};
  // 3-bit flint magnitude values (signed flint)
  int sflint [8]  = '{0, 1, 2, 3, 16, 8, 4, 6};

  function automatic int ref_val(int c, ant_type_e t, bit s, bit m8, bit hi);
    int v;
    if (m8) begin
      v = (hi && s && c >= 8) ? c - 16 : c;
      return hi ? v * 16 : v;
    end
    case (t)
      T_INT:   return (s && c >= 8) ? c - 16 : c;
      T_POT:   if (!s) return (c == 0) ? 0 : (1 << c);
               else begin
                 v = ((c & 7) == 0) ? 0 : (1 << (c & 7));
                 return (c >= 8) ? -v : v;
               end
      default: if (!s) return uflint[c];
               else return (c >= 8) ? -sflint[c & 7] : sflint[c & 7];
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got, exp_v;
    for (int m = 0; m < 2; m++)
      for (int h = 0; h < 2; h++)
        for (int t = 0; t < 3; t++)
          for (int s = 0; s < 2; s++)
            for (int cc = 0; cc < 16; cc++) begin
              if (m == 0 && h == 1) continue;
              code      = 4'(cc);
              cfg.dtype = ant_type_e'(t);
              cfg.is_signed = s[0];
              mode8  = m[0];
              hi_nib = h[0];
              #1;
              got   = int'(dec.base) <<< dec.exp;
              exp_v = ref_val(cc, ant_type_e'(t), s[0], m[0], h[0]);
              checks++;
              if (got !== exp_v) begin
                failures++;
                $display("FAIL code=%b type=%0d signed=%0d mode8=%0d hi=%0d: got %0d (base %0d exp %0d) want %0d",
                         code, t, s, m, h, got, dec.base, dec.exp, exp_v);
              end
              if (m == 0 && t == int'(T_FLINT) && s == 0 && cc >= 8) begin
                checks++;
                if (int'(dec.base) != ubase[cc-8] || int'(dec.exp) != uexp[cc-8]) begin
                  failures++;
                  $display("FAIL flint split code=%b: base %0d exp %0d", code, dec.base, dec.exp);
                end
              end
            end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
