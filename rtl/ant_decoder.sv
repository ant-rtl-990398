// ant_decoder: int-based ANT decoder ("IF decoder").
//
// Turns one 4-bit stored code into the pair <base integer, exponent> with
// value = base << exponent, so that an ordinary integer multiplier plus an
// exponent adder and a shifter can multiply any two ANT types.
//
//   int   : base = the code itself (signed or unsigned), exponent 0.
//   PoT   : base = 1 (or -1), exponent = the code's magnitude bits.
//   flint : unsigned 4-bit, x = b3 b2 b1 b0:
//             b3 = 0 : base = b2b1b0,        exponent = 0
//             b3 = 1 : base = b2b1b0 << 1,   exponent = 2 * LZD(b2b1b0)
//             x = 1000 : base = 1 (exponent 2*LZD(000) = 6, value 64)
//           signed: b3 is the sign and the same rule is applied to the
//           3-bit magnitude b2b1b0 (LZD over b1b0), then the base is put in
//           two's complement. Value ranges: unsigned 0..64, signed -16..16.
//   8-bit int (mode8): one nibble of an int8 operand; the high nibble keeps
//           the sign (when the tensor is signed) and gets exponent 4, the low
//           nibble is unsigned with exponent 0.
//
// Combinational, no clock. The flint and int rules and the mode8 split follow
// the paper. Own choices: a PoT code whose magnitude bits are zero decodes to
// zero (a tensor needs a zero); signed PoT is sign plus a 3-bit exponent;
// the base is 5 bits wide so that unsigned values up to 15 fit in two's
// complement.
module ant_decoder
  import ant_pkg::*;
(
  input  logic [CODE_W-1:0] code,
  input  ant_cfg_t          cfg,
  input  logic              mode8,    // operand is one nibble of an 8-bit int
  input  logic              hi_nib,   // in mode8: this is the high nibble
  output ant_dec_t          dec
);
  logic [1:0] lz3;     // LZD of b2b1b0, unsigned flint (0..3)
  logic [1:0] lz2;     // LZD of b1b0, signed flint magnitude

  ant_lzd #(.W(3)) u_lzd3 (.in(code[2:0]), .count(lz3));
  ant_lzd #(.W(2)) u_lzd2 (.in(code[1:0]), .count(lz2));

  logic [3:0] mag;     // unsigned magnitude of the base integer
  logic       neg;     // negate the magnitude (sign-magnitude types)

  always_comb begin
    mag     = '0;
    neg     = 1'b0;
    dec.exp = '0;
    dec.base = '0;
    if (mode8) begin
      // int8 split <a,4>, <b,0>
      dec.exp  = hi_nib ? EXP_W'(4) : EXP_W'(0);
      dec.base = (hi_nib && cfg.is_signed) ? BASE_W'(signed'(code)) : BASE_W'({1'b0, code});
    end else begin
      unique case (cfg.dtype)
        T_INT: begin
          dec.base = cfg.is_signed ? BASE_W'(signed'(code)) : BASE_W'({1'b0, code});
        end
        T_POT: begin
          if (cfg.is_signed) begin
            neg     = code[3];
            dec.exp = EXP_W'(code[2:0]);
            mag     = (code[2:0] != 3'd0) ? 4'd1 : 4'd0;
          end else begin
            dec.exp = code;
            mag     = (code != 4'd0) ? 4'd1 : 4'd0;
          end
          dec.base = neg ? -BASE_W'(mag) : BASE_W'(mag);
        end
        default: begin  // T_FLINT
          if (cfg.is_signed) begin
            neg = code[3];
            if (code[2]) begin
              mag     = (code[1:0] == 2'd0) ? 4'd1 : {1'b0, code[1:0], 1'b0};
              dec.exp = EXP_W'({lz2, 1'b0});
            end else begin
              mag     = {2'b00, code[1:0]};
            end
          end else begin
            if (code[3]) begin
              mag     = (code[2:0] == 3'd0) ? 4'd1 : {code[2:0], 1'b0};
              dec.exp = EXP_W'({lz3, 1'b0});
            end else begin
              mag     = {1'b0, code[2:0]};
            end
          end
          dec.base = neg ? -BASE_W'(mag) : BASE_W'(mag);
        end
      endcase
    end
  end
endmodule
