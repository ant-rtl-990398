// ant_quantizer: scale-and-quantize unit for output activations.
//
// A 16-bit accumulator result x is first scaled and rounded to an integer,
//   y = round(|x| * mult / 2^shift)          (round half up on the magnitude)
// which is the int quantization step of the flint encoding algorithm, and is
// then encoded in the tensor's output type:
//   int    : clamp to 0..15 (unsigned) or -8..7 (signed, two's complement);
//   8-bit  : with mode8, clamp to 0..255 or -128..127 (int8 of 8-bit layers);
//   flint  : clamp to [0, 2^(2b-2)] (b = 4 unsigned, b = 3 magnitude bits
//            when signed), find the interval i = floor(log2 y) + 1, emit the
//            first-one exponent code of interval i and round the remaining
//            bits into the interval's mantissa; a mantissa that rounds up
//            past its interval moves to the next interval;
//   PoT    : nearest power of two (exponent code), ties to the larger.
// Unsigned types clamp negative inputs to zero, as after a ReLU. Signed flint
// and PoT are sign-magnitude (bit 3 is the sign, never set for zero).
// Combinational; the caller registers the result.
//
// Follows the paper: the flint encoding steps (int quantization, interval
// index, first-one exponent, rounded mantissa). Own choices: the fixed-point
// scale format, round half up, the carry into the next interval, and the PoT
// and int clamping ranges.
module ant_quantizer
  import ant_pkg::*;
(
  input  logic signed [ACC_W-1:0] x,
  input  ant_scale_t              scale,
  input  ant_cfg_t                cfg,
  input  logic                    mode8,
  output logic [7:0]              code
);
  // Flint encoding of 0 <= y <= 2^(2B-2) in B bits (B = 3 or 4).
  function automatic logic [3:0] flint_enc(input logic [6:0] y, input int unsigned B);
    int unsigned i, len, mb, sh, m, ec;
    i = 0;
    for (int k = 0; k < 7; k++) if (y[k]) i = k + 1;
    if (i == 0) return 4'd0;
    if (i <= B - 1) return 4'(y);              // int-like intervals: code = value
    if (i >= 2 * B - 1) return 4'(1 << (B - 1)); // top interval, code 10..0
    mb = 2 * B - 2 - i;
    sh = i - 1 - mb;
    m  = ((32'(y) - (32'd1 << (i - 1))) + (32'd1 << (sh - 1))) >> sh;
    if (m == (32'd1 << mb)) begin               // rounded into the next interval
      i = i + 1;
      if (i == 2 * B - 1) return 4'(1 << (B - 1));
      mb = 2 * B - 2 - i;
      m  = 0;
    end
    len = i - B + 2;
    ec  = (32'd1 << (len - 1)) | 32'd1;
    return 4'((ec << mb) | m);
  endfunction

  // Nearest power-of-two exponent of y >= 0, at most emax; 0 means zero.
  function automatic logic [3:0] pot_enc(input logic [33:0] y, input int unsigned emax);
    int unsigned k;
    if (y == 34'd0) return 4'd0;
    if (y == 34'd1) return 4'd1;               // tie between 0 and 2
    k = 0;
    for (int b = 0; b < 34; b++) if (y[b]) k = b;
    if (k >= 1 && y >= (34'd3 << (k - 1))) k = k + 1;
    if (k > emax) k = emax;
    return 4'(k);
  endfunction

  logic        neg;
  logic [15:0] ax;
  logic [33:0] prod, y;

  always_comb begin
    neg  = x[ACC_W-1];
    ax   = neg ? 16'(-32'(x)) : 16'(x);
    prod = 34'(ax) * 34'(scale.mult);
    y    = (prod + ((scale.shift == 5'd0) ? 34'd0 : (34'd1 << (scale.shift - 5'd1)))) >> scale.shift;
    code = '0;
    if (mode8) begin
      if (!cfg.is_signed)  code = neg ? 8'd0 : ((y > 34'd255) ? 8'd255 : y[7:0]);
      else if (!neg)       code = (y > 34'd127) ? 8'd127 : y[7:0];
      else                 code = (y > 34'd128) ? 8'h80 : 8'(-y[8:0]);
    end else begin
      unique case (cfg.dtype)
        T_INT: begin
          if (!cfg.is_signed)  code = neg ? 8'd0 : ((y > 34'd15) ? 8'd15 : {4'd0, y[3:0]});
          else if (!neg)       code = (y > 34'd7) ? 8'd7 : {4'd0, y[3:0]};
          else                 code = {4'd0, (y > 34'd8) ? 4'h8 : 4'(-y[4:0])};
        end
        T_POT: begin
          if (!cfg.is_signed) begin
            code = neg ? 8'd0 : {4'd0, pot_enc(y, 15)};
          end else begin
            code[2:0] = pot_enc(y, 7)[2:0];
            code[3]   = neg && (code[2:0] != 3'd0);
          end
        end
        default: begin  // T_FLINT
          if (!cfg.is_signed) begin
            code = neg ? 8'd0 : {4'd0, flint_enc((y > 34'd64) ? 7'd64 : y[6:0], 4)};
          end else begin
            code[2:0] = flint_enc((y > 34'd16) ? 7'd16 : y[6:0], 3)[2:0];
            code[3]   = neg && (code[2:0] != 3'd0);
          end
        end
      endcase
    end
  end
endmodule
