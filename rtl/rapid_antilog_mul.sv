// rapid_antilog_mul: integer-part addition and anti-log output barrel shifter
// of the RAPID multiplier.
//
// The ternary adder delivers s = x1 + x2 + coefficient with FW fraction bits.
// Following Mitchell's anti-log:
//   s <  1:  P = 2^(k1+k2)     * (1 + s)
//   s >= 1:  P = 2^(k1+k2 + 1) * s
// so the mantissa M is (1 + s) or 2s, and P = M shifted left by k1 + k2 with
// the FW fraction bits dropped (truncation). The integer parts k1 and k2 are
// added here, in the last stage, because the carry of the fraction sum decides
// the final exponent.
//
// Interface: ka, kb = integer parts; s[FW+2:0] = full ternary sum (two bits
// above the binary point); zero = one operand was 0. p[2N-1:0] = approximate
// product, 0 for a zero operand, all ones if the error-corrected mantissa
// would overflow 2N bits (possible only for operands just below 2^N).
// Combinational. The formula follows the paper (Eq. 4); truncation of the
// dropped bits and saturation are this design's choices.
module rapid_antilog_mul #(
  parameter int unsigned N = 16,
  localparam int unsigned KW = $clog2(N),
  localparam int unsigned FW = N - 1,
  localparam int unsigned SW = FW + 3,
  localparam int unsigned WW = SW + 1 + 2 * N
) (
  input  logic [KW-1:0]  ka,
  input  logic [KW-1:0]  kb,
  input  logic [SW-1:0]  s,
  input  logic           zero,
  output logic [2*N-1:0] p
);
  logic [KW:0]   ksum;
  logic [SW:0]   mant;       // FW fraction bits, up to 4 integer bits
  logic [WW-1:0] wide;
  logic [WW-1:0] full;

  always_comb begin
    ksum = {1'b0, ka} + {1'b0, kb};
    if (s >= SW'(1) << FW) mant = {s, 1'b0};
    else                   mant = {1'b0, s} + ((SW + 1)'(1) << FW);
    wide = WW'(mant) << ksum;
    full = wide >> FW;
    if (zero)                      p = '0;
    else if (|full[WW-1:2*N])      p = '1;
    else                           p = full[2*N-1:0];
  end
endmodule
