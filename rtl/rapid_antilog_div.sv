// rapid_antilog_div: integer-part subtraction and anti-log output barrel
// shifter of the RAPID divider.
//
// The ternary subtractor delivers d = x1 - x2 - coefficient as a word
// s = 2^(W+1) + d (W = FW + 1 fraction-word bits), so s[W+1] is 1 when d >= 0
// and 0 when d is negative; in that case the low W bits hold 2 + d. Following
// Mitchell's anti-log:
//   d >= 0:  Q = 2^(k1-k2)     * (1 + d)
//   d <  0:  Q = 2^(k1-k2 - 1) * (2 + d)
// The quotient is produced as an unsigned fixed-point number with N integer
// bits and QFRAC fraction bits, truncated.
//
// Interface: ka = dividend integer part, kb = divisor integer part,
// s[W+1:0] = ternary sum word, za/zb = dividend/divisor is zero.
// q[N+QFRAC-1:0] = approximate quotient * 2^QFRAC; 0 for a zero dividend; all
// ones for a zero divisor or when the quotient does not fit N integer bits
// (the 2N/N division is defined only for dividend < 2^N * divisor).
// Combinational. The formula follows the paper (Eq. 5); the fixed-point
// output format, truncation and saturation are this design's choices.
module rapid_antilog_div #(
  parameter int unsigned N     = 8,
  parameter int unsigned QFRAC = 0,
  localparam int unsigned KAW = $clog2(2 * N),
  localparam int unsigned KBW = $clog2(N),
  localparam int unsigned FW  = 2 * N - 1,
  localparam int unsigned W   = FW + 1,
  localparam int unsigned QW  = N + QFRAC,
  localparam int unsigned WW  = W + 1 + 3 * N + 1
) (
  input  logic [KAW-1:0] ka,
  input  logic [KBW-1:0] kb,
  input  logic [W+1:0]   s,
  input  logic           za,
  input  logic           zb,
  output logic [QW-1:0]  q
);
  logic                neg;
  logic [W:0]          mant;       // FW fraction bits
  logic signed [KAW+1:0] e;         // k1 - k2 - neg
  logic [KAW+1:0]      t;          // e + N >= 0
  logic [WW-1:0]       wide;
  logic [WW-1:0]       full;

  always_comb begin
    neg  = ~s[W+1];
    mant = neg ? {1'b0, s[W-1:0]} : ({1'b0, s[W-1:0]} + ((W + 1)'(1) << FW));
    e    = $signed({2'b00, ka}) - $signed((KAW + 2)'(kb)) - $signed((KAW + 2)'(neg));
    t    = (KAW + 2)'(e + $signed((KAW + 2)'(N)));
    wide = WW'(mant) << t;
    full = wide >> (FW + N - QFRAC);
    if (zb)                     q = '1;
    else if (za)                q = '0;
    else if (|full[WW-1:QW])    q = '1;
    else                        q = full[QW-1:0];
  end

  initial begin
    assert (QFRAC <= N) else $error("rapid_antilog_div: QFRAC must not exceed N");
  end
endmodule
