// rapid_alog: Mitchell approximate logarithm of an unsigned integer.
//
// For a = 2^k (1 + x) with 0 <= x < 1 the approximate log2(a) is k + x. The
// integer part k is the leading-one position from rapid_lod. The fractional
// part x is made of the bits below the leading one, shifted up so that the bit
// just below the leading one becomes the fraction's MSB (weight 2^-1).
//
// Interface: a[N-1:0] in; k (integer part); x[N-2:0] (fraction, LSB weight
// 2^-(N-1)); zero = (a == 0), with k and x then 0. Combinational.
// The decomposition follows the paper (Eq. 1 and 2); the normalising left
// shift is the plain way to left-align the fraction.
//
// Lint note: bit N-1 of the normalised operand is the leading one itself and
// is not part of x, so it is left unused.
module rapid_alog #(
  parameter int unsigned N = 16,
  localparam int unsigned KW = $clog2(N),
  localparam int unsigned FW = N - 1
) (
  input  logic [N-1:0]  a,
  output logic [KW-1:0] k,
  output logic [FW-1:0] x,
  output logic          zero
);
  logic [N-1:0] norm;

  rapid_lod #(.N(N)) u_lod (.a(a), .k(k), .zero(zero));

  always_comb begin
    // Shift the leading one up to bit N-1; the bits below it form x.
    norm = a << (KW'(N - 1) - k);
    x    = norm[FW-1:0];
  end
endmodule
