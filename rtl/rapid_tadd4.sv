// rapid_tadd4: one 4-bit slice of the ternary adder that adds the two
// fractional parts and the error-reduction coefficient in a single step.
//
// Each slice adds three 4-bit operands and a carry-in of 0, 1 or 2, so its
// carry-out is also 0, 1 or 2 (at most 15+15+15+2 = 47 = 2*16 + 15). Chaining
// slices through the 2-bit carry builds a ternary adder of any width; the
// carry out of the last slice is the extra MSB the paper mentions for ternary
// addition. For subtraction the caller inverts the subtrahends and feeds a
// carry-in of 2 into the first slice (two two's complements at once).
//
// Interface: a, b, c [3:0], cin[1:0] (0..2) in; s[3:0], cout[1:0] out.
// Combinational. The slice function follows the paper (ternary addition on
// one slice of LUTs and carry chain); the 2-bit carry encoding is this
// design's choice.
module rapid_tadd4 (
  input  logic [3:0] a,
  input  logic [3:0] b,
  input  logic [3:0] c,
  input  logic [1:0] cin,
  output logic [3:0] s,
  output logic [1:0] cout
);
  logic [5:0] sum;
  always_comb begin
    sum  = 6'(a) + 6'(b) + 6'(c) + 6'(cin);
    s    = sum[3:0];
    cout = sum[5:4];
  end
endmodule
