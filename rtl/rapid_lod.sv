// rapid_lod: N-bit hierarchical leading-one detector.
//
// The operand is cut into N/4 segments. Every segment is probed in parallel by
// a rapid_lod4 cell, which gives a non-zero flag and the leading-one position
// inside the segment. A priority over the flags then picks the most
// significant non-zero segment, and the result is the concatenation
// {segment index, position in segment}; for example the leading one of
// 8'b0101_0101 is {1, 2'b10} = 3'b110. This is the same as the paper's
// recursive description (upper half zero -> lower-half result, else the
// upper-half result plus N/2).
//
// Interface: a[N-1:0] in; k = position of the leading one; zero = (a == 0),
// in which case k is 0. Combinational. N must be a multiple of 4 (the paper
// uses 8, 16 and 32 bits; 4 also works).
module rapid_lod #(
  parameter int unsigned N  = 16,
  localparam int unsigned KW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned NSEG = N / 4
) (
  input  logic [N-1:0]  a,
  output logic [KW-1:0] k,
  output logic          zero
);
  logic [NSEG-1:0]      seg_nz;
  logic [1:0]           seg_pos [NSEG];

  for (genvar s = 0; s < NSEG; s++) begin : g_seg
    rapid_lod4 u_lod4 (.d(a[4*s +: 4]), .nz(seg_nz[s]), .pos(seg_pos[s]));
  end

  always_comb begin
    k    = '0;
    zero = ~|seg_nz;
    // Priority on the most significant non-zero segment.
    for (int unsigned s = 0; s < NSEG; s++) begin
      if (seg_nz[s]) k = KW'(4 * s + 32'(seg_pos[s]));
    end
  end

  initial begin
    assert (N % 4 == 0 && N >= 4) else $error("rapid_lod: N must be a multiple of 4");
  end
endmodule
