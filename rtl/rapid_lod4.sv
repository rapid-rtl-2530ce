// rapid_lod4: 4-bit leading-one detector, the basic cell of the RAPID
// leading-one detection.
//
// Two independent outputs are formed from the same four bits, as two small
// look-up functions would form them on an FPGA: a "segment non-zero" flag (the
// OR of the four bits) and the 2-bit position of the most significant one in
// the segment. Wider detectors combine these cells (see rapid_lod).
//
// Interface: d[3:0] in; nz = |d; pos = index of the highest set bit of d
// (0 when d is zero). Purely combinational. The cell structure follows the
// paper; the value of pos for an all-zero segment is this design's choice.
module rapid_lod4 (
  input  logic [3:0] d,
  output logic       nz,
  output logic [1:0] pos
);
  always_comb begin
    nz = |d;
    casez (d)
      4'b1???: pos = 2'd3;
      4'b01??: pos = 2'd2;
      4'b001?: pos = 2'd1;
      default: pos = 2'd0;
    endcase
  end
endmodule
