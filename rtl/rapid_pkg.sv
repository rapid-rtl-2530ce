// rapid_pkg: constants and helper functions shared by the RAPID approximate
// multiplier and divider.
//
// Contents
//   * The error-reduction coefficients of the 16-bit units, for the 3-, 5-
//     and 10-coefficient multiplier and the 3-, 5- and 9-coefficient divider
//     schemes. They hold 13 significant bits each (12 for the 3-coefficient
//     multiplier), stored in the low bits. The coefficient table leaves out the
//     leading zero bits: three for the multiplier and four for the divider.
//     A multiplier coefficient therefore has LSB weight 2^-15 (a 16-bit word
//     with one integer bit, like the multiplier's ternary-adder word) and a
//     divider coefficient LSB weight 2^-16. coef_align() re-aligns a
//     coefficient to the fraction width of the datapath it is used in.
//   * The partition maps that assign each pair of 4-bit fraction prefixes
//     (x1[MSB-:4], x2[MSB-:4]) to one coefficient. Row x1, nibble x2 holds the
//     region number minus one. Rows are indexed by the first operand's
//     (multiplicand's or dividend's) fraction prefix, nibbles by the second
//     operand's (multiplier's or divisor's).
//   * The pipeline-cut table that says after which slot a register sits for
//     the 1-, 2-, 3- and 4-stage versions.
//
// The coefficient values and the region numbers follow the paper. The region
// boundaries were read off the partition plots cell by cell (colours for the
// 5-, 9- and 10-coefficient plots, outlines for the 3-coefficient ones), so a
// mis-read cell is possible. The alignment of the coefficients (LSB = 2^-15)
// is this design's reading of the 16-bit datapath word.
package rapid_pkg;

  // Supported error-reduction schemes.
  localparam int unsigned MUL_NCOEF_DEFAULT = 5;
  localparam int unsigned DIV_NCOEF_DEFAULT = 9;

  // LSB weight 2^-REF of the stored coefficients.
  // The 3-coefficient multiplier values are printed with 12 bits, so after
  // the three excluded zero MSBs their LSB weight is 2^-14.
  localparam int unsigned COEF_REF_FW_MUL  = 15;
  localparam int unsigned COEF_REF_FW_MUL3 = 14;
  localparam int unsigned COEF_REF_FW_DIV  = 16;

  typedef logic [15:0] coef16_t;
  typedef logic [63:0] map_row_t;

  // ---------------------------------------------------------------- multiplier
  localparam coef16_t MUL5_COEF [5] = '{
    16'b000_1001111111111,
    16'b000_1000011011101,
    16'b000_0110010001010,
    16'b000_0011110010111,
    16'b000_0000111110000
  };

  localparam map_row_t MUL5_MAP [16] = '{
      64'h4444444444444444, // x1 = 4'h0
      64'h4333333344444444, // x1 = 4'h1
      64'h4322222333344444, // x1 = 4'h2
      64'h4321112222333444, // x1 = 4'h3
      64'h4321001122233444, // x1 = 4'h4
      64'h4321000112223344, // x1 = 4'h5
      64'h4322100011222344, // x1 = 4'h6
      64'h4332110001122344, // x1 = 4'h7
      64'h4432211000112334, // x1 = 4'h8
      64'h4432221100012234, // x1 = 4'h9
      64'h4433222110001234, // x1 = 4'ha
      64'h4443322211001234, // x1 = 4'hb
      64'h4443332222111234, // x1 = 4'hc
      64'h4444433332222234, // x1 = 4'hd
      64'h4444444433333334, // x1 = 4'he
      64'h4444444444444444  // x1 = 4'hf
  };

  localparam coef16_t MUL3_COEF [3] = '{
    16'b0000_100000100111,
    16'b0000_010011101100,
    16'b0000_000100101001
  };

  localparam coef16_t MUL10_COEF [10] = '{
    16'b000_1001111000110,
    16'b000_1000110110001,
    16'b000_0111111000100,
    16'b000_0111000110101,
    16'b000_0110010100011,
    16'b000_0101110011111,
    16'b000_0100101000011,
    16'b000_0100001011101,
    16'b000_0011110000011,
    16'b000_0010101111111
  };

  localparam map_row_t MUL3_MAP [16] = '{
      64'h2222222222222222, // x1 = 4'h0
      64'h2222222222222222, // x1 = 4'h1
      64'h2211111112222222, // x1 = 4'h2
      64'h2211111112222222, // x1 = 4'h3
      64'h2211000011112222, // x1 = 4'h4
      64'h2211000011112222, // x1 = 4'h5
      64'h2211000000112222, // x1 = 4'h6
      64'h2211000000111122, // x1 = 4'h7
      64'h2211110000001122, // x1 = 4'h8
      64'h2222110000001122, // x1 = 4'h9
      64'h2222111100001122, // x1 = 4'ha
      64'h2222111100001122, // x1 = 4'hb
      64'h2222222111111122, // x1 = 4'hc
      64'h2222222111111122, // x1 = 4'hd
      64'h2222222222222222, // x1 = 4'he
      64'h2222222222222222  // x1 = 4'hf
  };

  localparam map_row_t MUL10_MAP [16] = '{
      64'h9999999999999999, // x1 = 4'h0
      64'h9666677777888889, // x1 = 4'h1
      64'h9655555777778889, // x1 = 4'h2
      64'h9653344556677889, // x1 = 4'h3
      64'h9653223455667789, // x1 = 4'h4
      64'h9754211234566789, // x1 = 4'h5
      64'h9754310123456779, // x1 = 4'h6
      64'h9775421012355779, // x1 = 4'h7
      64'h9775432101245779, // x1 = 4'h8
      64'h9776543210134579, // x1 = 4'h9
      64'h9876654321124579, // x1 = 4'ha
      64'h9877665443223569, // x1 = 4'hb
      64'h9887766554433569, // x1 = 4'hc
      64'h9888777775555569, // x1 = 4'hd
      64'h9888887777766669, // x1 = 4'he
      64'h9999999999999999  // x1 = 4'hf
  };

  // ------------------------------------------------------------------- divider
  localparam coef16_t DIV3_COEF [3] = '{
    16'b000_1000011111111,
    16'b000_0100010111111,
    16'b000_0001011111111
  };

  localparam coef16_t DIV5_COEF [5] = '{
    16'b000_1001111000100,
    16'b000_1000001000111,
    16'b000_0110110001101,
    16'b000_0101010100111,
    16'b000_0011011100100
  };

  localparam coef16_t DIV9_COEF [9] = '{
    16'b000_1001110001111,
    16'b000_1000110111100,
    16'b000_1000000010100,
    16'b000_0111001100010,
    16'b000_0110100001101,
    16'b000_0110010100101,
    16'b000_0101000101011,
    16'b000_0100111101000,
    16'b000_0100001101100
  };

  localparam map_row_t DIV5_MAP [16] = '{
      64'h4321000000012344, // x1 = 4'h0
      64'h4321000000123444, // x1 = 4'h1
      64'h4321111111234444, // x1 = 4'h2
      64'h4322222222344444, // x1 = 4'h3
      64'h4432222223444444, // x1 = 4'h4
      64'h4433333334444444, // x1 = 4'h5
      64'h4433333344444444, // x1 = 4'h6
      64'h4444444444444444, // x1 = 4'h7
      64'h4444444444444444, // x1 = 4'h8
      64'h4444444444444444, // x1 = 4'h9
      64'h4444444333333444, // x1 = 4'ha
      64'h4444443333333344, // x1 = 4'hb
      64'h4444442222222344, // x1 = 4'hc
      64'h4444421111112234, // x1 = 4'hd
      64'h4444210000001234, // x1 = 4'he
      64'h4442100000000134  // x1 = 4'hf
  };

  localparam map_row_t DIV9_MAP [16] = '{
      64'h8543100001234578, // x1 = 4'h0
      64'h8543211112345788, // x1 = 4'h1
      64'h8654322223457888, // x1 = 4'h2
      64'h8654433334578888, // x1 = 4'h3
      64'h8765444445788888, // x1 = 4'h4
      64'h8765555557888888, // x1 = 4'h5
      64'h8876666688888888, // x1 = 4'h6
      64'h8877778888888888, // x1 = 4'h7
      64'h8888888888777788, // x1 = 4'h8
      64'h8888888866666788, // x1 = 4'h9
      64'h8888886555555678, // x1 = 4'ha
      64'h8888865444445678, // x1 = 4'hb
      64'h8888654333344568, // x1 = 4'hc
      64'h8886543222234568, // x1 = 4'hd
      64'h8865432111123458, // x1 = 4'he
      64'h8654321000013458  // x1 = 4'hf
  };

  localparam map_row_t DIV3_MAP [16] = '{
      64'h2211000000011122, // x1 = 4'h0
      64'h2211000000011222, // x1 = 4'h1
      64'h2211000000012222, // x1 = 4'h2
      64'h2211111111112222, // x1 = 4'h3
      64'h2211111111222222, // x1 = 4'h4
      64'h2221111122222222, // x1 = 4'h5
      64'h2221112222222222, // x1 = 4'h6
      64'h2222222222222222, // x1 = 4'h7
      64'h2222222222222222, // x1 = 4'h8
      64'h2222222222222222, // x1 = 4'h9
      64'h2222222222222222, // x1 = 4'ha
      64'h2222221111111122, // x1 = 4'hb
      64'h2222221111111122, // x1 = 4'hc
      64'h2222110000000122, // x1 = 4'hd
      64'h2221100000000122, // x1 = 4'he
      64'h2211100000000122  // x1 = 4'hf
  };

  // Region index (0-based) of a fraction-prefix pair.
  function automatic logic [3:0] map_lookup(input map_row_t row, input logic [3:0] x2);
    return row[{x2, 2'b00} +: 4];
  endfunction

  // Re-align a stored coefficient (LSB weight 2^-ref_fw) to a fraction of FW
  // bits (LSB weight 2^-FW), truncating. Returned in the low FW+1 bits.
  function automatic logic [63:0] coef_align(input coef16_t c, input int unsigned fw,
                                             input int unsigned ref_fw);
    logic [63:0] w;
    w = 64'(c);
    if (fw >= ref_fw) return w << (fw - ref_fw);
    else              return w >> (ref_fw - fw);
  endfunction

  // ------------------------------------------------------------ pipeline cuts
  // Slots of the datapath, in order:
  //   slot 0        after log calculation and coefficient selection
  //   slot 1        after the two's-complement step (divider only; a plain
  //                 wire position in the multiplier)
  //   slot 2 + i    after ternary-adder slice i (i = 0 .. SEGS-1)
  // The last slot (2 + SEGS - 1) is the end of the ternary addition; the
  // integer-part addition and the anti-log shifter follow it. Every version
  // also registers its result, so a STAGES-stage unit has STAGES-1 internal
  // registers plus the output register.
  //
  // Positions for the 4-slice (16-bit fraction word) datapath:
  //   mul P2: after slice 2 (Frac+Error[11:0] | [15:12])
  //   mul P3: after slice 0 and after slice 3 ([3:0] | [15:4] | int+shift)
  //   mul P4: slot 0, after slice 1 and after slice 3
  //   div P2: after slice 2
  //   div P3: after two's complement and after slice 3
  //   div P4: slot 0, after slice 0 and after slice 3
  // For a different number of slices the slice positions are scaled.
  function automatic int unsigned scale_seg(input int unsigned s4, input int unsigned segs);
    int unsigned s;
    s = (s4 * segs + 2) / 4;          // nearest slice for a 4-slice reference
    if (s < 1) s = 1;
    if (s > segs) s = segs;
    return s - 1;                     // 0-based slice index
  endfunction

  function automatic bit pipe_cut(input int unsigned stages, input bit is_div,
                                  input int unsigned slot, input int unsigned segs);
    int unsigned last;
    last = 2 + segs - 1;
    unique case (stages)
      2: return slot == 2 + scale_seg(3, segs);
      3: return is_div ? (slot == 1 || slot == last)
                       : (slot == 2 + scale_seg(1, segs) || slot == last);
      4: return is_div ? (slot == 0 || slot == 2 + scale_seg(1, segs) || slot == last)
                       : (slot == 0 || slot == 2 + scale_seg(2, segs) || slot == last);
      default: return 1'b0;
    endcase
  endfunction

endpackage
