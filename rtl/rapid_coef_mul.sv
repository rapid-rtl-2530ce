// rapid_coef_mul: light-weight error-coefficient selection of the RAPID
// multiplier.
//
// Only the four MSBs of each fractional part are looked at. The 16 x 16 grid of
// prefix pairs is grouped into NCOEF regions of similar Mitchell error, and
// each region has one coefficient that is later added to the two fractions by
// the ternary adder. The selection is a small multiplexer: the prefix pair
// picks a region number from the partition map, the region number picks the
// coefficient. Nothing here depends on the integer parts, so the same table
// serves every operand width.
//
// Interface: xa4, xb4 = fraction prefixes of the two operands; coef = the
// coefficient aligned to a fraction of FW bits (LSB weight 2^-FW), region =
// the selected region (0-based, for observation). Combinational.
//
// The 3-, 5- and 10-coefficient schemes, their coefficient values and region
// numbers follow the paper; the region boundaries were read from its partition
// plots. NCOEF selects the scheme (default 5, the one the paper evaluates
// most). The 3-coefficient values carry 12 bits, so they are aligned from LSB
// weight 2^-14 rather than 2^-15.
module rapid_coef_mul
  import rapid_pkg::*;
#(
  parameter int unsigned NCOEF = MUL_NCOEF_DEFAULT,
  parameter int unsigned FW    = 15
) (
  input  logic [3:0]  xa4,
  input  logic [3:0]  xb4,
  output logic [FW:0] coef,
  output logic [3:0]  region
);
  always_comb begin
    coef = '0;
    if (NCOEF == 3) begin
      region = map_lookup(MUL3_MAP[xa4], xb4);
      for (int unsigned r = 0; r < 3; r++)
        if (region == 4'(r)) coef = (FW+1)'(coef_align(MUL3_COEF[r], FW, COEF_REF_FW_MUL3));
    end else if (NCOEF == 10) begin
      region = map_lookup(MUL10_MAP[xa4], xb4);
      for (int unsigned r = 0; r < 10; r++)
        if (region == 4'(r)) coef = (FW+1)'(coef_align(MUL10_COEF[r], FW, COEF_REF_FW_MUL));
    end else begin
      region = map_lookup(MUL5_MAP[xa4], xb4);
      for (int unsigned r = 0; r < 5; r++)
        if (region == 4'(r)) coef = (FW+1)'(coef_align(MUL5_COEF[r], FW, COEF_REF_FW_MUL));
    end
  end

  initial begin
    assert (NCOEF == 3 || NCOEF == 5 || NCOEF == 10)
      else $error("rapid_coef_mul: NCOEF must be 3, 5 or 10");
  end
endmodule
