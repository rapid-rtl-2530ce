// rapid_coef_div: light-weight error-coefficient selection of the RAPID
// divider.
//
// As in the multiplier, the four MSBs of the dividend's and the divisor's
// fractional parts index a partition of the 16 x 16 prefix grid into NCOEF
// regions, and each region has one coefficient. In the divider the selected
// coefficient is subtracted together with the divisor's fraction, because
// Mitchell's division over-estimates the quotient.
//
// Interface: xa4 = dividend fraction prefix, xb4 = divisor fraction prefix;
// coef = coefficient aligned to FW fraction bits (LSB weight 2^-FW), region =
// selected region (0-based). Combinational.
//
// The 3-, 5- and 9-coefficient schemes, coefficient values and region numbers
// follow the paper; region boundaries were read from its partition plots.
// NCOEF selects the scheme (default 9).
module rapid_coef_div
  import rapid_pkg::*;
#(
  parameter int unsigned NCOEF = DIV_NCOEF_DEFAULT,
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
      region = map_lookup(DIV3_MAP[xa4], xb4);
      for (int unsigned r = 0; r < 3; r++)
        if (region == 4'(r)) coef = (FW+1)'(coef_align(DIV3_COEF[r], FW, COEF_REF_FW_DIV));
    end else if (NCOEF == 5) begin
      region = map_lookup(DIV5_MAP[xa4], xb4);
      for (int unsigned r = 0; r < 5; r++)
        if (region == 4'(r)) coef = (FW+1)'(coef_align(DIV5_COEF[r], FW, COEF_REF_FW_DIV));
    end else begin
      region = map_lookup(DIV9_MAP[xa4], xb4);
      for (int unsigned r = 0; r < 9; r++)
        if (region == 4'(r)) coef = (FW+1)'(coef_align(DIV9_COEF[r], FW, COEF_REF_FW_DIV));
    end
  end

  initial begin
    assert (NCOEF == 3 || NCOEF == 5 || NCOEF == 9)
      else $error("rapid_coef_div: NCOEF must be 3, 5 or 9");
  end
endmodule
