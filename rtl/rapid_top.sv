// rapid_top: a RAPID approximate multiplier and a RAPID approximate divider
// side by side, the two functional units the design consists of.
//
// Both units are fully pipelined and accept one operation per clock cycle on
// their own valid/operand ports; they share only the clock and reset. The
// defaults are the configuration drawn for the pipelines in the paper: a
// 16 x 16 multiplier with the 5-coefficient error reduction and a 16/8
// divider with the 9-coefficient error reduction, both with 4 stages.
//
// Interface: mul_* = multiplier operands and 32-bit product; div_* = 16-bit
// dividend, 8-bit divisor and quotient (DIV_QFRAC fraction bits). Results
// appear STAGES cycles after their operands, flagged by *_out_valid.
module rapid_top
  import rapid_pkg::*;
#(
  parameter int unsigned MUL_N      = 16,
  parameter int unsigned MUL_NCOEF  = MUL_NCOEF_DEFAULT,
  parameter int unsigned MUL_STAGES = 4,
  parameter int unsigned DIV_N      = 8,
  parameter int unsigned DIV_NCOEF  = DIV_NCOEF_DEFAULT,
  parameter int unsigned DIV_STAGES = 4,
  parameter int unsigned DIV_QFRAC  = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      mul_in_valid,
  input  logic [MUL_N-1:0]          mul_a,
  input  logic [MUL_N-1:0]          mul_b,
  output logic                      mul_out_valid,
  output logic [2*MUL_N-1:0]        mul_p,
  input  logic                      div_in_valid,
  input  logic [2*DIV_N-1:0]        div_a,
  input  logic [DIV_N-1:0]          div_b,
  output logic                      div_out_valid,
  output logic [DIV_N+DIV_QFRAC-1:0] div_q
);
  rapid_mul #(.N(MUL_N), .NCOEF(MUL_NCOEF), .STAGES(MUL_STAGES)) u_mul (
    .clk(clk), .rst_n(rst_n), .in_valid(mul_in_valid), .a(mul_a), .b(mul_b),
    .out_valid(mul_out_valid), .p(mul_p));

  rapid_div #(.N(DIV_N), .NCOEF(DIV_NCOEF), .STAGES(DIV_STAGES), .QFRAC(DIV_QFRAC)) u_div (
    .clk(clk), .rst_n(rst_n), .in_valid(div_in_valid), .a(div_a), .b(div_b),
    .out_valid(div_out_valid), .q(div_q));
endmodule
