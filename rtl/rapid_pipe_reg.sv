// rapid_pipe_reg: a pipeline slot that is either a register or a wire.
//
// The RAPID units are written once as a chain of slots; the number of
// pipeline stages decides, per slot, whether a register sits there
// (EN = 1) or the slot is a plain connection (EN = 0). A registered slot
// captures d on every rising clock edge; its valid bit is cleared by the
// asynchronous active-low reset, the data bits are not reset.
//
// Interface: clk, rst_n, vi/d in; vo/q out. W is the data width.
// Timing: one cycle from d to q when EN = 1, none when EN = 0.
// Lint note: with EN = 0 the clock and reset inputs are unused.
module rapid_pipe_reg #(
  parameter int unsigned W  = 8,
  parameter bit          EN = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         vi,
  input  logic [W-1:0] d,
  output logic         vo,
  output logic [W-1:0] q
);
  if (EN) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vo <= 1'b0;
      else        vo <= vi;
    end
    always_ff @(posedge clk) q <= d;
  end else begin : g_wire
    assign vo = vi;
    assign q  = d;
  end
endmodule
