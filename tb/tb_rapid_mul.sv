// tb_rapid_mul: check of the pipelined RAPID multiplier.
//
// Eight instances run side by side from one random operand stream: the 16-bit
// unit with 1, 2, 3 and 4 stages, an 8-bit unit with 3 stages, a 32-bit
// unit with 4 stages (all 5 coefficients), and 16-bit units with the 3- and
// 10-coefficient schemes (3 and 4 stages). Operands change on the falling edge and in_valid is
// random, so back-to-back operations and bubbles both occur. Each instance
// has a scoreboard that stores the bit-exact expected product from the
// integer reference model (rapid_ref_pkg) with the cycle the operation
// entered. Every result must arrive exactly STAGES cycles later, in order
// and correct. A few operand pairs are forced: the worked example 58 x 18,
// zero operands and the largest operands.
//
// For the 16-bit, 4-stage unit the testbench also measures the mean
// relative error of its results against the exact product and against plain
// Mitchell multiplication, and requires the coefficients to improve on
// Mitchell and the mean error to stay below 2 %. The 3- and 10-coefficient
// schemes are measured too and must stay below 2.5 % and 0.7 x Mitchell.
module tb_rapid_mul;
  import rapid_ref_pkg::*;

  localparam int NI = 8;
  localparam int NOF [NI] = '{16, 16, 16, 16, 8, 32, 16, 16};
  localparam int SOF [NI] = '{1, 2, 3, 4, 3, 4, 3, 4};
  localparam int COF [NI] = '{5, 5, 5, 5, 5, 5, 3, 10};
  localparam int NOPS = 20000;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        in_valid = 1'b0;
  logic [31:0] a = '0, b = '0;
  int          cyc = 0;
  int checks = 0, failures = 0;
  int done [NI];
  real are_rapid = 0.0, are_mitchell = 0.0, are3 = 0.0, are10 = 0.0;
  int  n_err = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (NOPS * 3 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NI; g++) begin : g_dut
    localparam int N = NOF[g];
    localparam int ST = SOF[g];
    localparam int NC = COF[g];
    logic           out_valid;
    logic [2*N-1:0] p;
    longint unsigned exp_q [$];
    int              stamp_q [$];

    rapid_mul #(.N(N), .NCOEF(NC), .STAGES(ST)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
      .a(a[N-1:0]), .b(b[N-1:0]), .out_valid(out_valid), .p(p));

    initial done[g] = 0;

    always @(posedge clk) begin
      if (rst_n && in_valid) begin
        exp_q.push_back(ref_mul(longint'(a[N-1:0]), longint'(b[N-1:0]), N, NC));
        stamp_q.push_back(cyc);
      end
      if (rst_n && out_valid) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL N=%0d ST=%0d: result without an operation", N, ST);
        end else begin
          longint unsigned e;
          int st;
          e  = exp_q.pop_front();
          st = stamp_q.pop_front();
          if (cyc - st != ST) begin
            failures++;
            $display("FAIL N=%0d ST=%0d: latency %0d cycles", N, ST, cyc - st);
          end
          if (longint'(p) != e) begin
            failures++;
            $display("FAIL N=%0d ST=%0d: p=%0d expected %0d", N, ST, p, e);
          end
          done[g]++;
        end
      end
    end
  end

  function automatic real abs_rel(input longint unsigned v, input real exact);
    real r;
    r = (real'(v) - exact) / exact;
    return (r < 0.0) ? -r : r;
  endfunction

  // accuracy of the 16-bit 4-stage instance, measured at the input side
  always @(posedge clk) begin
    if (rst_n && in_valid && a[15:0] != 0 && b[15:0] != 0) begin
      real exact;
      exact = real'(a[15:0]) * real'(b[15:0]);
      are_rapid    += (real'(ref_mul(longint'(a[15:0]), longint'(b[15:0]), 16, 5)) - exact) / exact
                      * ((real'(ref_mul(longint'(a[15:0]), longint'(b[15:0]), 16, 5)) >= exact) ? 1.0 : -1.0);
      are_mitchell += (real'(ref_mul(longint'(a[15:0]), longint'(b[15:0]), 16, 5, 1'b0)) - exact) / exact
                      * ((real'(ref_mul(longint'(a[15:0]), longint'(b[15:0]), 16, 5, 1'b0)) >= exact) ? 1.0 : -1.0);
      are3  += abs_rel(ref_mul(longint'(a[15:0]), longint'(b[15:0]), 16, 3), exact);
      are10 += abs_rel(ref_mul(longint'(a[15:0]), longint'(b[15:0]), 16, 10), exact);
      n_err++;
    end
  end

  initial begin : stimulus
    int sent;
    sent = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (sent < NOPS) begin
      @(negedge clk);
      in_valid = ($urandom() % 8) != 0;
      case (sent)
        0: begin a = 32'd58; b = 32'd18; end
        1: begin a = 32'd0; b = $urandom(); end
        2: begin a = $urandom(); b = 32'd0; end
        3: begin a = '1; b = '1; end
        4: begin a = 32'd1; b = 32'd1; end
        default: begin
          a = $urandom() >> ($urandom() % 16);
          b = $urandom() >> ($urandom() % 16);
        end
      endcase
      if (sent < 5) in_valid = 1'b1;
      if (in_valid) sent++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (8) @(negedge clk);
    for (int g = 0; g < NI; g++) begin
      checks++;
      if (done[g] != NOPS) begin
        failures++; $display("FAIL instance %0d completed %0d of %0d", g, done[g], NOPS);
      end
    end
    // The accuracy sample uses the model, whose equality with the hardware
    // is checked above for every operation.
    are_rapid    = 100.0 * are_rapid / n_err;
    are_mitchell = 100.0 * are_mitchell / n_err;
    $display("16-bit mean relative error: RAPID %0.3f %%, Mitchell %0.3f %%", are_rapid, are_mitchell);
    checks++;
    if (!(are_rapid < 2.0 && are_rapid < 0.6 * are_mitchell)) begin
      failures++; $display("FAIL accuracy");
    end
    are3  = 100.0 * are3 / n_err;
    are10 = 100.0 * are10 / n_err;
    $display("16-bit mean relative error: 3 coefficients %0.3f %%, 10 coefficients %0.3f %%",
             are3, are10);
    checks++;
    if (!(are3 < 2.5 && are3 < 0.7 * are_mitchell && are10 < 2.5 && are10 < 0.7 * are_mitchell)) begin
      failures++; $display("FAIL accuracy of the 3- or 10-coefficient scheme");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
