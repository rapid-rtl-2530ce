// tb_rapid_div: check of the pipelined RAPID divider.
//
// Nine instances run side by side from one random operand stream: the 16/8
// divider with 1, 2, 3 and 4 stages (integer quotient), a 16/8 divider with
// 4 stages and 8 fraction bits in the quotient, an 8/4 divider with 2 stages
// and a 32/16 divider with 4 stages (its upper operand bits are drawn
// separately), all with 9 coefficients, plus a 16/8 divider with 5
// coefficients (3 stages) and one with 3 coefficients (4 stages, 8 quotient
// fraction bits). Operands change on the falling edge and in_valid is random. Each
// instance has a scoreboard with the bit-exact expected quotient from the
// integer reference model (rapid_ref_pkg) and the cycle the operation
// entered; every result must arrive exactly STAGES cycles later, in order and
// correct. Forced operand pairs: the worked example 58 / 18, a zero
// dividend, a zero divisor and an overflowing quotient. Most random operands
// satisfy dividend < 2^N * divisor, the range the 2N/N division is defined
// for; some do not, to exercise saturation.
//
// On the fixed-point 16/8 instance the testbench also measures the mean
// relative error over operations in range, against plain Mitchell division,
// and requires the coefficients to improve on it and the error to stay
// below 2.5 %. The 3- and 5-coefficient schemes are measured the same way
// and must also stay below 2.5 % and 0.7 x Mitchell.
module tb_rapid_div;
  import rapid_ref_pkg::*;

  localparam int NI = 9;
  localparam int NOF [NI] = '{8, 8, 8, 8, 8, 4, 16, 8, 8};
  localparam int SOF [NI] = '{1, 2, 3, 4, 4, 2, 4, 3, 4};
  localparam int QOF [NI] = '{0, 0, 0, 0, 8, 0, 0, 0, 8};
  localparam int COF [NI] = '{9, 9, 9, 9, 9, 9, 9, 5, 3};
  localparam int NOPS = 20000;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        in_valid = 1'b0;
  logic [31:0] a = '0;
  logic [15:0] b = '0;
  int          cyc = 0;
  int checks = 0, failures = 0;
  int done [NI];
  real are_rapid = 0.0, are_mitchell = 0.0, are3 = 0.0, are5 = 0.0;
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
    localparam int N  = NOF[g];
    localparam int ST = SOF[g];
    localparam int QF = QOF[g];
    localparam int NC = COF[g];
    logic            out_valid;
    logic [N+QF-1:0] q;
    longint unsigned exp_q [$];
    int              stamp_q [$];

    rapid_div #(.N(N), .NCOEF(NC), .STAGES(ST), .QFRAC(QF)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
      .a(a[2*N-1:0]), .b(b[N-1:0]), .out_valid(out_valid), .q(q));

    initial done[g] = 0;

    always @(posedge clk) begin
      if (rst_n && in_valid) begin
        exp_q.push_back(ref_div(longint'(a[2*N-1:0]), longint'(b[N-1:0]), N, NC, QF));
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
          if (longint'(q) != e) begin
            failures++;
            $display("FAIL N=%0d ST=%0d QF=%0d: q=%0d expected %0d", N, ST, QF, q, e);
          end
          done[g]++;
        end
      end
    end
  end

  // accuracy of the fixed-point 16/8 unit, for quotients in range
  always @(posedge clk) begin
    if (rst_n && in_valid && a[15:0] != 0 && b[7:0] != 0 && longint'(a[15:0]) < 256 * longint'(b[7:0])) begin
      real exact, r, m;
      exact = real'(a[15:0]) / real'(b[7:0]);
      r = real'(ref_div(longint'(a[15:0]), longint'(b[7:0]), 8, 9, 8)) / 256.0;
      m = real'(ref_div(longint'(a[15:0]), longint'(b[7:0]), 8, 9, 8, 1'b0)) / 256.0;
      are_rapid    += ((r >= exact) ? (r - exact) : (exact - r)) / exact;
      are_mitchell += ((m >= exact) ? (m - exact) : (exact - m)) / exact;
      r = real'(ref_div(longint'(a[15:0]), longint'(b[7:0]), 8, 3, 8)) / 256.0;
      are3 += ((r >= exact) ? (r - exact) : (exact - r)) / exact;
      r = real'(ref_div(longint'(a[15:0]), longint'(b[7:0]), 8, 5, 8)) / 256.0;
      are5 += ((r >= exact) ? (r - exact) : (exact - r)) / exact;
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
        0: begin a = 32'd58; b = 16'd18; end
        1: begin a = 32'd0; b = 16'($urandom() | 1); end
        2: begin a = $urandom(); b = 16'd0; end
        3: begin a = 32'hFFFF_FFFF; b = 16'd1; end
        4: begin a = 32'd1; b = 16'hFFFF; end
        default: begin
          b[7:0] = 8'($urandom_range(1, 255));
          if ($urandom() % 16 == 0) a[15:0] = 16'($urandom());
          else a[15:0] = 16'($urandom_range(1, 256 * int'(b[7:0]) - 1)) >> ($urandom() % 8);
          // upper halves for the 32/16 unit: mostly in range
          b[15:8] = 8'($urandom());
          if ($urandom() % 16 == 0) a[31:16] = 16'($urandom());
          else a[31:16] = 16'($urandom_range(0, int'(b[15:8]))) >> ($urandom() % 12);
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
    $display("16/8 mean relative error (8 fraction bits): RAPID %0.3f %%, Mitchell %0.3f %%",
             are_rapid, are_mitchell);
    checks++;
    if (!(are_rapid < 2.5 && are_rapid < 0.7 * are_mitchell)) begin
      failures++; $display("FAIL accuracy");
    end
    are3 = 100.0 * are3 / n_err;
    are5 = 100.0 * are5 / n_err;
    $display("16/8 mean relative error: 3 coefficients %0.3f %%, 5 coefficients %0.3f %%",
             are3, are5);
    checks++;
    if (!(are3 < 2.5 && are3 < 0.7 * are_mitchell && are5 < 2.5 && are5 < 0.7 * are_mitchell)) begin
      failures++; $display("FAIL accuracy of the 3- or 5-coefficient scheme");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
