// tb_rapid_top: end-to-end test of the RAPID multiplier and divider at their
// default sizes (16 x 16 multiplier, 16/8 divider, 4 pipeline stages each,
// no parameter overrides).
//
// Both units receive independent random operation streams with random
// bubbles. Every result is compared bit for bit with the integer reference
// model (rapid_ref_pkg) and must arrive exactly four cycles after its
// operation. Twice during the run the asynchronous reset is pulsed while
// operations are in flight; those operations must be dropped (no out_valid
// for them) and the units must resume cleanly.
//
// The testbench counts how often each mechanism of the design occurred and
// fails any that never did: back-to-back issue, bubbles, a zero multiplier
// operand, a fraction sum that carries into the integer bit (s >= 1), product
// saturation, a negative fraction difference in the divider, a zero dividend,
// a zero divisor, quotient overflow (dividend >= 2^8 * divisor), and a reset
// that flushed operations in flight.
module tb_rapid_top;
  import rapid_pkg::*;
  import rapid_ref_pkg::*;

  localparam int LAT  = 4;
  localparam int NOPS = 40000;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        mul_in_valid = 1'b0, div_in_valid = 1'b0;
  logic [15:0] mul_a = '0, mul_b = '0, div_a = '0;
  logic [7:0]  div_b = '0;
  logic        mul_out_valid, div_out_valid;
  logic [31:0] mul_p;
  logic [7:0]  div_q;
  int cyc = 0;
  int checks = 0, failures = 0;
  int mul_done = 0, div_done = 0;

  // mechanism counters
  int n_b2b = 0, n_bubble = 0, n_mul_zero = 0, n_mul_carry = 0, n_mul_sat = 0;
  int n_div_neg = 0, n_div_za = 0, n_div_zb = 0, n_div_ovf = 0, n_flush = 0;

  longint unsigned mul_exp [$], div_exp [$];
  int              mul_st [$], div_st [$];
  logic            mul_prev_valid = 1'b0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  rapid_top dut (
    .clk(clk), .rst_n(rst_n),
    .mul_in_valid(mul_in_valid), .mul_a(mul_a), .mul_b(mul_b),
    .mul_out_valid(mul_out_valid), .mul_p(mul_p),
    .div_in_valid(div_in_valid), .div_a(div_a), .div_b(div_b),
    .div_out_valid(div_out_valid), .div_q(div_q));

  initial begin : watchdog
    repeat (NOPS * 4 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // classify a multiplication by the path it takes
  task automatic classify_mul(input logic [15:0] a, input logic [15:0] b);
    longint unsigned x1, x2, c;
    int k1, k2;
    if (a == 0 || b == 0) begin
      n_mul_zero++;
      return;
    end
    k1 = int'(msb_pos(64'(a))); k2 = int'(msb_pos(64'(b)));
    x1 = (longint'(a) - (64'd1 << k1)) << (15 - k1);
    x2 = (longint'(b) - (64'd1 << k2)) << (15 - k2);
    c  = coef_of(1'b0, 5, region_of(1'b0, 5, int'(x1 >> 11), int'(x2 >> 11)), 15);
    if (x1 + x2 + c >= 64'd32768) n_mul_carry++;
    if (ref_mul(longint'(a), longint'(b), 16, 5) == 64'hFFFF_FFFF) n_mul_sat++;
  endtask

  task automatic classify_div(input logic [15:0] a, input logic [7:0] b);
    longint unsigned x1, x2, c;
    int k1, k2;
    if (b == 0) begin n_div_zb++; return; end
    if (a == 0) begin n_div_za++; return; end
    if (longint'(a) >= 256 * longint'(b)) n_div_ovf++;
    k1 = int'(msb_pos(64'(a))); k2 = int'(msb_pos(64'(b)));
    x1 = (longint'(a) - (64'd1 << k1)) << (15 - k1);
    x2 = (longint'(b) - (64'd1 << k2)) << (15 - k2);
    c  = coef_of(1'b1, 9, region_of(1'b1, 9, int'(x1 >> 11), int'(x2 >> 11)), 15);
    if (x1 < x2 + c) n_div_neg++;
  endtask

  // scoreboards
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      if (mul_exp.size() + div_exp.size() != 0) n_flush++;
      mul_exp.delete(); mul_st.delete();
      div_exp.delete(); div_st.delete();
      mul_prev_valid <= 1'b0;
    end else begin
      if (mul_in_valid) begin
        mul_exp.push_back(ref_mul(longint'(mul_a), longint'(mul_b), 16, 5));
        mul_st.push_back(cyc);
        classify_mul(mul_a, mul_b);
        if (mul_prev_valid) n_b2b++;
      end else begin
        n_bubble++;
      end
      mul_prev_valid <= mul_in_valid;
      if (div_in_valid) begin
        div_exp.push_back(ref_div(longint'(div_a), longint'(div_b), 8, 9, 0));
        div_st.push_back(cyc);
        classify_div(div_a, div_b);
      end
      if (mul_out_valid) begin
        checks++;
        if (mul_exp.size() == 0) begin
          failures++; $display("FAIL mul: result without an operation at cycle %0d", cyc);
        end else begin
          longint unsigned e;
          int st;
          e = mul_exp.pop_front(); st = mul_st.pop_front();
          if (cyc - st != LAT || longint'(mul_p) != e) begin
            failures++;
            $display("FAIL mul: p=%0d expected %0d, latency %0d", mul_p, e, cyc - st);
          end
          mul_done++;
        end
      end
      if (div_out_valid) begin
        checks++;
        if (div_exp.size() == 0) begin
          failures++; $display("FAIL div: result without an operation at cycle %0d", cyc);
        end else begin
          longint unsigned e;
          int st;
          e = div_exp.pop_front(); st = div_st.pop_front();
          if (cyc - st != LAT || longint'(div_q) != e) begin
            failures++;
            $display("FAIL div: q=%0d expected %0d, latency %0d", div_q, e, cyc - st);
          end
          div_done++;
        end
      end
    end
  end

  function automatic logic [15:0] rand_operand();
    return 16'($urandom() >> ($urandom() % 20));
  endfunction

  task automatic check_count(input string what, input int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++; $display("FAIL mechanism never occurred: %s", what);
    end
  endtask

  initial begin : stimulus
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NOPS; i++) begin
      @(negedge clk);
      if (i == NOPS / 3 || i == 2 * NOPS / 3) begin
        // reset pulse with operations in flight
        mul_in_valid = 1'b1; div_in_valid = 1'b1;
        @(negedge clk);
        #2 rst_n = 1'b0;
        #3 rst_n = 1'b1;
      end
      mul_in_valid = ($urandom() % 6) != 0;
      div_in_valid = ($urandom() % 6) != 0;
      mul_a = rand_operand();
      mul_b = rand_operand();
      if ($urandom() % 64 == 0) begin mul_a = '1; mul_b = '1; end
      div_b = 8'($urandom() >> ($urandom() % 30));
      if ($urandom() % 8 == 0) div_a = rand_operand();
      else div_a = 16'($urandom_range(0, 256 * int'(div_b) + 255)) >> ($urandom() % 4);
    end
    @(negedge clk);
    mul_in_valid = 1'b0; div_in_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (mul_exp.size() != 0 || div_exp.size() != 0) begin
      failures++; $display("FAIL operations still outstanding at the end");
    end
    $display("completed: %0d multiplications, %0d divisions", mul_done, div_done);
    check_count("back-to-back issue", n_b2b);
    check_count("bubble", n_bubble);
    check_count("zero multiplier operand", n_mul_zero);
    check_count("fraction sum >= 1", n_mul_carry);
    check_count("product saturation", n_mul_sat);
    check_count("negative fraction difference", n_div_neg);
    check_count("zero dividend", n_div_za);
    check_count("zero divisor", n_div_zb);
    check_count("quotient overflow", n_div_ovf);
    check_count("reset flushed the pipeline", n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
