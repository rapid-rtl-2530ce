// tb_rapid_antilog_mul: check of the multiplier's integer addition and
// anti-log shifter (16-bit unit).
//
// The worked example 58 x 18 (k = 5 and 4, fraction sum 0.1111b without a
// coefficient) must give 992. Then random integer parts and sum words, with
// and without the carry into the integer bit, are compared with the value
// computed in the testbench as floor(2^(k1+k2) * (1 + s)) or
// floor(2^(k1+k2+1) * s), and the zero flag is checked. Combinational; the
// clock only paces the watchdog. Products above 32 bits must saturate.
module tb_rapid_antilog_mul;
  logic        clk = 1'b0;
  logic [3:0]  ka, kb;
  logic [17:0] s;
  logic        zero;
  logic [31:0] p;
  int checks = 0, failures = 0;
  int carry_cases = 0;

  always #5 clk = ~clk;

  rapid_antilog_mul #(.N(16)) dut (.ka(ka), .kb(kb), .s(s), .zero(zero), .p(p));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned model(input int k, input longint unsigned sw);
    longint unsigned m;
    if (sw >= (64'd1 << 15)) m = 2 * sw;            // sum >= 1: 2^(k+1) * s
    else                     m = (64'd1 << 15) + sw; // sum < 1: 2^k * (1 + s)
    m = (m << k) >> 15;
    if (m > 64'hFFFF_FFFF) m = 64'hFFFF_FFFF;         // saturate
    return m;
  endfunction

  initial begin : stimulus
    longint unsigned exp_p;
    ka = 4'd5; kb = 4'd4; s = 18'b000_111100000000000; zero = 1'b0;
    #1;
    checks++;
    if (p !== 32'd992) begin
      failures++; $display("FAIL worked example 58 x 18: %0d, expected 992", p);
    end
    for (int i = 0; i < 20000; i++) begin
      ka = 4'($urandom()); kb = 4'($urandom());
      // fractions below 1 each plus a coefficient below 0.32: sum below 2.32
      s = 18'($urandom_range(0, 32'h12A00));
      zero = ($urandom() % 64) == 0;
      #1;
      exp_p = zero ? 0 : model(int'(ka) + int'(kb), longint'(s));
      if (s >= 18'h08000) carry_cases++;
      checks++;
      if (longint'(p) != exp_p) begin
        failures++; $display("FAIL ka=%0d kb=%0d s=%h: %0d expected %0d", ka, kb, s, p, exp_p);
      end
    end
    checks++;
    if (carry_cases == 0) begin
      failures++; $display("FAIL no sum >= 1 case was generated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
