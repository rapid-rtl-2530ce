// tb_rapid_antilog_div: check of the divider's integer subtraction and
// anti-log shifter (16/8 divider).
//
// The worked example 58 / 18 (k = 5 and 4, fraction difference 0.1011b
// without a coefficient) must give 3 with an integer output and 3.375 (864 at
// 8 fraction bits) with a fixed-point output. Then random integer parts and
// difference words of both signs are compared with the value worked out in
// the testbench from Mitchell's formula, and zero dividend, zero divisor and
// quotient overflow are checked. Combinational; the clock only paces the
// watchdog.
module tb_rapid_antilog_div;
  logic        clk = 1'b0;
  logic [3:0]  ka;
  logic [2:0]  kb;
  logic [17:0] s;
  logic        za, zb;
  logic [7:0]  q0;
  logic [15:0] q8;
  int checks = 0, failures = 0;
  int neg_cases = 0, sat_cases = 0;

  always #5 clk = ~clk;

  rapid_antilog_div #(.N(8), .QFRAC(0)) dut0 (.ka(ka), .kb(kb), .s(s), .za(za), .zb(zb), .q(q0));
  rapid_antilog_div #(.N(8), .QFRAC(8)) dut8 (.ka(ka), .kb(kb), .s(s), .za(za), .zb(zb), .q(q8));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // d = signed difference with 15 fraction bits; quotient * 2^qf, saturated
  function automatic longint unsigned model(input int e0, input longint signed d,
                                            input int qf);
    longint unsigned m, full;
    int e;
    if (d >= 0) begin m = (64'd1 << 15) + longint'(d); e = e0;     end
    else        begin m = (64'd1 << 16) + longint'(d); e = e0 - 1; end
    if (e + qf >= 15) full = m << (e + qf - 15);
    else              full = m >> (15 - e - qf);
    if (full >= (64'd1 << (8 + qf))) full = (64'd1 << (8 + qf)) - 1;
    return full;
  endfunction

  initial begin : stimulus
    longint signed d;
    longint unsigned e0v, e8v;
    ka = 4'd5; kb = 3'd4; za = 1'b0; zb = 1'b0;
    s = 18'(longint'(18'h20000) + longint'(16'b1011_0000_0000_000));
    #1;
    checks++;
    if (q0 !== 8'd3 || q8 !== 16'd864) begin
      failures++; $display("FAIL worked example 58 / 18: %0d and %0d, expected 3 and 864", q0, q8);
    end
    for (int i = 0; i < 20000; i++) begin
      ka = 4'($urandom()); kb = 3'($urandom());
      // x1 - x2 - c lies in (-1.32, 1)
      d  = longint'($urandom_range(0, 32'hA8F6 + 32'h7FFF)) - 64'shA8F6;
      s  = 18'(64'sh20000 + d);
      za = ($urandom() % 64) == 0;
      zb = ($urandom() % 64) == 0;
      #1;
      if (zb) begin
        e0v = 8'hFF; e8v = 16'hFFFF;
      end else if (za) begin
        e0v = 0; e8v = 0;
      end else begin
        e0v = model(int'(ka) - int'(kb), d, 0);
        e8v = model(int'(ka) - int'(kb), d, 8);
      end
      if (d < 0) neg_cases++;
      if (!zb && !za && e0v == 8'hFF) sat_cases++;
      checks++;
      if (longint'(q0) != e0v || longint'(q8) != e8v) begin
        failures++;
        $display("FAIL ka=%0d kb=%0d d=%0d za=%b zb=%b: %0d/%0d expected %0d/%0d",
                 ka, kb, d, za, zb, q0, q8, e0v, e8v);
      end
    end
    checks++;
    if (neg_cases == 0 || sat_cases == 0) begin
      failures++; $display("FAIL negative difference or overflow never generated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
