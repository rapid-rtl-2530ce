// tb_rapid_alog: check of the Mitchell approximate-log unit.
//
// For every 16-bit input the testbench rebuilds the operand from the outputs,
// a = 2^k + x / 2^(15-k), and requires the bits of x below the operand's own
// bits to be zero. It also checks the worked example 58 = 2^5 (1 + 0.11010b)
// and the zero flag. Combinational; the clock only paces the watchdog.
module tb_rapid_alog;
  logic        clk = 1'b0;
  logic [15:0] a;
  logic [3:0]  k;
  logic [14:0] x;
  logic        zero;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rapid_alog #(.N(16)) dut (.a(a), .k(k), .x(x), .zero(zero));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    longint unsigned rebuilt, lowmask;
    int m;
    for (int v = 1; v < 65536; v++) begin
      a = 16'(v); #1;
      m = 0;
      for (int i = 0; i < 16; i++) if (v[i]) m = i;
      rebuilt = (64'd1 << k) + (longint'(x) >> (15 - k));
      lowmask = (64'd1 << (15 - k)) - 1;
      checks++;
      if (zero || int'(k) != m || rebuilt != longint'(v) || (longint'(x) & lowmask) != 0) begin
        failures++; $display("FAIL a=%0d k=%0d x=%b zero=%b", v, k, x, zero);
      end
    end
    a = 16'd58; #1;
    checks++;
    if (k !== 4'd5 || x !== 15'b110100000000000) begin
      failures++; $display("FAIL worked example 58: k=%0d x=%b", k, x);
    end
    a = 16'd0; #1;
    checks++;
    if (zero !== 1'b1) begin
      failures++; $display("FAIL zero flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
