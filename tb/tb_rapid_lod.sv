// tb_rapid_lod: check of the hierarchical leading-one detector.
//
// A 16-bit instance is checked exhaustively, an 8-bit instance exhaustively
// including the worked example 0101_0101 -> position 6 (binary 110), and a
// 32-bit instance with random values of random length. Expected positions
// come from a plain loop over the bits. Combinational; the clock only paces
// the watchdog.
module tb_rapid_lod;
  logic        clk = 1'b0;
  logic [15:0] a16;
  logic [3:0]  k16;
  logic        z16;
  logic [7:0]  a8;
  logic [2:0]  k8;
  logic        z8;
  logic [31:0] a32;
  logic [4:0]  k32;
  logic        z32;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rapid_lod #(.N(16)) dut16 (.a(a16), .k(k16), .zero(z16));
  rapid_lod #(.N(8))  dut8  (.a(a8),  .k(k8),  .zero(z8));
  rapid_lod #(.N(32)) dut32 (.a(a32), .k(k32), .zero(z32));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int msb(input longint unsigned v);
    int m = 0;
    for (int i = 0; i < 64; i++) if (v[i]) m = i;
    return m;
  endfunction

  task automatic expect_k(input string tag, input longint unsigned v, input int k,
                          input bit zero);
    checks++;
    if (zero !== (v == 0)) begin
      failures++; $display("FAIL %s a=%h zero=%b", tag, v, zero);
    end else if (v != 0 && k != msb(v)) begin
      failures++; $display("FAIL %s a=%h k=%0d expected %0d", tag, v, k, msb(v));
    end
  endtask

  initial begin : stimulus
    for (int v = 0; v < 65536; v++) begin
      a16 = 16'(v); #1;
      expect_k("n16", longint'(v), int'(k16), z16);
    end
    for (int v = 0; v < 256; v++) begin
      a8 = 8'(v); #1;
      expect_k("n8", longint'(v), int'(k8), z8);
    end
    a8 = 8'b0101_0101; #1;
    checks++;
    if (k8 !== 3'b110) begin
      failures++; $display("FAIL worked example: k=%b expected 110", k8);
    end
    for (int i = 0; i < 20000; i++) begin
      a32 = $urandom() >> ($urandom() % 32); #1;
      expect_k("n32", longint'(a32), int'(k32), z32);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
