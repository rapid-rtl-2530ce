// tb_rapid_lod4: exhaustive check of the 4-bit leading-one detector.
//
// All 16 input values are applied; the expected nonzero flag and leading-one
// position come from a bit-by-bit loop in the testbench. The detector is
// combinational; a free-running clock only paces the watchdog.
module tb_rapid_lod4;
  logic       clk = 1'b0;
  logic [3:0] d;
  logic       nz;
  logic [1:0] pos;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rapid_lod4 dut (.d(d), .nz(nz), .pos(pos));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int exp_pos;
    for (int v = 0; v < 16; v++) begin
      d = 4'(v);
      #1;
      exp_pos = 0;
      for (int i = 0; i < 4; i++) if (v[i]) exp_pos = i;
      checks++;
      if (nz !== (v != 0)) begin
        failures++; $display("FAIL d=%b nz=%b", d, nz);
      end
      if (v != 0) begin
        checks++;
        if (pos !== 2'(exp_pos)) begin
          failures++; $display("FAIL d=%b pos=%0d expected %0d", d, pos, exp_pos);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
