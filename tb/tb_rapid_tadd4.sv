// tb_rapid_tadd4: exhaustive check of the 4-bit ternary-adder slice.
//
// Every combination of the three 4-bit addends and the carry-in values 0..2
// is applied (12288 cases); the testbench checks s + 16*cout against the
// integer sum a + b + c + cin. Combinational; the clock only paces the
// watchdog.
module tb_rapid_tadd4;
  logic       clk = 1'b0;
  logic [3:0] a, b, c, s;
  logic [1:0] cin, cout;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rapid_tadd4 dut (.a(a), .b(b), .c(c), .cin(cin), .s(s), .cout(cout));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++)
        for (int l = 0; l < 16; l++)
          for (int ci = 0; ci < 3; ci++) begin
            a = 4'(i); b = 4'(j); c = 4'(l); cin = 2'(ci);
            #1;
            checks++;
            if (int'(s) + 16 * int'(cout) != i + j + l + ci) begin
              failures++;
              $display("FAIL %0d+%0d+%0d+%0d gave s=%0d cout=%0d", i, j, l, ci, s, cout);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
