// tb_rapid_coef_div: check of the divider's error-coefficient selection.
//
// A 9-, a 5- and a 3-coefficient instance (16/8 divider, 15 fraction
// bits) are driven with all 256 prefix pairs. The coefficient must be the
// table value of the selected region (typed in here), with LSB weight 2^-16
// truncated to the 2^-15 datapath LSB, and the region must be in range. Cells
// where the partition plots print a region number are checked against it.
// Combinational; the clock only paces the watchdog.
module tb_rapid_coef_div;
  logic        clk = 1'b0;
  logic [3:0]  xa4, xb4;
  logic [15:0] coef9, coef5;
  logic [3:0]  region9, region5;
  int checks = 0, failures = 0;
  logic [3:0]  r9 [16][16];
  logic [3:0]  r5 [16][16];
  logic [15:0] coef3;
  logic [3:0]  region3;
  logic [3:0]  r3 [16][16];
  localparam logic [12:0] TABLE3 [3] = '{13'b1000011111111, 13'b0100010111111, 13'b0001011111111};

  localparam logic [12:0] TABLE9 [9] = '{
    13'b1001110001111, 13'b1000110111100, 13'b1000000010100, 13'b0111001100010,
    13'b0110100001101, 13'b0110010100101, 13'b0101000101011, 13'b0100111101000,
    13'b0100001101100};
  localparam logic [12:0] TABLE5 [5] = '{
    13'b1001111000100, 13'b1000001000111, 13'b0110110001101,
    13'b0101010100111, 13'b0011011100100};

  always #5 clk = ~clk;

  rapid_coef_div #(.NCOEF(9), .FW(15)) dut9 (.xa4(xa4), .xb4(xb4), .coef(coef9), .region(region9));
  rapid_coef_div #(.NCOEF(5), .FW(15)) dut5 (.xa4(xa4), .xb4(xb4), .coef(coef5), .region(region5));
  rapid_coef_div #(.NCOEF(3), .FW(15)) dut3 (.xa4(xa4), .xb4(xb4), .coef(coef3), .region(region3));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_label3(input int x1, input int x2, input int label);
    checks++;
    if (int'(r3[x1][x2]) + 1 != label) begin
      failures++;
      $display("FAIL printed label (3-coef): cell (%0d,%0d) is region %0d, plot says %0d",
               x1, x2, int'(r3[x1][x2]) + 1, label);
    end
  endtask

  task automatic check_label(input bit nine, input int x1, input int x2, input int label);
    int got;
    got = nine ? int'(r9[x1][x2]) + 1 : int'(r5[x1][x2]) + 1;
    checks++;
    if (got != label) begin
      failures++;
      $display("FAIL printed label (%0d-coef): cell (%0d,%0d) is region %0d, plot says %0d",
               nine ? 9 : 5, x1, x2, got, label);
    end
  endtask

  initial begin : stimulus
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        xa4 = 4'(i); xb4 = 4'(j);
        #1;
        r9[i][j] = region9;
        r5[i][j] = region5;
        checks += 2;
        if (region9 > 4'd8 || coef9 !== {4'b0000, TABLE9[region9][12:1]}) begin
          failures++; $display("FAIL 9-coef cell (%0d,%0d): region %0d coef %b", i, j, region9, coef9);
        end
        r3[i][j] = region3;
        checks++;
        if (region3 > 4'd2 || coef3 !== {4'b0000, TABLE3[region3][12:1]}) begin
          failures++; $display("FAIL 3-coef cell (%0d,%0d): region %0d coef %b", i, j, region3, coef3);
        end
        if (region5 > 4'd4 || coef5 !== {4'b0000, TABLE5[region5][12:1]}) begin
          failures++; $display("FAIL 5-coef cell (%0d,%0d): region %0d coef %b", i, j, region5, coef5);
        end
      end
    // printed region numbers (dividend prefix, divisor prefix)
    check_label(1'b1, 0, 8, 1);
    check_label(1'b1, 1, 8, 2);
    check_label(1'b1, 9, 11, 9);
    check_label(1'b1, 8, 2, 8);
    check_label(1'b1, 15, 7, 1);
    check_label(1'b0, 1, 8, 1);
    check_label(1'b0, 9, 10, 5);
    check_label(1'b0, 11, 5, 4);
    check_label3(1, 8, 1);
    check_label3(14, 8, 1);
    check_label3(4, 9, 2);
    check_label3(12, 6, 2);
    check_label3(8, 10, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
