// tb_rapid_coef_mul: check of the multiplier's error-coefficient selection.
//
// For all 256 prefix pairs the selected coefficient must be the one listed for
// the selected region (the 13-bit values are typed in here from the
// coefficient table, not taken from the design's package), at the 16-bit
// alignment (LSB weight 2^-15) and, from a second instance, at the 8-bit
// alignment (LSB weight 2^-7, truncated). The map must be symmetric, since swapping the
// operands does not change the product. Five cells where the partition plot
// prints a region number are checked against that number. The 3- and
// 10-coefficient schemes are checked the same way at the 16-bit alignment
// (the 12-bit values of the 3-coefficient scheme sit one bit higher, LSB
// weight 2^-14). Combinational; the clock only paces the watchdog.
module tb_rapid_coef_mul;
  logic        clk = 1'b0;
  logic [3:0]  xa4, xb4;
  logic [15:0] coef;
  logic [7:0]  coef8;
  logic [3:0]  region, region8;
  int checks = 0, failures = 0;
  logic [3:0]  reg_of [16][16];
  logic [15:0] coef3, coef10;
  logic [3:0]  region3, region10;
  logic [3:0]  reg3_of [16][16];
  logic [3:0]  reg10_of [16][16];

  localparam logic [11:0] TABLE3 [3] = '{12'b100000100111, 12'b010011101100, 12'b000100101001};
  localparam logic [12:0] TABLE10 [10] = '{
    13'b1001111000110, 13'b1000110110001, 13'b0111111000100, 13'b0111000110101,
    13'b0110010100011, 13'b0101110011111, 13'b0100101000011, 13'b0100001011101,
    13'b0011110000011, 13'b0010101111111};

  localparam logic [12:0] TABLE [5] = '{
    13'b1001111111111, 13'b1000011011101, 13'b0110010001010,
    13'b0011110010111, 13'b0000111110000};

  always #5 clk = ~clk;

  rapid_coef_mul #(.NCOEF(5), .FW(15)) dut   (.xa4(xa4), .xb4(xb4), .coef(coef),  .region(region));
  rapid_coef_mul #(.NCOEF(5), .FW(7))  dut8  (.xa4(xa4), .xb4(xb4), .coef(coef8), .region(region8));
  rapid_coef_mul #(.NCOEF(3), .FW(15)) dut3  (.xa4(xa4), .xb4(xb4), .coef(coef3), .region(region3));
  rapid_coef_mul #(.NCOEF(10), .FW(15)) dut10 (.xa4(xa4), .xb4(xb4), .coef(coef10), .region(region10));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_label(input int x1, input int x2, input int label);
    checks++;
    if (int'(reg_of[x1][x2]) + 1 != label) begin
      failures++;
      $display("FAIL printed label: cell (%0d,%0d) is region %0d, plot says %0d",
               x1, x2, int'(reg_of[x1][x2]) + 1, label);
    end
  endtask

  task automatic check_label_n(input int n, input int x1, input int x2, input int label);
    int got;
    got = (n == 3) ? int'(reg3_of[x1][x2]) + 1 : int'(reg10_of[x1][x2]) + 1;
    checks++;
    if (got != label) begin
      failures++;
      $display("FAIL printed label (%0d coefficients): cell (%0d,%0d) is region %0d, plot says %0d",
               n, x1, x2, got, label);
    end
  endtask

  initial begin : stimulus
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        xa4 = 4'(i); xb4 = 4'(j);
        #1;
        reg_of[i][j] = region;
        checks++;
        if (region > 4'd4 || coef !== {3'b000, TABLE[region]} ||
            coef8 !== {3'b000, TABLE[region][12:8]} || region8 !== region) begin
          failures++;
          $display("FAIL cell (%0d,%0d): region %0d coef %b coef8 %b", i, j, region, coef, coef8);
        end
        reg3_of[i][j] = region3;
        checks++;
        if (region3 > 4'd2 || coef3 !== {3'b000, TABLE3[region3], 1'b0}) begin
          failures++;
          $display("FAIL 3-coef cell (%0d,%0d): region %0d coef %b", i, j, region3, coef3);
        end
        reg10_of[i][j] = region10;
        checks++;
        if (region10 > 4'd9 || coef10 !== {3'b000, TABLE10[region10]}) begin
          failures++;
          $display("FAIL 10-coef cell (%0d,%0d): region %0d coef %b", i, j, region10, coef10);
        end
      end
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < i; j++) begin
        checks++;
        if (reg_of[i][j] !== reg_of[j][i] || reg3_of[i][j] !== reg3_of[j][i] ||
            reg10_of[i][j] !== reg10_of[j][i]) begin
          failures++; $display("FAIL map not symmetric at (%0d,%0d)", i, j);
        end
      end
    // printed region numbers of the 5-coefficient plot (x1 prefix, x2 prefix)
    check_label(7, 8, 1);
    check_label(8, 9, 2);
    check_label(9, 10, 3);
    check_label(10, 12, 4);
    check_label(11, 14, 5);
    // printed region numbers of the 3- and 10-coefficient plots
    check_label_n(3, 8, 8, 1);
    check_label_n(3, 5, 5, 2);
    check_label_n(3, 11, 13, 3);
    check_label_n(10, 7, 8, 1);
    check_label_n(10, 13, 13, 9);
    check_label_n(10, 0, 0, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
