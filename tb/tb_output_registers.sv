// tb_output_registers: shifts in k random three-bit groups, least significant
// first, the last shift carrying the alignment by the missing groups; the
// register must then hold the groups in order starting at bit 0.
module tb_output_registers;
  localparam int unsigned N = 16;
  localparam int unsigned NC = (2 * N + 2) / 3;
  logic clk = 0, rst_n = 0, clr = 0, shift = 0, last = 0;
  logic [3:0] pad_groups = '0;
  logic [2:0] d = '0;
  logic [3*NC-1:0] c;
  int checks = 0, failures = 0;

  output_registers dut (.clk(clk), .rst_n(rst_n), .clr(clr), .shift(shift), .last(last),
                                 .pad_groups(pad_groups), .d(d), .c(c));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [3*NC-1:0] exp;
      int k;
      k = 1 + (t % NC);
      exp = '0;
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int g = 0; g < k; g++) begin
        d = 3'($urandom);
        exp[3*g +: 3] = d;
        shift = 1;
        last = (g == k - 1);
        pad_groups = last ? 4'(NC - k) : 4'(0);
        @(negedge clk);
        shift = 0; last = 0;
        if ($urandom % 2) @(negedge clk);  // idle gap
      end
      checks++;
      if (c !== exp) begin failures++; $display("FAIL k=%0d c=%h exp=%h", k, c, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
