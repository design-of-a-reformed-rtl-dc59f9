// tb_three_bit_shifter: random three-bit words are captured on enabled clocks
// and held on disabled ones.
module tb_three_bit_shifter;
  logic clk = 0, rst_n = 0, en = 0;
  logic [2:0] d = '0, q, exp;
  int checks = 0, failures = 0;

  three_bit_shifter dut (.clk(clk), .rst_n(rst_n), .en(en), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin
    exp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      checks++;
      if (q !== exp) begin failures++; $display("FAIL t=%0d q=%b exp=%b", t, q, exp); end
      d = 3'($urandom);
      en = 1'($urandom);
      if (en) exp = d;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
