// tb_b_controller: loads random multipliers and checks that every 3-bit group
// appears at the output LSB-first, one per shift, that the register holds
// without shift and that empty follows the remaining bits.
module tb_b_controller;
  localparam int unsigned N = 16;
  localparam int unsigned NG = (N + 2) / 3;
  logic clk = 0, rst_n = 0, sel = 0, shift = 0;
  logic [N-1:0] b;
  logic [2:0] bits;
  logic empty;
  int checks = 0, failures = 0;

  b_controller dut (.clk(clk), .rst_n(rst_n), .sel(sel), .shift(shift), .b(b), .bits(bits), .empty(empty));

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s b=%h bits=%b", what, b, bits); end
  endtask

  initial begin
    b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [3*NG-1:0] ref_b;
      b = (t == 0) ? '1 : (t == 1) ? '0 : N'($urandom);
      ref_b = (3*NG)'(b);
      @(negedge clk); sel = 1;
      @(negedge clk); sel = 0;
      for (int g = 0; g < NG + 1; g++) begin
        chk(bits == ref_b[2:0], "group");
        chk(empty == (ref_b == 0), "empty");
        // one idle clock: no change
        @(negedge clk);
        chk(bits == ref_b[2:0], "hold");
        shift = 1;
        @(negedge clk);
        shift = 0;
        ref_b = ref_b >> 3;
      end
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
