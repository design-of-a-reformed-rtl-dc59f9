// tb_initial_adders: checks A, 3A, 5A and 7A against integer multiplication for
// the extreme and random multiplicands at the default width N = 16.
module tb_initial_adders;
  localparam int unsigned N = 16;
  logic [N-1:0] a;
  logic [N+2:0] a1, a3, a5, a7;
  int checks = 0, failures = 0;

  initial_adders dut (.a(a), .a1(a1), .a3(a3), .a5(a5), .a7(a7));

  task automatic check(input logic [N+2:0] got, input longint exp, input string what);
    checks++;
    if (got !== (N+3)'(exp)) begin
      failures++;
      $display("FAIL %s a=%0d got=%0d exp=%0d", what, a, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      a = (i == 0) ? '0 : (i == 1) ? '1 : (i == 2) ? N'(1) : N'($urandom);
      #1;
      check(a1, longint'(a), "A");
      check(a3, 3 * longint'(a), "3A");
      check(a5, 5 * longint'(a), "5A");
      check(a7, 7 * longint'(a), "7A");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
