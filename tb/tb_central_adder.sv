// tb_central_adder: feeds random sequences of partial products (each below 8*2^N,
// the largest 7A) followed by zeros and rebuilds the total from the three-bit
// outputs, weight 8^k for the k-th clock. The rebuilt number must equal the sum
// of pp_k * 8^k; empty must be high exactly when the remaining total is 0.
module tb_central_adder;
  localparam int unsigned N = 16;
  localparam int unsigned ADD_W = 25;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [N+4:0] pp = '0;
  logic [2:0] lsb3;
  logic empty;
  int checks = 0, failures = 0;

  central_adder dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .pp(pp), .lsb3(lsb3), .empty(empty));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      longint unsigned total, rebuilt, rest;
      int n;
      n = 1 + ($urandom % 6);
      total = 0; rebuilt = 0;
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int k = 0; k < 12; k++) begin
        longint unsigned v;
        v = (k < n) ? ((t == 0) ? 7 * ((64'd1 << N) - 1) : longint'($urandom % (7 * (1 << N)))) : 0;
        total += v << (3 * k);
        pp = (N+5)'(v);
        en = 1;
        #1;
        rebuilt |= longint'(lsb3) << (3 * k);
        @(negedge clk);
        en = 0;
        rest = total >> (3 * (k + 1));
        checks++;
        if (empty != (rest == 0)) begin failures++; $display("FAIL empty t=%0d k=%0d", t, k); end
      end
      checks++;
      if (rebuilt != total) begin failures++; $display("FAIL sum t=%0d got=%h exp=%h", t, rebuilt, total); end
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
