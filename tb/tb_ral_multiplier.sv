// tb_ral_multiplier: end-to-end test of the multiplier at its default size
// (16 x 16 bits, no parameter overrides).
//
// Runs the three worked examples of the original design as printed operands,
// corner cases and random operands, and compares each product with integer
// multiplication. For every operation the number of adder clocks is compared
// with an independent count: ceil(N/3) group clocks plus one clock per
// remaining three-bit group of product >> 3*ceil(N/3); the start-to-done
// latency must be that count plus two. The test also counts how often each
// mechanism occurred (each of the eight 3-bit group codes, each barrel shift,
// flush clocks, early finish with alignment, finish with no alignment) and
// counts a failure for any that never occurred.
module tb_ral_multiplier;
  localparam int unsigned N = 16;
  localparam int unsigned NG = (N + 2) / 3;
  localparam int unsigned NC = (2 * N + 2) / 3;

  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] a = '0, b = '0;
  logic busy, done;
  logic [3*NC-1:0] c;
  logic [3:0] cycles;
  int checks = 0, failures = 0;
  int code_seen[8];
  int flush_clocks = 0, early_finish = 0, full_finish = 0;
  int shift_seen[3];

  ral_multiplier dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b),
                      .busy(busy), .done(done), .c(c), .cycles(cycles));

  always #20 clk = ~clk;   // 40 ns clock period, as in the original design

  // Mechanism counters, observed on the datapath.
  always @(posedge clk) if (dut.add_en) begin
    code_seen[dut.bits]++;
    if (dut.shamt.s0) shift_seen[0]++;
    if (dut.shamt.s1) shift_seen[1]++;
    if (dut.shamt.s2) shift_seen[2]++;
    if (dut.u_seq.state == dut.u_seq.FLUSH) flush_clocks++;
  end

  task automatic multiply(input logic [N-1:0] ta, input logic [N-1:0] tb, output logic [3*NC-1:0] prod,
                          output int ncyc);
    int lat;
    @(negedge clk);
    a = ta; b = tb; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    // lat counts clocks from start to the clock in which done is high; c is
    // valid after that clock edge.
    @(negedge clk);
    prod = c;
    ncyc = int'(cycles);
    checks++;
    if (lat != ncyc + 2) begin failures++; $display("FAIL latency a=%h b=%h lat=%0d cycles=%0d", ta, tb, lat, ncyc); end
  endtask

  function automatic int expected_cycles(longint unsigned p);
    int n = NG;
    p = p >> (3 * NG);
    while (p != 0) begin p = p >> 3; n++; end
    return n;
  endfunction

  task automatic run(input logic [N-1:0] ta, input logic [N-1:0] tb);
    logic [3*NC-1:0] prod;
    longint unsigned exp;
    int ncyc, ecyc;
    multiply(ta, tb, prod, ncyc);
    exp = longint'(ta) * longint'(tb);
    ecyc = expected_cycles(exp);
    checks += 2;
    if (prod != (3*NC)'(exp)) begin failures++; $display("FAIL a=%h b=%h c=%h exp=%h", ta, tb, prod, exp); end
    if (ncyc != ecyc) begin failures++; $display("FAIL cycles a=%h b=%h got=%0d exp=%0d", ta, tb, ncyc, ecyc); end
    if (ecyc < int'(NC)) early_finish++; else full_finish++;
  endtask

  initial begin
    logic [3*NC-1:0] prod;
    int ncyc;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Worked example 1, operands as printed: 8 adder clocks are reported for it.
    multiply(16'b0101010101010101, 16'b0000001011111100, prod, ncyc);
    checks += 2;
    if (prod != 33'd21845 * 33'd764) begin failures++; $display("FAIL ex1 c=%b", prod); end
    if (ncyc != 8) begin failures++; $display("FAIL ex1 cycles=%0d, expected 8", ncyc); end
    $display("example 1: c=%b cycles=%0d", prod, ncyc);

    // Worked example 2, operands as printed (15 bits each).
    run(16'b010101010101010, 16'b111111111111111);

    // Worked example 3 with all-ones operands; its printed 33-bit product is
    // the square of sixteen ones.
    multiply(16'hFFFF, 16'hFFFF, prod, ncyc);
    checks++;
    if (prod != 33'b011111111111111100000000000000001) begin failures++; $display("FAIL ex3 c=%b", prod); end
    $display("example 3: c=%b cycles=%0d", prod, ncyc);

    // Corner cases.
    run('0, '0); run('1, '0); run('0, '1); run(16'd1, 16'd1); run('1, 16'd1); run(16'd1, '1);
    run(16'h8000, 16'h8000); run(16'h4924, 16'h4924); run(16'hB6DB, 16'h6DB6);

    // Random operands.
    for (int t = 0; t < 3000; t++) run(N'($urandom), N'($urandom));

    // Every mechanism must have happened.
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (code_seen[k] == 0) begin failures++; $display("FAIL group code %0d never seen", k); end
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (shift_seen[k] == 0) begin failures++; $display("FAIL shift by %0d never seen", k); end
    end
    checks += 3;
    if (flush_clocks == 0) begin failures++; $display("FAIL no flush clock"); end
    if (early_finish == 0) begin failures++; $display("FAIL no early finish"); end
    if (full_finish == 0) begin failures++; $display("FAIL no full-length finish"); end
    $display("mechanisms: codes=%p shifts=%p flush_clocks=%0d early=%0d full=%0d",
             code_seen, shift_seen, flush_clocks, early_finish, full_finish);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
