// tb_ral_multiplier_n6: the multiplier built for 6-bit operands (N = 6).
//
// First the worked 6-bit example: A = 001101, B = 111111. Both groups of B are
// 111, so 7A is added twice; the first sum's low bits must be 011, and the
// operation must take four adder clocks (two groups, two flush clocks). The
// product must be 13 * 63. Then every pair of 6-bit operands is multiplied and
// compared with integer multiplication, together with the adder-clock count
// (2 group clocks plus one per remaining 3-bit group of product >> 6).
module tb_ral_multiplier_n6;
  localparam int unsigned N = 6;
  localparam int unsigned NG = (N + 2) / 3;
  localparam int unsigned NC = (2 * N + 2) / 3;

  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] a = '0, b = '0;
  logic busy, done;
  logic [3*NC-1:0] c;
  logic [2:0] cycles;
  int checks = 0, failures = 0;
  logic [2:0] first_lsb3;

  ral_multiplier #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b),
                               .busy(busy), .done(done), .c(c), .cycles(cycles));

  always #20 clk = ~clk;

  task automatic multiply(input logic [N-1:0] ta, input logic [N-1:0] tb, output logic [3*NC-1:0] prod,
                          output int ncyc, output logic [2:0] lsb_first);
    @(negedge clk);
    a = ta; b = tb; start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);                 // first group clock: sum of 0 + PP1
    lsb_first = dut.lsb3;
    while (!done) @(negedge clk);
    @(negedge clk);
    prod = c;
    ncyc = int'(cycles);
  endtask

  initial begin
    logic [3*NC-1:0] prod;
    int ncyc, ecyc;
    repeat (3) @(posedge clk);
    rst_n = 1;

    multiply(6'b001101, 6'b111111, prod, ncyc, first_lsb3);
    checks += 3;
    if (first_lsb3 != 3'b011) begin failures++; $display("FAIL first low bits %b", first_lsb3); end
    if (ncyc != 4) begin failures++; $display("FAIL cycles %0d, expected 4", ncyc); end
    if (prod != 12'(13 * 63)) begin failures++; $display("FAIL product %b", prod); end
    $display("6-bit example: c=%b cycles=%0d", prod, ncyc);

    for (int x = 0; x < 64; x++) begin
      for (int y = 0; y < 64; y++) begin
        int p;
        multiply(N'(x), N'(y), prod, ncyc, first_lsb3);
        p = x * y;
        ecyc = NG;
        for (int r = p >> (3 * NG); r != 0; r = r >> 3) ecyc++;
        checks += 2;
        if (prod != 12'(p)) begin failures++; $display("FAIL %0d*%0d got %0d", x, y, prod); end
        if (ncyc != ecyc) begin failures++; $display("FAIL cycles %0d*%0d got %0d exp %0d", x, y, ncyc, ecyc); end
      end
    end
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
