// tb_ral_multiplier_sizes: the multiplier at other operand widths, to exercise
// the width parameter. N = 8 is checked exhaustively (all 65536 operand pairs);
// N = 32, with the central adder widened to 37 bits (it must be at least N+5),
// is checked on corner cases and random operands. Every product is compared
// with integer multiplication and every adder-clock count with
// ceil(N/3) + (number of 3-bit groups left in product >> 3*ceil(N/3)).
module tb_ral_multiplier_sizes;
  localparam int unsigned N8  = 8;
  localparam int unsigned N32 = 32;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #20 clk = ~clk;

  // ---- N = 8 ----
  logic start8 = 0;
  logic [7:0] a8 = '0, b8 = '0;
  logic busy8, done8;
  logic [17:0] c8;          // 3 * ceil(16/3) = 18 bits
  logic [2:0]  cyc8;        // clog2(6 + 1) = 3 bits

  ral_multiplier #(.N(N8)) dut8 (.clk(clk), .rst_n(rst_n), .start(start8), .a(a8), .b(b8),
                                 .busy(busy8), .done(done8), .c(c8), .cycles(cyc8));

  // ---- N = 32 ----
  logic start32 = 0;
  logic [31:0] a32 = '0, b32 = '0;
  logic busy32, done32;
  logic [65:0] c32;         // 3 * ceil(64/3) = 66 bits
  logic [4:0]  cyc32;       // clog2(22 + 1) = 5 bits

  ral_multiplier #(.N(N32), .ADD_W(37)) dut32 (.clk(clk), .rst_n(rst_n), .start(start32), .a(a32), .b(b32),
                                               .busy(busy32), .done(done32), .c(c32), .cycles(cyc32));

  function automatic int exp_cycles(longint unsigned p, int unsigned n);
    int unsigned ng = (n + 2) / 3;
    int k = int'(ng);
    p = p >> (3 * ng);
    while (p != 0) begin p = p >> 3; k++; end
    return k;
  endfunction

  task automatic mul8(input logic [7:0] x, input logic [7:0] y);
    longint unsigned p;
    @(negedge clk); a8 = x; b8 = y; start8 = 1;
    @(negedge clk); start8 = 0;
    while (!done8) @(negedge clk);
    @(negedge clk);
    p = longint'(x) * longint'(y);
    checks += 2;
    if (c8 != 18'(p)) begin failures++; $display("FAIL N=8 %0d*%0d got %0d", x, y, c8); end
    if (int'(cyc8) != exp_cycles(p, N8)) begin failures++; $display("FAIL N=8 cycles %0d*%0d", x, y); end
  endtask

  task automatic mul32(input logic [31:0] x, input logic [31:0] y);
    longint unsigned p;
    @(negedge clk); a32 = x; b32 = y; start32 = 1;
    @(negedge clk); start32 = 0;
    while (!done32) @(negedge clk);
    @(negedge clk);
    p = longint'(x) * longint'(y);
    checks += 3;
    if (c32[63:0] != p) begin failures++; $display("FAIL N=32 %h*%h got %h", x, y, c32); end
    if (c32[65:64] != 2'b00) begin failures++; $display("FAIL N=32 upper bits %h*%h", x, y); end
    if (int'(cyc32) != exp_cycles(p, N32)) begin failures++; $display("FAIL N=32 cycles %h*%h", x, y); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int x = 0; x < 256; x++)
          for (int y = 0; y < 256; y++) mul8(8'(x), 8'(y));
      end
      begin
        mul32('1, '1); mul32('0, '1); mul32('1, '0); mul32(32'd1, '1); mul32(32'h8000_0000, 32'h8000_0000);
        for (int t = 0; t < 5000; t++) mul32($urandom, $urandom);
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
