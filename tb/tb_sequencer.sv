// tb_sequencer: drives start and a modelled adder-empty flag that goes high
// after f zero-adds (f = 0..5), and checks every control output clock by clock:
// one load clock, ceil(N/3) add clocks (the first without an output shift),
// f flush adds, then one final aligned shift with done. Also checks the cycle
// count and the start-to-done latency of 2 + ceil(N/3) + f clocks. During the
// group clocks the empty flag is random: every group must be added regardless.
module tb_sequencer;
  localparam int unsigned N = 16;
  localparam int unsigned NG = (N + 2) / 3;
  localparam int unsigned NC = (2 * N + 2) / 3;
  logic clk = 0, rst_n = 0, start = 0, acc_empty = 0, b_empty = 1;
  logic b_load, b_shift, clr, add_en, pipo_en, out_shift, out_last, busy, done;
  logic [3:0] pad_groups, cycles;
  int checks = 0, failures = 0;

  sequencer dut (.clk(clk), .rst_n(rst_n), .start(start), .acc_empty(acc_empty), .b_empty(b_empty),
    .b_load(b_load), .b_shift(b_shift), .clr(clr), .add_en(add_en), .pipo_en(pipo_en),
    .out_shift(out_shift), .out_last(out_last), .pad_groups(pad_groups), .busy(busy),
    .done(done), .cycles(cycles));

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int f;
      f = t % (NC - NG + 1);
      @(negedge clk);
      chk(!busy && !done, "idle");
      start = 1;
      @(negedge clk);
      start = 0;
      // load clock
      chk(b_load && clr && !add_en && !out_shift && busy, "load");
      @(negedge clk);
      for (int g = 0; g < NG; g++) begin
        // The group phase must ignore the adder being empty.
        acc_empty = 1'($urandom);
        #1;
        chk(add_en && pipo_en && b_shift && !done && (out_shift == (g != 0)) && !out_last, "add");
        @(negedge clk);
      end
      for (int k = 0; k < f; k++) begin
        acc_empty = 0;
        #1;
        chk(add_en && pipo_en && out_shift && !done && !out_last, "flush add");
        @(negedge clk);
      end
      acc_empty = 1;
      #1;
      chk(done && out_shift && out_last && !add_en, "final");
      chk(pad_groups == 4'(NC - NG - f), "pad");
      @(negedge clk);
      chk(!busy && cycles == 4'(NG + f), "cycles");
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
