// tb_barrel_shifter: random N+3-bit inputs shifted left by 0, 1 and 2 places;
// the N+5-bit output must equal the input times 1, 2 or 4.
module tb_barrel_shifter;
  import ral_pkg::*;
  localparam int unsigned N = 16;
  logic [N+2:0] x;
  logic [N+4:0] pp;
  shift_sel_t shamt;
  int checks = 0, failures = 0;

  barrel_shifter dut (.x(x), .shamt(shamt), .pp(pp));

  initial begin
    for (int t = 0; t < 1000; t++) begin
      x = (t == 0) ? '1 : (N+3)'($urandom);
      for (int s = 0; s < 3; s++) begin
        shamt = shift_sel_t'(3'b1 << s);
        #1;
        checks++;
        if (pp !== ((N+5)'(x) << s)) begin failures++; $display("FAIL x=%h s=%0d pp=%h", x, s, pp); end
      end
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
