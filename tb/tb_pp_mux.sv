// tb_pp_mux: random inputs with each one-hot select and with no select; the
// output must equal the selected input, or 0.
module tb_pp_mux;
  import ral_pkg::*;
  localparam int unsigned N = 16;
  logic [N+2:0] a1, a3, a5, a7, x, exp;
  mux_sel_t sel;
  int checks = 0, failures = 0;

  pp_mux dut (.a1(a1), .a3(a3), .a5(a5), .a7(a7), .sel(sel), .x(x));

  initial begin
    for (int t = 0; t < 1000; t++) begin
      a1 = (N+3)'($urandom); a3 = (N+3)'($urandom); a5 = (N+3)'($urandom); a7 = (N+3)'($urandom);
      for (int s = 0; s < 5; s++) begin
        sel = (s == 4) ? '0 : mux_sel_t'(4'b1 << s);
        exp = (s == 0) ? a1 : (s == 1) ? a3 : (s == 2) ? a5 : (s == 3) ? a7 : '0;
        #1;
        checks++;
        if (x !== exp) begin failures++; $display("FAIL sel=%b x=%h exp=%h", sel, x, exp); end
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
