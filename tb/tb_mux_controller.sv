// tb_mux_controller: all eight 3-bit groups against the selection table
// (0 -> none, 1/2/4 -> A, 3/6 -> 3A, 5 -> 5A, 7 -> 7A).
module tb_mux_controller;
  import ral_pkg::*;
  logic [2:0] bits;
  mux_sel_t sel, exp;
  int checks = 0, failures = 0;

  mux_controller dut (.bits(bits), .sel(sel));

  initial begin
    for (int v = 0; v < 8; v++) begin
      bits = 3'(v);
      exp = '0;
      case (v)
        1, 2, 4: exp.a1 = 1'b1;
        3, 6:    exp.a3 = 1'b1;
        5:       exp.a5 = 1'b1;
        7:       exp.a7 = 1'b1;
        default: ;
      endcase
      #1;
      checks++;
      if (sel !== exp) begin failures++; $display("FAIL bits=%b sel=%b exp=%b", bits, sel, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
