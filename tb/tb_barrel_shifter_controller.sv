// tb_barrel_shifter_controller: all eight 3-bit groups against the shift table
// (2 and 6 -> 1 place, 4 -> 2 places, all others -> 0 places).
module tb_barrel_shifter_controller;
  import ral_pkg::*;
  logic [2:0] bits;
  shift_sel_t shamt, exp;
  int checks = 0, failures = 0;

  barrel_shifter_controller dut (.bits(bits), .shamt(shamt));

  initial begin
    for (int v = 0; v < 8; v++) begin
      bits = 3'(v);
      exp = '0;
      case (v)
        2, 6:    exp.s1 = 1'b1;
        4:       exp.s2 = 1'b1;
        default: exp.s0 = 1'b1;
      endcase
      #1;
      checks++;
      if (shamt !== exp) begin failures++; $display("FAIL bits=%b shamt=%b exp=%b", bits, shamt, exp); end
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
