// barrel_shifter_controller: decodes a 3-bit group of B into the one-hot shift
// of the barrel shifter. 010 (2A from A) and 110 (6A from 3A) shift by one,
// 100 (4A from A) shifts by two, every other group shifts by zero (000 included:
// the multiplexer already gives 0). Timing: combinational.
module barrel_shifter_controller
  import ral_pkg::*;
(
  input  logic [GRP-1:0] bits,
  output shift_sel_t     shamt
);
  always_comb begin
    shamt    = '0;
    shamt.s1 = (bits == 3'b010) | (bits == 3'b110);
    shamt.s2 = (bits == 3'b100);
    shamt.s0 = !(shamt.s1 | shamt.s2);
  end
endmodule
