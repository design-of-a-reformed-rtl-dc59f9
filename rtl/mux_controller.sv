// mux_controller: decodes a 3-bit group of B into the one-hot select of the
// partial-product multiplexer.
//
// 001, 010 and 100 select A (2A and 4A are then made by the barrel shifter);
// 011 and 110 select 3A (6A is 3A shifted by one); 101 selects 5A; 111 selects
// 7A; 000 selects nothing, so the multiplexer outputs 0. The selection tables of
// the design list 100 twice and omit 110; 110 is decoded to 3A here, in line
// with the shifter table, which makes 6A by shifting 3A.
// Timing: combinational.
module mux_controller
  import ral_pkg::*;
(
  input  logic [GRP-1:0] bits,
  output mux_sel_t       sel
);
  always_comb begin
    sel    = '0;
    sel.a1 = (bits == 3'b001) | (bits == 3'b010) | (bits == 3'b100);
    sel.a3 = (bits == 3'b011) | (bits == 3'b110);
    sel.a5 = (bits == 3'b101);
    sel.a7 = (bits == 3'b111);
  end
endmodule
