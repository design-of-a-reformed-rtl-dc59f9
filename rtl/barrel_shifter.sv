// barrel_shifter: shifts the initial partial product from the multiplexer left
// by 0, 1 or 2 positions, zero-filling on the right, to give the final partial
// product 0..7A. Each output bit ORs three AND terms: the input bit at the
// same position gated by s0, the bit one below gated by s1 and the bit two below
// gated by s2. The output is two bits wider than the input (N+5 for an N+3-bit
// input), the widest value being 4A or 6A, as in the original schematic; the
// AND-OR gate form is this design's choice. Timing: combinational.
module barrel_shifter
  import ral_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic [N+2:0] x,
  input  shift_sel_t   shamt,
  output logic [N+4:0] pp
);
  localparam int unsigned OW = N + 5;

  logic [OW-1:0] xe;
  assign xe = OW'(x);

  always_comb begin
    for (int i = 0; i < OW; i++) begin
      pp[i] = (xe[i] & shamt.s0)
            | ((i >= 1) ? (xe[(i >= 1) ? i - 1 : 0] & shamt.s1) : 1'b0)
            | ((i >= 2) ? (xe[(i >= 2) ? i - 2 : 0] & shamt.s2) : 1'b0);
    end
  end

  always_comb assert ($countones(shamt) <= 1) else $error("barrel_shifter: shift not one-hot");
endmodule
