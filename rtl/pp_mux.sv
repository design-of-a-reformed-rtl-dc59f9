// pp_mux: the partial-product multiplexer. For every bit position i the output
// X_i is the OR of four AND terms, each gating bit i of A, 3A, 5A or 7A with its
// one-hot select line from the mux controller. With no select active the
// output is 0, which is the partial product of a 000 group. The four data
// inputs per bit and the one output per bit follow the original schematic; the
// AND-OR gate form is this design's choice.
// Interface: a1/a3/a5/a7 are the N+3-bit odd multiples; sel is one-hot (or
// all zero); x is the chosen initial partial product. Timing: combinational.
module pp_mux
  import ral_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic [N+2:0] a1,
  input  logic [N+2:0] a3,
  input  logic [N+2:0] a5,
  input  logic [N+2:0] a7,
  input  mux_sel_t     sel,
  output logic [N+2:0] x
);
  always_comb begin
    for (int i = 0; i < N + 3; i++) begin
      x[i] = (a1[i] & sel.a1) | (a3[i] & sel.a3) | (a5[i] & sel.a5) | (a7[i] & sel.a7);
    end
  end

  // The controller never raises two selects at once.
  always_comb assert ($countones(sel) <= 1) else $error("pp_mux: select not one-hot");
endmodule
