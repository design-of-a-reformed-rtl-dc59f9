// csa_rca_adder: three-operand adder made of a carry-save row followed by a
// ripple-carry row, the adder organisation used for both the initial adders and
// the central adder of the multiplier.
//
// Stage 1: W full adders reduce x, y and z bit by bit to a sum word S and a
// carry word C (carry-save). Stage 2: a chain of W+1 full adders adds S and C
// shifted left by one, rippling the carry from bit 0 upwards.
// Interface: x, y, z are W-bit unsigned operands; sum = x + y + z, W+2 bits.
// Timing: combinational, the critical path is one full adder plus W+1 ripple
// stages.
module csa_rca_adder #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W+1:0] sum
);
  logic [W-1:0] s_row;      // carry-save sum bits
  logic [W-1:0] c_row;      // carry-save carry bits (weight 2^(i+1))
  logic [W:0]   ra, rb;     // ripple-carry operands
  logic [W+1:0] rc;         // ripple carries

  for (genvar i = 0; i < W; i++) begin : g_csa
    full_adder u_fa (.x(x[i]), .y(y[i]), .ci(z[i]), .s(s_row[i]), .co(c_row[i]));
  end

  assign ra    = {1'b0, s_row};
  assign rb    = {c_row, 1'b0};
  assign rc[0] = 1'b0;

  for (genvar i = 0; i <= W; i++) begin : g_rca
    full_adder u_fa (.x(ra[i]), .y(rb[i]), .ci(rc[i]), .s(sum[i]), .co(rc[i+1]));
  end

  assign sum[W+1] = rc[W+1];
endmodule
