// initial_adders: forms the odd multiples of the multiplicand A that the
// partial-product multiplexer chooses from.
//
// 2A and 4A are A shifted left by one and two positions, so 3A = A + 2A and
// 5A = A + 4A; 6A is 3A shifted left by one, so 7A = A + 6A. The three sums are
// made by three csa_rca_adder instances (carry-save row then ripple row, the
// same adder organisation as the central adder), their third operand tied to 0.
// The 7A adder waits on the 3A adder, as in the original scheme.
// Interface: a is the N-bit multiplicand; a1/a3/a5/a7 are A, 3A, 5A, 7A, each
// N+3 bits wide (7A < 2^(N+3)). Timing: combinational; the values are held for
// the whole multiplication because A does not change during it.
module initial_adders #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] a,
  output logic [N+2:0] a1,
  output logic [N+2:0] a3,
  output logic [N+2:0] a5,
  output logic [N+2:0] a7
);
  localparam int unsigned XW = N + 3;

  logic [XW-1:0] a2, a4, a6;
  logic [XW+1:0] s3, s5, s7;

  assign a1 = XW'(a);
  assign a2 = XW'(a) << 1;
  assign a4 = XW'(a) << 2;
  assign a6 = a3 << 1;

  csa_rca_adder #(.W(XW)) u_add3 (.x(a1), .y(a2), .z('0), .sum(s3));
  csa_rca_adder #(.W(XW)) u_add5 (.x(a1), .y(a4), .z('0), .sum(s5));
  csa_rca_adder #(.W(XW)) u_add7 (.x(a1), .y(a6), .z('0), .sum(s7));

  // The sums never reach bit XW, so the two top bits are dropped.
  assign a3 = s3[XW-1:0];
  assign a5 = s5[XW-1:0];
  assign a7 = s7[XW-1:0];
endmodule
