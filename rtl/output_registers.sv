// output_registers: the product register, 3*ceil(2N/3) bits (33 for N = 16).
//
// On each shift the three bits from the 3-bit shifter enter at the top (bits
// C(m-1), C(m-2), C(m-3)) and everything already stored moves three places to
// the right, so the first, least significant, group ends at C2..C0 once all
// ceil(2N/3) groups have been shifted in. When the central adder empties early
// the remaining groups would all be zero; instead of shifting in those zeros one
// clock at a time, the shift marked last also moves the register right by
// 3*pad_groups bits, which leaves the product aligned at C0. That alignment step
// is this design's own choice.
// Interface: c is the product (valid after the last shift); clr empties the
// register at the start of an operation. Timing: one clock per shift.
module output_registers
  import ral_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  shift,
  input  logic                  last,
  input  logic [cnt_w(N)-1:0]   pad_groups,
  input  logic [GRP-1:0]        d,
  output logic [GRP*c_groups(N)-1:0] c
);
  localparam int unsigned CW = GRP * c_groups(N);

  logic [CW-1:0] shifted;

  assign shifted = {d, c[CW-1:GRP]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     c <= '0;
    else if (clr)   c <= '0;
    else if (shift) c <= last ? (shifted >> (GRP * pad_groups)) : shifted;
  end
endmodule
