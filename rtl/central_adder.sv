// central_adder: the accumulating adder of the multiplier.
//
// Each enabled clock it adds the incoming partial product pp to the bits fed
// back from the previous sum. The addition is a carry-save row followed by a
// ripple-carry row (csa_rca_adder), the carry-save row's third operand tied to
// 0. The three least significant bits of the sum (lsb3) are final product bits
// and leave for the 3-bit shifter; the rest of the sum, shifted right by three,
// is stored in the feedback register and added to the next partial product.
// This shift by three is what lines the next partial product (weight 8^k) up
// with the stored bits.
// Interface: pp is the N+5-bit partial product; lsb3 is combinational from pp
// and the feedback register; empty is high when the feedback register is 0,
// i.e. nothing is left to add. clr empties the register; en stores the sum.
// ADD_W is the adder width (25 in the original design); the sum of a partial
// product (< 8*2^N) and the feedback (< 2^N) needs N+3 bits, so ADD_W >= N+5
// keeps a margin. Clear/enable and the asynchronous reset are this design's own.
module central_adder
  import ral_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned ADD_W = 25
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           en,
  input  logic [N+4:0]   pp,
  output logic [GRP-1:0] lsb3,
  output logic           empty
);
  localparam int unsigned FB_W = ADD_W - GRP;

  if (ADD_W < N + 5) begin : g_width_check
    $error("central_adder: ADD_W must be at least N+5");
  end

  logic [FB_W-1:0]  fb;
  logic [ADD_W+1:0] sum;

  csa_rca_adder #(.W(ADD_W)) u_add (
    .x  (ADD_W'(pp)),
    .y  (ADD_W'(fb)),
    .z  ('0),
    .sum(sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   fb <= '0;
    else if (clr) fb <= '0;
    else if (en)  fb <= sum[ADD_W-1:GRP];
  end

  assign lsb3  = sum[GRP-1:0];
  assign empty = (fb == '0);

  // The sum must never overflow the adder width.
  always_ff @(posedge clk) if (en) assert (sum[ADD_W+1:ADD_W] == '0)
    else $error("central_adder: sum overflows ADD_W");
endmodule
