// three_bit_shifter: three parallel-in parallel-out flip-flops between the
// central adder and the output registers. On each enabled clock they capture
// the three least significant bits of the central adder's sum; the output
// registers take them on the following shift. The load enable and the
// asynchronous reset are this design's own.
module three_bit_shifter
  import ral_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic [GRP-1:0] d,
  output logic [GRP-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (en) q <= d;
  end
endmodule
