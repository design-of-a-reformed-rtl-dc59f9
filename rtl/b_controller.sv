// b_controller: the "B controller", a shift register that holds the multiplier B
// and presents its three least significant bits to the multiplexer and barrel
// shifter controllers.
//
// With sel high the register loads B, padded with zeros on the left to a
// multiple of three bits (18 bits for N = 16). Each clock with shift high it
// moves right by three positions, filling zeros at the top, so the next 3-bit
// group of B appears at bits[2:0]. empty is high when no set bit of B is left.
// The load/shift multiplexer per flip-flop follows the schematic of the design;
// the shift enable and the asynchronous active-low reset are this design's own.
// Timing: bits is valid one clock after the load and changes after each shift.
module b_controller
  import ral_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sel,
  input  logic          shift,
  input  logic [N-1:0]  b,
  output logic [GRP-1:0] bits,
  output logic          empty
);
  localparam int unsigned BW = GRP * b_groups(N);

  logic [BW-1:0] breg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     breg <= '0;
    else if (sel)   breg <= BW'(b);
    else if (shift) breg <= breg >> GRP;
  end

  assign bits  = breg[GRP-1:0];
  assign empty = (breg == '0);
endmodule
