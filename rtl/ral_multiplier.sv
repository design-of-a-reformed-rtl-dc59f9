// ral_multiplier: reformed-array-logic unsigned multiplier, N x N bits.
//
// The multiplier B is consumed three bits per clock. The initial adders make
// A, 3A, 5A and 7A once; for each 3-bit group of B the mux controller picks one
// of them and the barrel shifter controller shifts it by 0, 1 or 2 places, which
// gives any of 0..7A as the partial product in a single clock. The central adder
// adds it to the upper bits of the previous sum; the three low bits of each sum
// are finished product bits and travel through the 3-bit shifter into the
// output registers, which shift right by three so the product ends in order.
// After the last group of B, zero partial products are added until the central
// adder is empty.
// Interface: pulse start for one clock with a and b valid; hold a stable while
// busy (B is captured, A feeds the initial adders directly, as in the original
// datapath). done pulses for one clock when c holds the product a*b (c is
// 3*ceil(2N/3) bits, its upper bits zero); cycles gives the adder clocks used.
// Timing: with the edge that samples start counted as edge 0, done is high after
// edge cycles+1 and c holds the product from edge cycles+2 on; cycles lies
// between ceil(N/3) and ceil(2N/3) depending on the operands (6..11 for N = 16).
module ral_multiplier
  import ral_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned ADD_W = 25
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [N-1:0]                a,
  input  logic [N-1:0]                b,
  output logic                        busy,
  output logic                        done,
  output logic [GRP*c_groups(N)-1:0]  c,
  output logic [cnt_w(N)-1:0]         cycles
);
  logic [N+2:0]          a1, a3, a5, a7, x;
  logic [N+4:0]          pp;
  logic [GRP-1:0]        bits, lsb3, pipo_q;
  mux_sel_t              msel;
  shift_sel_t            shamt;
  logic                  b_load, b_shift, clr, add_en, pipo_en, out_shift, out_last;
  logic                  acc_empty, b_empty;
  logic [cnt_w(N)-1:0]   pad_groups;

  initial_adders #(.N(N)) u_init (.a(a), .a1(a1), .a3(a3), .a5(a5), .a7(a7));

  b_controller #(.N(N)) u_bctl (
    .clk(clk), .rst_n(rst_n), .sel(b_load), .shift(b_shift), .b(b), .bits(bits), .empty(b_empty)
  );

  mux_controller u_mctl (.bits(bits), .sel(msel));
  pp_mux #(.N(N)) u_mux (.a1(a1), .a3(a3), .a5(a5), .a7(a7), .sel(msel), .x(x));

  barrel_shifter_controller u_sctl (.bits(bits), .shamt(shamt));
  barrel_shifter #(.N(N)) u_bsh (.x(x), .shamt(shamt), .pp(pp));

  central_adder #(.N(N), .ADD_W(ADD_W)) u_cadd (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(add_en), .pp(pp), .lsb3(lsb3), .empty(acc_empty)
  );

  three_bit_shifter u_pipo (.clk(clk), .rst_n(rst_n), .en(pipo_en), .d(lsb3), .q(pipo_q));

  output_registers #(.N(N)) u_out (
    .clk(clk), .rst_n(rst_n), .clr(clr), .shift(out_shift), .last(out_last),
    .pad_groups(pad_groups), .d(pipo_q), .c(c)
  );

  sequencer #(.N(N)) u_seq (
    .clk(clk), .rst_n(rst_n), .start(start), .acc_empty(acc_empty), .b_empty(b_empty),
    .b_load(b_load), .b_shift(b_shift), .clr(clr), .add_en(add_en), .pipo_en(pipo_en),
    .out_shift(out_shift), .out_last(out_last), .pad_groups(pad_groups),
    .busy(busy), .done(done), .cycles(cycles)
  );

  // A feeds the initial adders directly and must be held while busy.
  always_ff @(posedge clk) if (busy && !start) assert ($stable(a))
    else $error("ral_multiplier: a changed during an operation");
endmodule
