// sequencer: runs one multiplication on the datapath.
//
// IDLE: waits for start. LOAD (one clock): loads B into the B controller and
// empties the central adder and the output registers. ADD: one clock per 3-bit
// group of B (ceil(N/3) clocks, zero groups included): the partial product is
// added, the sum's low three bits go to the 3-bit shifter, B shifts right by
// three and, from the second clock on, the output registers take the previous
// three bits. FLUSH: while the central adder still holds bits, a zero partial
// product is added and three more product bits come out per clock; once it is
// empty the last three bits are shifted into the output registers with
// alignment, done pulses for one clock and the sequencer returns to IDLE.
// Running until the adder is empty is what the original design does; the
// state machine, its start/done handshake and reset are this design's own.
// cycles reports how many adder clocks the last operation used. b_empty (no
// set bit of B left) is only checked by an assertion: by the flush phase B
// must have been shifted out, so only zero partial products are added there.
// Timing: with the edge that samples start counted as edge 0, LOAD follows it,
// the adds follow edges 1..cycles and done is high after edge cycles+1.
module sequencer
  import ral_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                acc_empty,
  input  logic                b_empty,
  output logic                b_load,
  output logic                b_shift,
  output logic                clr,
  output logic                add_en,
  output logic                pipo_en,
  output logic                out_shift,
  output logic                out_last,
  output logic [cnt_w(N)-1:0] pad_groups,
  output logic                busy,
  output logic                done,
  output logic [cnt_w(N)-1:0] cycles
);
  localparam int unsigned CNW = cnt_w(N);
  localparam logic [CNW-1:0] NG = CNW'(b_groups(N));
  localparam logic [CNW-1:0] NC = CNW'(c_groups(N));

  typedef enum logic [1:0] {IDLE, LOAD, ADD, FLUSH} state_t;

  state_t         state, state_n;
  logic [CNW-1:0] cnt, cnt_n;
  logic [CNW-1:0] cycles_n;

  always_comb begin
    state_n    = state;
    cnt_n      = cnt;
    cycles_n   = cycles;
    b_load     = 1'b0;
    b_shift    = 1'b0;
    clr        = 1'b0;
    add_en     = 1'b0;
    pipo_en    = 1'b0;
    out_shift  = 1'b0;
    out_last   = 1'b0;
    pad_groups = '0;
    done       = 1'b0;
    unique case (state)
      IDLE: begin
        if (start) state_n = LOAD;
      end
      LOAD: begin
        b_load  = 1'b1;
        clr     = 1'b1;
        cnt_n   = '0;
        state_n = ADD;
      end
      ADD: begin
        add_en    = 1'b1;
        pipo_en   = 1'b1;
        b_shift   = 1'b1;
        out_shift = (cnt != '0);
        cnt_n     = cnt + 1'b1;
        if (cnt_n == NG) state_n = FLUSH;
      end
      FLUSH: begin
        out_shift = 1'b1;
        if (acc_empty || cnt == NC) begin
          out_last   = 1'b1;
          pad_groups = NC - cnt;
          done       = 1'b1;
          cycles_n   = cnt;
          state_n    = IDLE;
        end else begin
          add_en  = 1'b1;
          pipo_en = 1'b1;
          b_shift = 1'b1;
          cnt_n   = cnt + 1'b1;
        end
      end
      default: state_n = IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= IDLE;
      cnt    <= '0;
      cycles <= '0;
    end else begin
      state  <= state_n;
      cnt    <= cnt_n;
      cycles <= cycles_n;
    end
  end

  assign busy = (state != IDLE);

  // The adder must be empty by the time every product group has come out.
  always_ff @(posedge clk) if (state == FLUSH && cnt == NC) assert (acc_empty)
    else $error("sequencer: adder not empty after all product groups");

  always_ff @(posedge clk) if (state == FLUSH && add_en) assert (b_empty)
    else $error("sequencer: B not exhausted in the flush phase");
endmodule
