// Behavioural model of a 60 GHz on-off-keying transceiver with its on-chip
// zig-zag antenna; it stands in for an analog/RF block and is not meant for
// synthesis into a real radio.
//
// The real part sends 16 Gb/s over a shared, non-directional mm-wave channel,
// which at the 2.5 GHz system clock is 6.4 bits per cycle, so one 32-bit flit
// (plus its 2-bit type) needs a FLIT_CYCLES = 5 cycle slot.  The model keeps
// the word whole: a word given on tx_word with tx_valid is radiated on
// air_out TX_LAT cycles later for one cycle, and a word present on air_in is
// delivered on rx_word/rx_valid one cycle later unless the receiver is asleep
// (sleep, the power-gated state of a sleepy receiver, which then outputs
// nothing).  Total latency is FLIT_CYCLES-2 cycles so that a word sent at the
// start of a slot is received before the slot ends.  The shared medium itself
// is the OR of all air_out words.  The data rate follows the paper; the
// word-level abstraction and the latency are this model's choices.
module ook_transceiver
  import mcw_pkg::*;
#(
  parameter int TX_LAT = FLIT_CYCLES - 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  tx_valid,
  input  flit_t tx_word,
  output air_t  air_out,     // radiated word (to the shared medium)
  input  air_t  air_in,      // shared medium
  input  logic  sleep,       // receiver power-gated
  output logic  rx_valid,
  output flit_t rx_word
);
  air_t pipe [TX_LAT];
  logic [$clog2(FLIT_CYCLES+1)-1:0] since_tx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < TX_LAT; i++) pipe[i] <= '0;
      rx_valid <= 1'b0;
      rx_word  <= '0;
      since_tx <= ($clog2(FLIT_CYCLES+1))'(FLIT_CYCLES);
    end else begin
      pipe[0] <= tx_valid ? '{valid: 1'b1, word: tx_word} : '0;  // silent when idle
      for (int i = 1; i < TX_LAT; i++) pipe[i] <= pipe[i-1];
      rx_valid <= air_in.valid && !sleep;
      rx_word  <= (air_in.valid && !sleep) ? air_in.word : '0;
      if (tx_valid) since_tx <= 1;
      else if (int'(since_tx) < FLIT_CYCLES) since_tx <= since_tx + 1'b1;
    end
  end

  assign air_out = pipe[TX_LAT-1];

  // the radio cannot accept words faster than one per FLIT_CYCLES cycles
  a_rate: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid |-> int'(since_tx) >= FLIT_CYCLES);
endmodule
