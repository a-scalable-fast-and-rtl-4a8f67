// update_clock_gen -- the update clock of the read operation.
//
// Produces `tick`, one system-clock cycle wide, once per update period. With
// the internal clock the 50 MHz system clock is divided by `div` (the
// SetUpdateRate argument; 2 gives the maximum 25 MHz, smaller values are
// taken as 2). With the external clock selected, each rising edge of the TTL
// input, after a SYNC_STAGES-flop synchroniser, gives one tick. `trig` is a
// one-cycle pulse on every rising edge of the same synchronised TTL input,
// used by the sequencer's WaitForPulse.
// Timing: internal ticks come every max(div,2) cycles; an external edge gives a
// tick SYNC_STAGES+1 cycles later. A new divisor takes effect at the next tick.
// Clock division from the 50 MHz oscillator, the divisor semantics of
// SetUpdateRate and the use of the TTL input as clock or trigger follow the
// paper; the synchroniser and the divisor width are this design's own.
module update_clock_gen #(
  parameter int unsigned DIV_W       = 16,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [DIV_W-1:0] div,
  input  logic             ext_sel,
  input  logic             ttl_in,
  output logic             tick,
  output logic             trig
);
  logic [SYNC_STAGES-1:0] sync;
  logic                   ttl_q;
  logic [DIV_W-1:0]       cnt, div_eff;
  logic                   int_tick;

  assign div_eff  = (div < DIV_W'(2)) ? DIV_W'(2) : div;
  assign int_tick = (cnt >= div_eff - 1'b1);

  always_ff @(posedge clk) begin
    if (rst) begin
      sync  <= '0;
      ttl_q <= 1'b0;
      cnt   <= '0;
      tick  <= 1'b0;
      trig  <= 1'b0;
    end else begin
      sync  <= {sync[SYNC_STAGES-2:0], ttl_in};
      ttl_q <= sync[SYNC_STAGES-1];
      trig  <= sync[SYNC_STAGES-1] && !ttl_q;
      cnt   <= int_tick ? '0 : cnt + 1'b1;
      tick  <= ext_sel ? (sync[SYNC_STAGES-1] && !ttl_q) : int_tick;
    end
  end
endmodule
