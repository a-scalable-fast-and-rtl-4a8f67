// card_cpld -- control logic of one daughter card.
//
// Card select: the card answers write cycles only when address[7:4] of the
// backplane equals its 4-bit slot ID. For a selected card it turns wr_load
// into an address load of DP-SRAM port A, and each wr_stb into a write of
// the byte lane named by wr_lane; writing the MS lane (lane 1 or 3) also
// counts the write address up.
// Read side (all cards at once): port B of the DP-SRAM is enabled only on
// update ticks, loads the segment start on rd_load and reads one word per
// tick on rd_en.
// DAC clocks, one per channel: a pulse one system cycle wide. The DP-SRAM
// output changes at the clock edge that ends the tick cycle; the DAC clock
// rises one system cycle later, i.e. in the middle of the update period at
// the fastest rate, once the memory output has settled. In stopped-clock mode (clk_mode[i] = 0) a pulse
// comes only for a tick that brought a new word, plus FLUSH_CLOCKS more after
// the last new word so that the DAC's 3.5-cycle pipeline presents it; then the
// clock stops and the DAC holds that value. In continued-clock mode
// (clk_mode[i] = 1) every tick gives a pulse, so the DAC keeps refreshing the
// last word read.
// The two clock modes, the card-wide handling of both channels and the slot ID
// follow the paper; the bus encoding, the pulse placement and the flush pulses
// are this design's own choices.
module card_cpld #(
  parameter int unsigned FLUSH_CLOCKS = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [3:0] card_id,
  // backplane
  input  logic [3:0] addr_card,
  input  logic       tick,
  input  logic       rd_load,
  input  logic       rd_en,
  input  logic [1:0] clk_mode,
  input  logic       wr_load,
  input  logic       wr_stb,
  input  logic [1:0] wr_lane,
  // DP-SRAM port A
  output logic       a_ce,
  output logic       a_ads,
  output logic       a_we,
  output logic [3:0] a_be,
  output logic       a_cnten,
  // DP-SRAM port B
  output logic       b_ce,
  output logic       b_ads,
  output logic       b_cnten,
  // DAC clocks (channel 1 = bit 0)
  output logic [1:0] dac_clk
);
  localparam int unsigned FW = $clog2(FLUSH_CLOCKS + 1);

  logic          sel;
  logic          tick_q, new_word;
  logic [FW-1:0] flush [2];

  assign sel     = (addr_card == card_id);
  assign a_ce    = sel && (wr_load || wr_stb);
  assign a_ads   = wr_load;
  assign a_we    = wr_stb;
  assign a_be    = 4'b0001 << wr_lane;
  assign a_cnten = wr_stb && wr_lane[0];

  assign b_ce    = tick;
  assign b_ads   = rd_load;
  assign b_cnten = rd_en;

  always_ff @(posedge clk) begin
    if (rst) begin
      tick_q   <= 1'b0;
      new_word <= 1'b0;
      dac_clk  <= '0;
      flush[0] <= '0;
      flush[1] <= '0;
    end else begin
      tick_q <= tick;
      if (tick) new_word <= rd_en;
      for (int i = 0; i < 2; i++) begin
        dac_clk[i] <= 1'b0;
        if (tick_q) begin
          dac_clk[i] <= clk_mode[i] || new_word || (flush[i] != '0);
          if (new_word)             flush[i] <= FW'(FLUSH_CLOCKS);
          else if (flush[i] != '0)  flush[i] <= flush[i] - 1'b1;
        end
      end
    end
  end
endmodule
