// daughter_card -- one daughter card: CPLD, DP-SRAM and two output channels.
//
// The card takes the backplane bus shared by all cards. Write cycles for this
// card (address[7:4] = card_id) go through the CPLD into DP-SRAM port A: the
// 8-bit data plus the ninth bit are offered to all four 9-bit byte lanes and
// the CPLD's byte enable picks one. The segment number address[3:0] is the top
// 4 bits of the 17-bit memory address; the low 13 bits are zero, so a port can
// only be pointed at a segment start and counts on from there.
// On the read side every card reads one 36-bit word per update tick. Bits
// 16..9 and 7..0 form the code of DAC1 (channel 1), bits 34..27 and 25..18
// that of DAC2 (channel 2); bits 8, 17, 26 and 35 are the steering bits,
// brought out on `steer` ({35, 26, 17, 8}). Each DAC is clocked by its own
// CPLD clock; its currents feed the op-amp stage, which adds the common DC
// offset voltage.
// Timing: a word read at tick t reaches the DAC input after that tick, is
// latched by the DAC clock one system cycle later and shows on the output
// 3.5 DAC clock periods after that.
// The split of the word into two 18-bit sub-words, the 16 segments and the
// roles of CPLD and DP-SRAM follow the paper.
module daughter_card
  import mawg_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic [3:0]               card_id,
  input  bp_bus_t                  bp,
  input  logic signed [31:0]       voff_uv,
  output logic [1:0]               dac_clk,
  output logic [1:0][DAC_BITS-1:0] dac_code,
  output logic [3:0]               steer,
  output logic signed [31:0]       vout_uv [2]
);
  logic       a_ce, a_ads, a_we, a_cnten, b_ce, b_ads, b_cnten;
  logic [3:0] a_be;
  logic [SRAM_DW-1:0] dout;
  logic [SRAM_AW-1:0] seg_addr;
  logic [DAC_BITS-1:0] dac_in [2];
  logic signed [31:0] ip [2], in_ [2];

  assign seg_addr = {bp.addr[3:0], {SEG_SHIFT{1'b0}}};

  card_cpld u_cpld (
    .clk, .rst, .card_id,
    .addr_card (bp.addr[7:4]),
    .tick      (bp.ctrl.tick),
    .rd_load   (bp.ctrl.rd_load),
    .rd_en     (bp.ctrl.rd_en),
    .clk_mode  (bp.ctrl.clk_mode),
    .wr_load   (bp.ctrl.wr_load),
    .wr_stb    (bp.ctrl.wr_stb),
    .wr_lane   (bp.ctrl.wr_lane),
    .a_ce, .a_ads, .a_we, .a_be, .a_cnten,
    .b_ce, .b_ads, .b_cnten,
    .dac_clk
  );

  dpsram #(.DEPTH(SRAM_DEPTH), .AW(SRAM_AW), .DW(SRAM_DW)) u_sram (
    .clk,
    .a_ce, .a_ads, .a_addr(seg_addr), .a_cnten, .a_we, .a_be,
    .a_din   ({4{bp.ctrl.wr_bit8, bp.data}}),
    .b_ce, .b_ads, .b_addr(seg_addr), .b_cnten,
    .b_dout  (dout)
  );

  assign dac_in[0] = {dout[16:9],  dout[7:0]};
  assign dac_in[1] = {dout[34:27], dout[25:18]};
  assign steer     = {dout[35], dout[26], dout[17], dout[8]};

  for (genvar i = 0; i < 2; i++) begin : g_ch
    dac_model #(.BITS(DAC_BITS)) u_dac (
      .clk      (dac_clk[i]),
      .d        (dac_in[i]),
      .code_out (dac_code[i]),
      .ioutp_na (ip[i]),
      .ioutn_na (in_[i])
    );
    opamp_adder_model u_amp (
      .ioutp_na (ip[i]),
      .ioutn_na (in_[i]),
      .voff_uv,
      .vout_uv  (vout_uv[i])
    );
  end
endmodule
