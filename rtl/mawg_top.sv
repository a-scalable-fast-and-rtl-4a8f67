// mawg_top -- the multichannel arbitrary waveform generator.
//
// The control-board FPGA drives one backplane bus that all NUM_CARDS
// daughter cards share; card k has slot ID k. Each card holds the waveforms of
// its two channels in its own dual-port memory, so a write touches one channel
// at a time while a read plays all 2*NUM_CARDS channels at once, one 16-bit
// word per channel per update tick.
// Ports: the 50 MHz system clock and a synchronous reset; the USB
// micro-controller's FIFO interface; the TTL input (external clock or
// trigger) and TTL trigger output; the clock mode of the two channel
// positions; the common DC offset voltage (µV); and per channel the DAC
// clock, the DAC code now on the DAC output and the modelled output voltage (µV).
// Channel c is channel (c mod 2)+1 of card c/2.
// The 12 cards, 24 channels and the shared bus follow the paper.
// usb_sloe_n and usb_fifoadr are constant (output enable always on, FIFO 0
// always selected): the generator reads a single USB FIFO.
module mawg_top #(
  parameter int unsigned NUM_CARDS = 12
) (
  input  logic                                 clk,
  input  logic                                 rst,
  input  logic [15:0]                          usb_fd,
  input  logic                                 usb_empty_n,
  output logic                                 usb_slrd_n,
  output logic                                 usb_sloe_n,
  output logic [1:0]                           usb_fifoadr,
  input  logic                                 ttl_in,
  output logic                                 ttl_out,
  input  logic [1:0]                           clk_mode,
  input  logic signed [31:0]                   voff_uv,
  output logic                                 running,
  output logic                                 done,
  output logic                                 err,
  output logic [2*NUM_CARDS-1:0]               dac_clk,
  output logic [2*NUM_CARDS-1:0][mawg_pkg::DAC_BITS-1:0] dac_code,
  output logic [NUM_CARDS-1:0][3:0]            steer,
  output logic signed [31:0]                   vout_uv [2*NUM_CARDS]
);
  mawg_pkg::bp_bus_t bp;

  mawg_fpga u_fpga (
    .clk, .rst, .usb_fd, .usb_empty_n, .usb_slrd_n, .usb_sloe_n, .usb_fifoadr,
    .ttl_in, .ttl_out, .clk_mode, .bp, .running, .done, .err
  );

  for (genvar k = 0; k < NUM_CARDS; k++) begin : g_card
    logic signed [31:0] v [2];
    daughter_card u_card (
      .clk, .rst,
      .card_id  (4'(k)),
      .bp,
      .voff_uv,
      .dac_clk  (dac_clk[2*k +: 2]),
      .dac_code (dac_code[2*k +: 2]),
      .steer    (steer[k]),
      .vout_uv  (v)
    );
    assign vout_uv[2*k]   = v[0];
    assign vout_uv[2*k+1] = v[1];
  end
endmodule
