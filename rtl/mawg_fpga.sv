// mawg_fpga -- firmware of the control-board FPGA.
//
// Words from the USB micro-controller pass through the FIFO reader into the
// package decoder. Data-packages become a write job for the memory writer and
// a stream of bytes through the block-RAM buffer; the writer then writes one
// channel's memory over the backplane, byte by byte. Command-packages go to
// the command sequencer, which sets the update clock (internal divisor or
// external TTL clock) and, once the program is complete, plays it: on every
// update tick it tells all cards at once to load a segment start or to read
// the next word, and it drives the TTL trigger output.
// Backplane: the sequencer owns the address bus (segment number) while it runs
// and the writer only starts a job when the sequencer is idle, so the two never
// drive the bus together. clk_mode is put on the bus unchanged: one bit per
// channel position, 1 = continued-clock.
// Timing: everything runs on the 50 MHz system clock; the update clock is a
// one-cycle tick line on the backplane.
// The partitioning (USB interface, decoding, block-RAM buffering, byte-wide
// bus, sequencer, clock division) follows the paper; all encodings are this
// design's own.
module mawg_fpga
  import mawg_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // USB micro-controller
  input  logic [15:0] usb_fd,
  input  logic        usb_empty_n,
  output logic        usb_slrd_n,
  output logic        usb_sloe_n,
  output logic [1:0]  usb_fifoadr,
  // TTL
  input  logic        ttl_in,
  output logic        ttl_out,
  // clock mode of channel 1 / channel 2 of every card
  input  logic [1:0]  clk_mode,
  // backplane
  output bp_bus_t     bp,
  // status
  output logic        running,
  output logic        done,
  output logic        err
);
  logic        w_valid, w_ready;
  logic [15:0] w_word;
  logic        job_valid, job_ready;
  wr_job_t     job;
  logic        pb_valid, pb_ready, qb_valid, qb_ready;
  logic [7:0]  pb_data, qb_data;
  logic        cmd_valid;
  cmd_t        cmd;
  logic        tick, trig, ext_sel;
  logic [15:0] rate_div;
  logic        wr_busy, wr_load, wr_stb, wr_bit8;
  logic [1:0]  wr_lane;
  logic [7:0]  wr_addr, wr_data;
  logic        rd_load, rd_en;
  logic [3:0]  rd_seg;

  usb_fifo_reader u_usb (
    .clk, .rst, .usb_fd, .usb_empty_n, .usb_slrd_n, .usb_sloe_n, .usb_fifoadr,
    .out_valid(w_valid), .out_word(w_word), .out_ready(w_ready)
  );

  package_decoder u_dec (
    .clk, .rst,
    .in_valid(w_valid), .in_word(w_word), .in_ready(w_ready),
    .job_valid, .job, .job_ready,
    .byte_valid(pb_valid), .byte_data(pb_data), .byte_ready(pb_ready),
    .cmd_valid, .cmd, .err
  );

  wave_buffer u_buf (
    .clk, .rst,
    .wr_valid(pb_valid), .wr_data(pb_data), .wr_ready(pb_ready),
    .rd_valid(qb_valid), .rd_data(qb_data), .rd_ready(qb_ready)
  );

  sram_writer u_wr (
    .clk, .rst,
    .job_valid, .job, .job_ready,
    .byte_valid(qb_valid), .byte_data(qb_data), .byte_ready(qb_ready),
    .hold(running), .busy(wr_busy),
    .wr_load, .wr_stb, .wr_lane, .wr_bit8, .wr_addr, .wr_data
  );

  update_clock_gen u_clk (
    .clk, .rst, .div(rate_div), .ext_sel, .ttl_in, .tick, .trig
  );

  cmd_sequencer u_seq (
    .clk, .rst, .cmd_valid, .cmd, .tick, .trig, .wr_busy,
    .rate_div, .ext_sel, .running, .done,
    .rd_load, .rd_en, .rd_seg, .ttl_out
  );

  always_comb begin
    bp.ctrl.tick     = tick;
    bp.ctrl.rd_load  = rd_load;
    bp.ctrl.rd_en    = rd_en;
    bp.ctrl.clk_mode = clk_mode;
    bp.ctrl.wr_load  = wr_load;
    bp.ctrl.wr_stb   = wr_stb;
    bp.ctrl.wr_lane  = wr_lane;
    bp.ctrl.wr_bit8  = wr_bit8;
    bp.addr          = wr_busy ? wr_addr : {4'h0, rd_seg};
    bp.data          = wr_data;
  end

  // The writer and the sequencer never use the bus at the same time.
  assert property (@(posedge clk) disable iff (rst) !(wr_busy && running && (rd_load || rd_en)));
endmodule
