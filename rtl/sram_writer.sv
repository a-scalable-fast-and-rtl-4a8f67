// sram_writer -- the write operation: waveform bytes to one channel's memory.
//
// For each write job (channel, segment, number of 9-byte packets) it first
// puts {card, segment} on the backplane address bus with wr_load, which loads
// the write-port address counter of the addressed card's DP-SRAM with the
// segment start. It then takes the data bytes 9 at a time. A 9-byte packet is
// 72 bits, four 18-bit sub-words, the first byte holding the top bits of the
// first sub-word. Each sub-word {bit17, MS byte, bit8, LS byte} is written as
// two 9-bit byte lanes over the 8-bit data bus, the ninth bit on wr_bit8:
// first the LS lane, then the MS lane; the card counts the address up after
// the MS lane. Channel c is on card c/2; even channels use lanes 0/1 (DAC1,
// bits 17..0 of the memory word), odd channels lanes 2/3 (DAC2, bits 35..18).
// A job is not started while `hold` is high (the sequencer is running and owns
// the address bus); `busy` is high from accepting a job until its last write.
// Timing: one cycle for the address load; per packet
// at least one cycle per byte to gather a packet, then 8 write cycles.
// Sub-word layout and the one-channel-at-a-time byte-wide writing follow the
// paper; the bit order in a packet, the lane order and the bus encoding are
// this design's own choices.
module sram_writer
  import mawg_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       job_valid,
  input  wr_job_t    job,
  output logic       job_ready,
  input  logic       byte_valid,
  input  logic [7:0] byte_data,
  output logic       byte_ready,
  input  logic       hold,
  output logic       busy,
  output logic       wr_load,
  output logic       wr_stb,
  output logic [1:0] wr_lane,
  output logic       wr_bit8,
  output logic [7:0] wr_addr,
  output logic [7:0] wr_data
);
  typedef enum logic [1:0] {W_IDLE, W_LOAD, W_GATHER, W_WRITE} state_e;

  state_e      st;
  logic [4:0]  cur_ch;
  logic [3:0]  cur_seg;
  logic [71:0] pkt;
  logic [3:0]  nbytes;     // bytes gathered of the current packet
  logic [2:0]  step;       // write step: sub-word = step[2:1], MS lane = step[0]
  logic [15:0] pkts_left;
  logic [17:0] sub;
  logic [8:0]  lane_bits;

  assign job_ready  = (st == W_IDLE) && !hold;
  assign byte_ready = (st == W_GATHER);
  assign busy       = (st != W_IDLE);

  assign sub       = pkt[71 - 18*step[2:1] -: 18];
  assign lane_bits = step[0] ? sub[17:9] : sub[8:0];

  assign wr_load = (st == W_LOAD);
  assign wr_stb  = (st == W_WRITE);
  assign wr_lane = {cur_ch[0], step[0]};
  assign wr_bit8 = lane_bits[8];
  assign wr_data = lane_bits[7:0];
  assign wr_addr = {cur_ch[4:1], cur_seg};

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= W_IDLE;
      cur_ch    <= '0;
      cur_seg   <= '0;
      pkt       <= '0;
      nbytes    <= '0;
      step      <= '0;
      pkts_left <= '0;
    end else begin
      case (st)
        W_IDLE: if (job_valid && job_ready) begin
          cur_ch    <= job.channel;
          cur_seg   <= job.segment;
          pkts_left <= job.npackets;
          st        <= W_LOAD;
        end
        W_LOAD: begin
          nbytes <= '0;
          st     <= (pkts_left == 0) ? W_IDLE : W_GATHER;
        end
        W_GATHER: if (byte_valid) begin
          pkt    <= {pkt[63:0], byte_data};
          nbytes <= nbytes + 1'b1;
          if (nbytes == 4'(PACKET_BYTES - 1)) begin
            step <= '0;
            st   <= W_WRITE;
          end
        end
        W_WRITE: begin
          step <= step + 1'b1;
          if (step == 3'd7) begin
            pkts_left <= pkts_left - 1'b1;
            nbytes    <= '0;
            st        <= (pkts_left == 16'd1) ? W_IDLE : W_GATHER;
          end
        end
        default: st <= W_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(wr_stb && wr_load));
endmodule
