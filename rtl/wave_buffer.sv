// wave_buffer -- byte FIFO in FPGA block RAM for waveform data.
//
// The package decoder writes the data bytes of a data-package here and the
// memory writer takes them out at its own pace. The storage is a plain array
// read synchronously into an output register, so it maps onto one block RAM;
// the output behaves as first-word-fall-through (rd_valid means rd_data is
// the head byte, rd_ready pops it).
// Interface: valid/ready on both sides. Timing: a byte written in cycle t can
// be read from cycle t+2. Full throughput of one byte per cycle.
// That the FPGA buffers the waveform data in block RAM follows the paper; the
// depth (2048 bytes) and the FIFO organisation are this design's own choices.
module wave_buffer #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned W     = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_valid,
  input  logic [W-1:0] wr_data,
  output logic         wr_ready,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  input  logic         rd_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;            // bytes in the array (not in the output register)
  logic          wr_fire, mem_rd;

  assign wr_ready = (count != (AW+1)'(DEPTH));
  assign wr_fire  = wr_valid && wr_ready;
  // Refill the output register when it is empty or being popped.
  assign mem_rd   = (count != '0) && (!rd_valid || rd_ready);

  always_ff @(posedge clk) begin
    if (wr_fire) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      if (wr_fire) wptr <= wptr + 1'b1;
      if (mem_rd) begin
        rd_data  <= mem[rptr];
        rptr     <= rptr + 1'b1;
        rd_valid <= 1'b1;
      end else if (rd_ready) begin
        rd_valid <= 1'b0;
      end
      count <= count + (AW+1)'(wr_fire) - (AW+1)'(mem_rd);
    end
  end

  assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));
endmodule
