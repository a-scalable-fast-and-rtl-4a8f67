// usb_fifo_reader -- FPGA side of the USB micro-controller's slave FIFO.
//
// The USB micro-controller hands the FPGA the data from the control computer
// as 16-bit words. This module pops a word whenever the FIFO reports data
// (usb_empty_n high) and its own output register is free or being emptied,
// and presents the word as a valid/ready stream to the package decoder.
//
// Interface: the FIFO is taken to be first-word-fall-through: usb_fd shows
// the head word and a cycle with usb_slrd_n low pops it. usb_sloe_n is kept
// asserted and usb_fifoadr selects FIFO 0 (one OUT endpoint).
// Timing: one word per clock cycle at most; a word appears on out_word one
// cycle after it is popped.
// The 16-bit word and the 2-bit FIFO address follow the paper; which of the
// controller's control lines are used, and the FIFO behaviour, are this
// design's own choices.
module usb_fifo_reader #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] usb_fd,
  input  logic         usb_empty_n,
  output logic         usb_slrd_n,
  output logic         usb_sloe_n,
  output logic [1:0]   usb_fifoadr,
  output logic         out_valid,
  output logic [W-1:0] out_word,
  input  logic         out_ready
);
  logic pop;

  assign pop         = usb_empty_n && (!out_valid || out_ready);
  assign usb_slrd_n  = !pop;
  assign usb_sloe_n  = 1'b0;
  assign usb_fifoadr = 2'd0;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (pop) begin
      out_valid <= 1'b1;
      out_word  <= usb_fd;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  property p_hold;
    @(posedge clk) disable iff (rst) out_valid && !out_ready |=> out_valid && $stable(out_word);
  endproperty
  assert property (p_hold);
endmodule
