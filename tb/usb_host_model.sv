// usb_host_model -- behavioural stand-in for the USB micro-controller's OUT
// FIFO as the FPGA sees it: words pushed with push() appear head-first on fd;
// empty_n is high while words are waiting, except in cycles the model
// randomly holds back (GAP_PCT percent) to exercise flow control. A cycle with
// slrd_n low pops the head word.
module usb_host_model #(
  parameter int GAP_PCT = 20
) (
  input  logic        clk,
  output logic [15:0] fd,
  output logic        empty_n,
  input  logic        slrd_n
);
  logic [15:0] q [$];
  logic        gap;
  int          idx = 0;         // next word to hand out; advanced with <= so
                                // the FPGA samples fd before it moves

  task automatic push(input logic [15:0] w);
    q.push_back(w);
  endtask

  initial gap = 1'b0;
  assign fd      = (idx < q.size()) ? q[idx] : 16'h0;
  assign empty_n = (idx < q.size()) && !gap;

  function automatic int pending();
    return q.size() - idx;
  endfunction

  always @(posedge clk) begin
    if (!slrd_n && empty_n) idx <= idx + 1;
    gap <= ($urandom_range(99) < GAP_PCT);
  end
endmodule
