// dpsram -- 128 k x 36 synchronous dual-port SRAM with address counters.
//
// Model of the daughter card's DP-SRAM as the design uses it. Each port has
// its own address register: `ads` loads it from the address pins, `cnten`
// counts it up by one after the access. The counter stops at the last address
// rather than wrapping, so a waveform may run across segment boundaries up to
// the end of the memory.
// Port A (write, from the backplane): with `a_we`, the 9-bit byte lanes
// selected by `a_be` are written at the current address with a_din (lane k
// is bits 9k+8..9k).
// Port B (read, to the DACs): with `b_cnten`, the word at the current address
// is loaded into the output register b_dout, which otherwise holds its value.
// Both ports are clocked by clk and enabled by a_ce/b_ce.
// Timing: a word read with b_cnten at edge t is on b_dout after edge t; a
// word written at edge t can be read from edge t+1.
// Word size, depth, byte lanes and the internal address counters follow the
// paper; port B's output hold and the counter's stop at the end are this
// design's own choices. The array stands for the process-specific part and
// none of its electrical timing is modelled.
module dpsram #(
  parameter int unsigned DEPTH = 131072,
  parameter int unsigned AW    = 17,
  parameter int unsigned DW    = 36
) (
  input  logic            clk,
  // port A
  input  logic            a_ce,
  input  logic            a_ads,
  input  logic [AW-1:0]   a_addr,
  input  logic            a_cnten,
  input  logic            a_we,
  input  logic [DW/9-1:0] a_be,
  input  logic [DW-1:0]   a_din,
  // port B
  input  logic            b_ce,
  input  logic            b_ads,
  input  logic [AW-1:0]   b_addr,
  input  logic            b_cnten,
  output logic [DW-1:0]   b_dout
);
  localparam int unsigned NL = DW / 9;
  localparam logic [AW-1:0] LAST = AW'(DEPTH - 1);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] a_ptr, b_ptr;

  always_ff @(posedge clk) begin
    if (a_ce) begin
      if (a_ads) a_ptr <= a_addr;
      else begin
        if (a_we)
          for (int k = 0; k < NL; k++)
            if (a_be[k]) mem[a_ptr][9*k +: 9] <= a_din[9*k +: 9];
        if (a_cnten && a_ptr != LAST) a_ptr <= a_ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (b_ce) begin
      if (b_ads) b_ptr <= b_addr;
      else if (b_cnten) begin
        b_dout <= mem[b_ptr];
        if (b_ptr != LAST) b_ptr <= b_ptr + 1'b1;
      end
    end
  end
endmodule
