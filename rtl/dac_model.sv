// dac_model -- behavioural model of a 16-bit current-output DAC (not synthesizable
// as a real part: it stands for the analog converter on each channel).
//
// The code on `d` is latched on the rising edge of the DAC clock and appears
// 3.5 clock cycles later: four rising-edge register stages and an output
// register on the falling edge. The output is a pair of complementary
// currents in nanoamps, ioutp = IFS_NA * code / 65535 and ioutn = IFS_NA -
// ioutp (offset-binary code); one code step is about 305 nA, so the
// currents keep the full 16-bit resolution. With no clock the output holds, which is what
// the stopped-clock mode relies on. `code_out` is the code now on the output.
// The 16-bit resolution, the complementary current outputs and the 3.5-cycle
// latency follow the paper. The full-scale current is taken as 20 mA: the
// paper's "±2 mA" would not reach its stated ±10 V output through 50 Ω loads
// and a gain of 10, while 20 mA does.
module dac_model #(
  parameter int unsigned BITS   = 16,
  parameter int          IFS_NA = 20000000
) (
  input  logic                clk,
  input  logic [BITS-1:0]     d,
  output logic [BITS-1:0]     code_out,
  output logic signed [31:0]  ioutp_na,
  output logic signed [31:0]  ioutn_na
);
  localparam longint FULL = (longint'(1) << BITS) - 1;

  logic [BITS-1:0] stage [4];

  always @(posedge clk) begin
    stage[0] <= d;
    for (int k = 1; k < 4; k++) stage[k] <= stage[k-1];
  end

  always @(negedge clk) code_out <= stage[3];

  always_comb begin
    ioutp_na = 32'(longint'(IFS_NA) * longint'(code_out) / FULL);
    ioutn_na = IFS_NA - ioutp_na;
  end
endmodule
