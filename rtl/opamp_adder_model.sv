// opamp_adder_model -- behavioural model of a channel's analog output stage
// (it stands for resistors and an op-amp, not for logic).
//
// The DAC's two currents flow into R_LOAD_OHM resistors to ground; the
// op-amp takes the difference of the two voltages, amplifies it by GAIN and
// adds the DC offset voltage common to all channels. The result is clipped at
// ±VLIM_UV, the largest swing the amplifier can drive into the termination.
// All quantities are whole numbers: currents in nA, voltages in µV; the
// amplified difference (nA x Ω = nV) is truncated towards zero to µV before
// the offset is added. Combinational: the analog settling is not modelled.
// The 50 Ω loads, the gain of 10, the common DC offset and the ±10 V limit
// (333 Ω termination) follow the paper; which DAC output feeds which op-amp
// input, and therefore the sign, is this design's own convention.
module opamp_adder_model #(
  parameter int GAIN       = 10,
  parameter int R_LOAD_OHM = 50,
  parameter int VLIM_UV    = 10000000
) (
  input  logic signed [31:0] ioutp_na,
  input  logic signed [31:0] ioutn_na,
  input  logic signed [31:0] voff_uv,
  output logic signed [31:0] vout_uv
);
  longint v;

  always_comb begin
    v = longint'(GAIN) * longint'(R_LOAD_OHM) * (longint'(ioutp_na) - longint'(ioutn_na)) / 1000
        + longint'(voff_uv);
    if (v > longint'(VLIM_UV))       vout_uv = VLIM_UV;
    else if (v < -longint'(VLIM_UV)) vout_uv = -VLIM_UV;
    else                             vout_uv = 32'(v);
  end
endmodule
