// tb_daughter_card -- card 3 on a hand-driven backplane bus. Writes 10
// sub-words to channel 1 and 10 others to channel 2 of segment 4, and junk
// addressed to card 5 (which card 3 must ignore). Then plays segment 4 with a
// tick every 2 cycles, channel 1 in stopped-clock mode and channel 2 in
// continued-clock mode. Checks the codes each DAC latches (channel 1: the 10
// codes then 4 repeats of the last, then no more clocks; channel 2: the 10
// codes, in order, among its continuous clocks), the final DAC outputs, the
// steering bits of the last word and the output voltages with a 1.5 V offset.
module tb_daughter_card;
  import mawg_pkg::*;
  import mawg_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  bp_bus_t bp;
  logic signed [31:0] voff_uv;
  logic [1:0] dac_clk;
  logic [1:0][15:0] dac_code;
  logic [3:0] steer;
  logic signed [31:0] vout_uv [2];
  int checks = 0, failures = 0;
  logic [17:0] subs [2][$];
  logic [15:0] latched [2][$];

  daughter_card dut (.clk, .rst, .card_id(4'd3), .bp, .voff_uv, .dac_clk, .dac_code, .steer, .vout_uv);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge dac_clk[0]) latched[0].push_back({dut.dac_in[0]});
  always @(posedge dac_clk[1]) latched[1].push_back({dut.dac_in[1]});

  task automatic cyc();
    @(posedge clk); #1;
    bp.ctrl.wr_load = 0; bp.ctrl.wr_stb = 0; bp.ctrl.tick = 0;
  endtask

  task automatic write_sub(int card, int ch, int seg, logic [17:0] s [$]);
    bp.addr = {4'(card), 4'(seg)}; bp.ctrl.wr_load = 1; cyc();
    foreach (s[i]) begin
      bp.ctrl.wr_stb = 1; bp.ctrl.wr_lane = {1'(ch), 1'b0}; {bp.ctrl.wr_bit8, bp.data} = s[i][8:0];  cyc();
      bp.ctrl.wr_stb = 1; bp.ctrl.wr_lane = {1'(ch), 1'b1}; {bp.ctrl.wr_bit8, bp.data} = s[i][17:9]; cyc();
    end
  endtask

  task automatic tick_cycle(bit ld, bit en);
    bp.ctrl.tick = 1; bp.ctrl.rd_load = ld; bp.ctrl.rd_en = en;
    cyc();
    bp.ctrl.rd_load = 0; bp.ctrl.rd_en = 0;
    cyc();
  endtask

  initial begin
    logic [17:0] junk [$];
    int k;
    bp = '0; voff_uv = 1500000;
    bp.ctrl.clk_mode = 2'b10;
    for (int i = 0; i < 10; i++) begin
      subs[0].push_back(18'($urandom));
      subs[1].push_back(18'($urandom));
      junk.push_back(18'($urandom));
    end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    write_sub(3, 0, 4, subs[0]);
    write_sub(3, 1, 4, subs[1]);
    write_sub(5, 0, 4, junk);
    latched[0].delete(); latched[1].delete();
    for (int t = 0; t < 3; t++) tick_cycle(0, 0);
    tick_cycle(1, 0);
    for (int t = 0; t < 10; t++) tick_cycle(0, 1);
    for (int t = 0; t < 12; t++) tick_cycle(0, 0);
    // Channel 1, stopped clock.
    chk(latched[0].size() == 14, $sformatf("ch1 clocks %0d", latched[0].size()));
    for (int i = 0; i < 14 && i < latched[0].size(); i++)
      chk(latched[0][i] == code_of(subs[0][i < 10 ? i : 9]), $sformatf("ch1 code %0d", i));
    // Channel 2, continued clock: find the 10 codes in order.
    chk(latched[1].size() == 26, $sformatf("ch2 clocks %0d", latched[1].size()));
    k = 0;
    foreach (latched[1][i]) if (k < 10 && latched[1][i] == code_of(subs[1][k])) k++;
    chk(k == 10, $sformatf("ch2 sequence found %0d of 10", k));
    chk(dac_code[0] == code_of(subs[0][9]) && dac_code[1] == code_of(subs[1][9]), "final DAC codes");
    chk(steer == {subs[1][9][17], subs[1][9][8], subs[0][9][17], subs[0][9][8]}, "steering bits");
    for (int c = 0; c < 2; c++) begin
      automatic longint ip = longint'(20000000) * code_of(subs[c][9]) / 65535;
      automatic longint v = 500 * (2 * ip - 20000000) / 1000 + 1500000;
      if (v > 10000000) v = 10000000;
      if (v < -10000000) v = -10000000;
      chk(vout_uv[c] == 32'(v), $sformatf("vout ch%0d %0d vs %0d", c + 1, vout_uv[c], v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
