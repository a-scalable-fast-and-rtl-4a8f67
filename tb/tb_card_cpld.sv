// tb_card_cpld -- card 6's CPLD. Write side: checks port A is enabled only
// for address[7:4] = 6, the byte enable for each lane and the count enable on
// the MS lanes. Read side (tick every 2 cycles): checks port B follows the
// tick, rd_load and rd_en; then counts DAC clock pulses. Channel 1 in
// stopped-clock mode gets one pulse per word read plus 4 flush pulses and
// none after; channel 2 in continued-clock mode gets one per tick. Every pulse
// is one cycle wide and is high two cycles after the cycle in which tick
// was high (the memory output changes one cycle after the tick).
module tb_card_cpld;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic [3:0] addr_card, a_be;
  logic tick, rd_load, rd_en, wr_load, wr_stb;
  logic [1:0] clk_mode, wr_lane, dac_clk;
  logic a_ce, a_ads, a_we, a_cnten, b_ce, b_ads, b_cnten;
  int checks = 0, failures = 0;
  int pulses [2], ticks = 0;
  logic tick_q, tick_qq;

  card_cpld dut (.clk, .rst, .card_id(4'd6), .*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    tick_q  <= tick;
    tick_qq <= tick_q;
    if (!rst) begin
      for (int i = 0; i < 2; i++) if (dac_clk[i]) begin
        pulses[i]++;
        chk(tick_qq, "pulse not two cycles after a tick");
      end
    end
  end

  initial begin
    addr_card = 0; tick = 0; rd_load = 0; rd_en = 0; wr_load = 0; wr_stb = 0;
    clk_mode = 2'b10; wr_lane = 0;
    pulses[0] = 0; pulses[1] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // Write side, combinational.
    for (int c = 0; c < 16; c++) for (int l = 0; l < 4; l++) begin
      addr_card = 4'(c); wr_stb = 1; wr_lane = 2'(l); #1;
      chk(a_ce == (c == 6), "card select");
      chk(a_be == 4'(1 << l) && a_we, "byte enable");
      chk(a_cnten == l[0], "count enable on MS lane");
    end
    wr_stb = 0; wr_load = 1; addr_card = 6; #1;
    chk(a_ce && a_ads, "address load");
    wr_load = 0; #1;
    chk(!a_ce, "idle write port");
    // Read side: 5 ticks idle, 1 load, 6 reads, then 20 idle ticks.
    for (int t = 0; t < 32; t++) begin
      @(posedge clk); #1;
      tick = 1; rd_load = (t == 5); rd_en = (t >= 6 && t < 12);
      #1;
      chk(b_ce && b_ads == rd_load && b_cnten == rd_en, "port B control");
      @(posedge clk); #1;
      tick = 0;
      #1 chk(!b_ce, "port B enabled off tick");
      ticks++;
    end
    rd_en = 0;
    repeat (6) @(posedge clk);
    chk(pulses[0] == 6 + 4, $sformatf("stopped-clock pulses %0d", pulses[0]));
    chk(pulses[1] == ticks, $sformatf("continued-clock pulses %0d of %0d", pulses[1], ticks));
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
