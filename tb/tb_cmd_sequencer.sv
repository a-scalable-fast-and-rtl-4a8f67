// tb_cmd_sequencer -- loads and runs two programs, with the update tick made
// by the testbench every 3 system cycles.
// Program A: WaitForPulse, StartSegment 2:5, Pause 4, StartSegment 5:3,
// Repeat 0:1, SendPulse 3. Checks: nothing is read before the trigger; each
// pass loads segment 2 then reads 5 words, then segment 5 and 3 words; the
// two passes (Repeat 0:1 runs the block twice) need two triggers; the gap
// between the last word of segment 2 and the first of segment 5 is
// 4 + 2 + 4 ticks (switch latency plus the Pause command's FETCH, DECODE and
// 4 pause ticks); ttl_out is high for exactly 3 ticks; done pulses once.
// Program B: StartSegment 1:3 directly followed by StartSegment 9:2: the gap
// between the two segments' words is exactly 4 ticks. Also checks the
// configuration commands (rate divisor, external clock select).
module tb_cmd_sequencer;
  import mawg_pkg::*;
  import mawg_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic cmd_valid, tick, trig, wr_busy, ext_sel, running, done, rd_load, rd_en, ttl_out;
  cmd_t cmd;
  logic [15:0] rate_div;
  logic [3:0] rd_seg;
  int checks = 0, failures = 0;
  int tno = 0, dones = 0, pulse_ticks = 0;
  int rd_tick [$];
  int rd_segq [$];
  int load_segs [$];

  cmd_sequencer dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Tick every 3 cycles.
  int c3 = 0;
  always @(posedge clk) begin
    c3   <= (c3 == 2) ? 0 : c3 + 1;
    tick <= (c3 == 2);
  end

  always @(posedge clk) if (!rst) begin
    if (tick) begin
      tno++;
      if (rd_en) begin rd_tick.push_back(tno); rd_segq.push_back(int'(rd_seg)); end
      if (rd_load) load_segs.push_back(int'(rd_seg));
      if (ttl_out) pulse_ticks++;
    end
    if (done) dones++;
  end

  task automatic send(cmd_t c);
    @(posedge clk); #1;
    cmd = c; cmd_valid = 1;
    @(posedge clk); #1;
    cmd_valid = 0;
  endtask

  task automatic pulse_trig();
    @(posedge clk); #1 trig = 1;
    @(posedge clk); #1 trig = 0;
  endtask

  initial begin
    int n2, n5, gap;
    cmd_valid = 0; cmd = '0; trig = 0; wr_busy = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    send(mk(OP_SET_RATE, 3));
    send(mk(OP_EXT_CLK, 1));
    chk(rate_div == 3 && ext_sel, "config");
    send(mk(OP_EXT_CLK, 0));
    chk(!ext_sel, "ext clk disable");
    wr_busy = 1;
    send(mk(OP_START_SEQ, 0));
    send(mk(OP_WAIT_PULSE, 0));
    send(mk(2, 5));
    send(mk(OP_PAUSE, 4));
    send(mk(5, 3));
    send(mk_repeat(0, 1));
    send(mk(OP_SEND_PULSE, 3));
    send(mk(OP_END_SEQ, 0));
    repeat (30) @(posedge clk);
    chk(!running, "runs while the writer is busy");
    wr_busy = 0;
    repeat (150) @(posedge clk);
    chk(running && rd_tick.size() == 0 && load_segs.size() == 0, "did not wait for the pulse");
    pulse_trig();
    repeat (150) @(posedge clk);
    chk(rd_tick.size() == 8, $sformatf("first pass reads %0d", rd_tick.size()));
    pulse_trig();
    wait (dones == 1);
    repeat (20) @(posedge clk);
    n2 = 0; n5 = 0;
    foreach (rd_segq[i]) if (rd_segq[i] == 2) n2++; else if (rd_segq[i] == 5) n5++;
    chk(n2 == 10 && n5 == 6, $sformatf("reads seg2 %0d seg5 %0d", n2, n5));
    chk(load_segs.size() == 4 && load_segs[0] == 2 && load_segs[1] == 5 && load_segs[2] == 2 && load_segs[3] == 5, "loads");
    for (int i = 1; i < 5; i++) chk(rd_tick[i] - rd_tick[i-1] == 1, "consecutive reads");
    gap = rd_tick[5] - rd_tick[4];
    chk(gap == 10, $sformatf("gap over Pause %0d", gap));
    chk(pulse_ticks == 3, $sformatf("pulse ticks %0d", pulse_ticks));
    chk(!running, "still running");

    // Program B.
    rd_tick.delete(); rd_segq.delete(); load_segs.delete();
    send(mk(OP_START_SEQ, 0));
    send(mk(1, 3));
    send(mk(9, 2));
    send(mk(OP_END_SEQ, 0));
    wait (dones == 2);
    chk(rd_tick.size() == 5, "program B reads");
    if (rd_tick.size() == 5) chk(rd_tick[3] - rd_tick[2] == 4, $sformatf("switch latency %0d", rd_tick[3] - rd_tick[2]));
    chk(load_segs.size() == 2 && load_segs[0] == 1 && load_segs[1] == 9, "program B loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
