// tb_mawg_top -- end-to-end run of the whole generator at its full size
// (12 cards, 24 channels, 128 k words per card), from USB words to DAC codes
// and output voltages.
//
// Loads, through the USB FIFO model, channel 0 segment 2 with 8200 words
// (running on into segment 3), channel 0 segment 5, channel 23 segments 2 and
// 5 and channel 6 segment 2. Every code is unique within its channel. Then:
//  1. 25 MHz internal clock, channel position 1 stopped-clock, position 2
//     continued-clock: WaitForPulse, StartSegment 2:30, StartSegment 5:20,
//     Pause 10, Repeat 0:2, SendPulse 17; the testbench answers each wait with
//     a TTL pulse. A data-package sent with the program must wait for its end.
//  2. 10 MHz internal clock, both positions continued-clock: StartSegment
//     2:8200, across the segment 2/3 boundary.
//  3. External TTL clock, stopped-clock: StartSegment 5:20.
//  4. A bad start word.
// Checks the sequence of codes each checked channel puts out, the 160 ns
// segment switch at 25 MHz, the DAC clock period at 10 MHz, the trigger
// pulse length and the final output voltage, and counts how often each
// mechanism happened; a mechanism that never happened is a failure.
module tb_mawg_top;
  import mawg_pkg::*;
  import mawg_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;                // 50 MHz

  logic [15:0] usb_fd;
  logic usb_empty_n, usb_slrd_n, usb_sloe_n, ttl_in, ttl_out, running, done, err;
  logic [1:0] usb_fifoadr, clk_mode;
  logic signed [31:0] voff_uv;
  logic [23:0] dac_clk;
  logic [23:0][15:0] dac_code;
  logic [11:0][3:0] steer;
  logic signed [31:0] vout_uv [24];
  int checks = 0, failures = 0;

  usb_host_model #(.GAP_PCT(5)) u_host (.clk, .fd(usb_fd), .empty_n(usb_empty_n), .slrd_n(usb_slrd_n));
  mawg_top dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [15:0] code(int ch, int seg, int i);
    return 16'(((seg == 5) ? 32'h8000 : 32'h0) + i) ^ 16'(ch * 16'h0101);
  endfunction

  // ---- output records: DAC output code after every DAC clock, duplicates merged
  logic [15:0] outq [24][$];
  realtime     latch_t [24][$];     // time of each DAC clock rising edge
  logic [15:0] latch_v [24][$];     // code latched at that edge
  for (genvar c = 0; c < 24; c++) begin : g_rec
    always @(negedge dac_clk[c]) begin
      #1;
      if (outq[c].size() == 0 || outq[c][$] != dac_code[c]) outq[c].push_back(dac_code[c]);
    end
    always @(posedge dac_clk[c]) begin
      latch_t[c].push_back($realtime);
      latch_v[c].push_back(dut.g_card[c/2].u_card.dac_in[c%2]);
    end
  end

  function automatic bit ends_with(int c, logic [15:0] e [$]);
    if (outq[c].size() < e.size()) return 0;
    foreach (e[i]) if (outq[c][outq[c].size() - e.size() + i] != e[i]) return 0;
    return 1;
  endfunction

  function automatic bit contains(int c, logic [15:0] e [$]);
    for (int s = 0; s + e.size() <= outq[c].size(); s++) begin
      bit ok = 1;
      foreach (e[i]) if (outq[c][s+i] != e[i]) begin ok = 0; break; end
      if (ok) return 1;
    end
    return 0;
  endfunction

  // ---- mechanism counters
  int n_jobs = 0, n_loads = 0, n_pause = 0, n_repeat = 0, n_wait = 0, n_pulse = 0,
      n_rate = 0, n_ext = 0, n_flush = 0, n_cont = 0, n_cross = 0, n_err = 0,
      n_full = 0, n_hold = 0, n_switch160 = 0;
  logic ttl_q = 0;
  always @(posedge clk) if (!rst) begin
    ttl_q <= ttl_out;
    if (dut.u_fpga.u_wr.job_valid && dut.u_fpga.u_wr.job_ready) n_jobs++;
    if (dut.u_fpga.u_wr.job_valid && dut.u_fpga.running) n_hold++;
    if (!dut.u_fpga.u_buf.wr_ready) n_full++;
    if (dut.u_fpga.u_seq.cmd_valid && dut.u_fpga.u_seq.cmd.op == OP_SET_RATE) n_rate++;
    if (dut.u_fpga.tick) begin
      if (dut.u_fpga.rd_load) n_loads++;
      if (dut.u_fpga.u_seq.st == dut.u_fpga.u_seq.Q_PAUSE) n_pause++;
      if (dut.u_fpga.u_seq.st == dut.u_fpga.u_seq.Q_DECODE && dut.u_fpga.u_seq.ir.op == OP_REPEAT
          && dut.u_fpga.u_seq.loop_cnt < dut.u_fpga.u_seq.ir.arg[15:0]) n_repeat++;
      if (dut.u_fpga.u_seq.st == dut.u_fpga.u_seq.Q_WAIT && dut.u_fpga.u_seq.trig_seen) n_wait++;
      if (dut.u_fpga.ext_sel) n_ext++;
      if (dut.u_fpga.rd_en && dut.g_card[0].u_card.u_sram.b_ptr[12:0] == 13'h1FFF) n_cross++;
    end
    if (ttl_out && !ttl_q) n_pulse++;
    if (dac_clk[0] && !dut.g_card[0].u_card.u_cpld.new_word) begin
      if (clk_mode[0]) n_cont++; else n_flush++;
    end
    if (err) n_err++;
  end

  // ---- answer WaitForPulse with a TTL pulse
  initial begin
    ttl_in = 0;
    forever begin
      @(posedge clk);
      if (!dut.u_fpga.ext_sel && dut.u_fpga.u_seq.st == dut.u_fpga.u_seq.Q_WAIT) begin
        repeat (20) @(posedge clk);
        ttl_in = 1;
        repeat (5) @(posedge clk);
        ttl_in = 0;
        repeat (10) @(posedge clk);
      end
    end
  end

  task automatic send(word_q_t q);
    foreach (q[i]) u_host.push(q[i]);
    while (u_host.pending() != 0) @(posedge clk);
  endtask

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  task automatic wait_done();
    automatic int d = n_done;
    while (n_done == d) @(posedge clk);
    repeat (40) @(posedge clk);
  endtask

  function automatic void data_pkg(ref word_q_t q, input int ch, input int seg, input int n);
    logic [17:0] s [$];
    for (int i = 0; i < n; i++) begin
      logic [15:0] v = code(ch, seg, i);
      s.push_back({1'($urandom), v[15:8], 1'($urandom), v[7:0]});
    end
    add_data_pkg(q, ch, seg, s);
  endfunction

  function automatic void exp_seq(ref logic [15:0] e [$], input int ch, input int seg, input int n);
    for (int i = 0; i < n; i++) e.push_back(code(ch, seg, i));
  endfunction

  initial begin
    word_q_t q;
    cmd_t c [$];
    logic [15:0] e [$];
    realtime pulse_ns;
    int d0;
    clk_mode = 2'b10; voff_uv = -32'sd1000000;
    repeat (5) @(posedge clk);
    rst = 0;

    // ---- write operation
    data_pkg(q, 0, 2, 8200);
    data_pkg(q, 0, 5, 20);
    data_pkg(q, 23, 2, 30);
    data_pkg(q, 23, 5, 20);
    send(q);
    while (dut.u_fpga.u_wr.busy || dut.u_fpga.u_buf.rd_valid) @(posedge clk);
    repeat (10) @(posedge clk);
    chk(n_jobs == 4, $sformatf("write jobs %0d", n_jobs));

    // ---- program 1
    q.delete(); c.delete();
    c.push_back(mk(OP_START_SEQ, 0));
    c.push_back(mk(OP_SET_RATE, 2));
    c.push_back(mk(OP_EXT_CLK, 0));
    c.push_back(mk(OP_WAIT_PULSE, 0));
    c.push_back(mk(2, 30));
    c.push_back(mk(5, 20));
    c.push_back(mk(OP_PAUSE, 10));
    c.push_back(mk_repeat(0, 2));
    c.push_back(mk(OP_SEND_PULSE, 17));
    c.push_back(mk(OP_END_SEQ, 0));
    add_cmd_pkg(q, c);
    data_pkg(q, 6, 2, 30);          // held until the program ends
    for (int k = 0; k < 24; k++) begin outq[k].delete(); latch_t[k].delete(); latch_v[k].delete(); end
    fork
      begin
        realtime t_rise;
        @(posedge ttl_out);
        t_rise = $realtime;
        @(negedge ttl_out);
        pulse_ns = $realtime - t_rise;
      end
    join_none
    send(q);
    wait_done();
    e.delete();
    repeat (3) begin exp_seq(e, 0, 2, 30); exp_seq(e, 0, 5, 20); end
    chk(ends_with(0, e) && outq[0].size() <= e.size() + 1, "channel 0 sequence, program 1");
    e.delete();
    repeat (3) begin exp_seq(e, 23, 2, 30); exp_seq(e, 23, 5, 20); end
    chk(ends_with(23, e), "channel 23 sequence, program 1");
    chk(pulse_ns == 17 * 40.0, $sformatf("trigger pulse %0.1f ns", pulse_ns));
    // Segment switch: last word of segment 2 to first word of segment 5.
    begin
      realtime t29 = -1, t0 = -1;
      foreach (latch_v[0][i]) begin
        if (t29 < 0 && latch_v[0][i] == code(0, 2, 29)) t29 = latch_t[0][i];
        if (t0 < 0 && t29 >= 0 && latch_v[0][i] == code(0, 5, 0)) t0 = latch_t[0][i];
      end
      chk(t0 - t29 == 160.0, $sformatf("segment switch %0.1f ns", t0 - t29));
      if (t0 - t29 == 160.0) n_switch160++;
    end
    // Stopped clock: DAC of channel 0 holds the last value.
    chk(dac_code[0] == code(0, 5, 19), "channel 0 holds its last value");
    begin
      automatic longint ip = longint'(20000000) * code(0, 5, 19) / 65535;
      automatic longint v = 500 * (2 * ip - 20000000) / 1000 - 1000000;
      if (v > 10000000) v = 10000000;
      if (v < -10000000) v = -10000000;
      chk(vout_uv[0] == 32'(v), $sformatf("channel 0 voltage %0d uV, expected %0d", vout_uv[0], v));
    end
    while (dut.u_fpga.u_wr.busy || dut.u_fpga.u_buf.rd_valid) @(posedge clk);

    // ---- program 2: 10 MHz, continued clock, across the segment boundary
    clk_mode = 2'b11;
    q.delete(); c.delete();
    c.push_back(mk(OP_START_SEQ, 0));
    c.push_back(mk(OP_SET_RATE, 5));
    c.push_back(mk(2, 8200));
    c.push_back(mk(OP_END_SEQ, 0));
    add_cmd_pkg(q, c);
    for (int k = 0; k < 24; k++) begin outq[k].delete(); latch_t[k].delete(); latch_v[k].delete(); end
    send(q);
    wait_done();
    e.delete(); exp_seq(e, 0, 2, 8200);
    chk(ends_with(0, e), "channel 0, 8200 words across segments 2 and 3");
    e.delete(); exp_seq(e, 6, 2, 30);
    chk(contains(6, e), "channel 6 sequence");
    chk(latch_t[0].size() > 100 && latch_t[0][100] - latch_t[0][99] == 100.0, "10 MHz DAC clock period");

    // ---- program 3: external clock, stopped clock
    clk_mode = 2'b00;
    q.delete(); c.delete();
    c.push_back(mk(OP_START_SEQ, 0));
    c.push_back(mk(OP_EXT_CLK, 1));
    c.push_back(mk(5, 20));
    c.push_back(mk(OP_END_SEQ, 0));
    add_cmd_pkg(q, c);
    for (int k = 0; k < 24; k++) begin outq[k].delete(); latch_t[k].delete(); latch_v[k].delete(); end
    d0 = n_done;
    send(q);
    repeat (40) @(posedge clk);
    fork
      while (n_done == d0) begin
        repeat (6) @(posedge clk); ttl_in = 1;
        repeat (6) @(posedge clk); ttl_in = 0;
      end
    join
    repeat (6) begin
      repeat (6) @(posedge clk); ttl_in = 1;
      repeat (6) @(posedge clk); ttl_in = 0;
    end
    e.delete(); exp_seq(e, 23, 5, 20);
    chk(ends_with(23, e), "channel 23, external clock");
    e.delete(); exp_seq(e, 0, 5, 20);
    chk(ends_with(0, e), "channel 0, external clock");

    // ---- bad package
    u_host.push(16'h0bad);
    repeat (20) @(posedge clk);

    // ---- mechanisms
    chk(n_jobs == 5, $sformatf("write jobs %0d", n_jobs));
    chk(n_loads == 3 * 2 + 1 + 1, $sformatf("segment loads %0d", n_loads));
    chk(n_switch160 > 0, "segment switch in 160 ns never measured");
    chk(n_pause == 3 * 10, $sformatf("pause ticks %0d", n_pause));
    chk(n_repeat == 2, $sformatf("repeat jumps %0d", n_repeat));
    chk(n_wait == 3, $sformatf("waits for pulse %0d", n_wait));
    chk(n_pulse == 1, $sformatf("trigger pulses %0d", n_pulse));
    chk(n_rate == 2, $sformatf("rate changes %0d", n_rate));
    chk(n_ext > 20, $sformatf("external clock ticks %0d", n_ext));
    chk(n_flush > 0, "stopped-clock flush never happened");
    chk(n_cont > 0, "continued-clock refresh never happened");
    chk(n_cross == 1, $sformatf("segment boundary crossings %0d", n_cross));
    chk(n_full > 0, "buffer never full");
    chk(n_hold > 0, "write never held by a running program");
    chk(n_err == 1, $sformatf("header errors %0d", n_err));
    $display("mechanisms: jobs=%0d loads=%0d switch160=%0d pause=%0d repeat=%0d wait=%0d pulse=%0d rate=%0d ext=%0d flush=%0d cont=%0d cross=%0d full=%0d hold=%0d err=%0d",
             n_jobs, n_loads, n_switch160, n_pause, n_repeat, n_wait, n_pulse, n_rate, n_ext, n_flush, n_cont, n_cross, n_full, n_hold, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
