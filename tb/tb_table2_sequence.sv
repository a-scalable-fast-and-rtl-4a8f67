// tb_table2_sequence -- the example command sequence of the generator's
// command table, played at full length on the full-size generator.
//
// The program is: StartSequencer, SetUpdateRate 2 (25 MHz), ExtCLK 0
// (internal clock), then at index 0 WaitForPulse, 1 StartSegment 02:7250,
// 2 Pause 255, 3 StartSegment 05:10500, 4 Repeat 0:11, 5 SendPulse 170, and
// EndSequencer. Channel 5 (card 2, second DAC) is first loaded through the
// USB FIFO model with 7250 words in segment 2 and 10500 words in segment 5;
// the second waveform is longer than a segment (8192 words) and runs on into
// segment 6. Every word of a pass is unique. The channel position runs in
// stopped-clock mode; the testbench answers every WaitForPulse with a TTL
// pulse.
// Checks: the 12 passes (the block plus 11 repeats) put all 12 x 17750 words
// on the DAC in order, one per 40 ns update period; from the last word of
// segment 2 to the first of segment 5 there are 261 periods (FETCH and DECODE
// of the Pause, 255 pause periods, then the 4-period segment switch); 12 waits
// are answered; one trigger pulse of 170 periods (6.8 us) follows. In
// stopped-clock mode the card also sends flush clocks whenever the word
// stream stops; they repeat the word already on the DAC, so a DAC clock that
// latches the same word again is not counted as a new word.
// Reports the write time of the two data-packages.
// The program and the 25 MHz rate are the paper's example; the channel
// number, the codes and the meaning of the repeat count (11 jumps back) are
// own choice.
module tb_table2_sequence;
  import mawg_pkg::*;
  import mawg_tb_pkg::*;
  localparam int CH = 5, N2 = 7250, N5 = 10500;
  localparam int PASSES = 12, PAUSE = 255, PULSE = 170;
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

  usb_host_model #(.GAP_PCT(0)) u_host (.clk, .fd(usb_fd), .empty_n(usb_empty_n), .slrd_n(usb_slrd_n));
  mawg_top dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [15:0] code(int seg, int i);
    return 16'(((seg == 5) ? 32'h8000 : 32'h0) + i);
  endfunction

  // Value and time of every DAC clock rising edge of the channel.
  realtime     latch_t [$];
  logic [15:0] latch_v [$];
  int n_flush = 0;
  always @(posedge dac_clk[CH]) begin
    automatic logic [15:0] v = dut.g_card[CH/2].u_card.dac_in[CH%2];
    if (latch_v.size() == 0 || latch_v[$] != v) begin
      latch_t.push_back($realtime);
      latch_v.push_back(v);
    end else n_flush++;
  end

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  // Answer WaitForPulse with a TTL pulse; count the waits answered.
  int n_wait = 0;
  initial begin
    ttl_in = 0;
    forever begin
      @(posedge clk);
      if (dut.u_fpga.u_seq.st == dut.u_fpga.u_seq.Q_WAIT) begin
        n_wait++;
        repeat (20) @(posedge clk);
        ttl_in = 1;
        repeat (5) @(posedge clk);
        ttl_in = 0;
        repeat (10) @(posedge clk);
      end
    end
  end

  // Trigger output pulses and the length of the last one.
  int n_pulse = 0;
  realtime pulse_ns = 0, t_rise = 0;
  always @(posedge ttl_out) begin n_pulse++; t_rise = $realtime; end
  always @(negedge ttl_out) pulse_ns = $realtime - t_rise;

  task automatic send(word_q_t q);
    foreach (q[i]) u_host.push(q[i]);
    while (u_host.pending() != 0) @(posedge clk);
  endtask

  function automatic void data_pkg(ref word_q_t q, input int seg, input int n);
    logic [17:0] s [$];
    for (int i = 0; i < n; i++) begin
      logic [15:0] v = code(seg, i);
      s.push_back({1'b0, v[15:8], 1'b0, v[7:0]});
    end
    add_data_pkg(q, CH, seg, s);
  endfunction

  initial begin
    word_q_t q;
    cmd_t c [$];
    longint t0_cyc, wr_cyc;
    int bad_order, bad_step, bad_switch, n;
    clk_mode = 2'b00; voff_uv = 0;
    repeat (5) @(posedge clk);
    rst = 0;

    // ---- write the two waveforms
    data_pkg(q, 2, N2);
    data_pkg(q, 5, N5);
    t0_cyc = longint'($time / 20);
    send(q);
    while (dut.u_fpga.u_wr.busy || dut.u_fpga.u_buf.rd_valid) @(posedge clk);
    wr_cyc = longint'($time / 20) - t0_cyc;
    $display("write of %0d sub-words (%0d USB words): %0d cycles = %0.3f ms at 50 MHz",
             N2 + N5, q.size(), wr_cyc, real'(wr_cyc) * 20.0e-6);
    // The writer needs about 17 cycles per 9-byte packet of 4 sub-words
    // (9 to gather, 8 byte-lane writes).
    chk(wr_cyc < 18 * ((N2 + 3) / 4 + (N5 + 3) / 4), $sformatf("write too slow: %0d cycles", wr_cyc));

    // ---- the command table's example sequence
    q.delete();
    c.push_back(mk(OP_START_SEQ, 0));
    c.push_back(mk(OP_SET_RATE, 2));
    c.push_back(mk(OP_EXT_CLK, 0));
    c.push_back(mk(OP_WAIT_PULSE, 0));
    c.push_back(mk(2, N2));
    c.push_back(mk(OP_PAUSE, PAUSE));
    c.push_back(mk(5, N5));
    c.push_back(mk_repeat(0, PASSES - 1));
    c.push_back(mk(OP_SEND_PULSE, PULSE));
    c.push_back(mk(OP_END_SEQ, 0));
    add_cmd_pkg(q, c);
    latch_t.delete(); latch_v.delete(); n_flush = 0;
    send(q);
    while (n_done == 0) @(posedge clk);
    repeat (40) @(posedge clk);

    // ---- every word, in order, one per update period
    n = PASSES * (N2 + N5);
    chk(latch_v.size() == n, $sformatf("%0d new words on the DAC, expected %0d", latch_v.size(), n));
    bad_order = 0; bad_step = 0; bad_switch = 0;
    for (int i = 0; i < n && i < latch_v.size(); i++) begin
      automatic int j = i % (N2 + N5);
      automatic logic [15:0] e = (j < N2) ? code(2, j) : code(5, j - N2);
      if (latch_v[i] != e) begin
        if (bad_order < 5) $display("word %0d: %h, expected %h", i, latch_v[i], e);
        bad_order++;
      end
      if (j > 0) begin
        automatic realtime d = latch_t[i] - latch_t[i-1];
        if (j == N2) begin
          if (d != (2 + PAUSE + 4) * 40.0) begin
            if (bad_switch < 3) $display("pass %0d: segment 2 to 5 in %0.1f ns", i / (N2 + N5), d);
            bad_switch++;
          end
        end else if (d != 40.0) bad_step++;
      end
    end
    chk(bad_order == 0, $sformatf("%0d words out of order", bad_order));
    chk(bad_step == 0, $sformatf("%0d update periods not 40 ns", bad_step));
    chk(bad_switch == 0, $sformatf("%0d pause plus segment switch gaps wrong", bad_switch));
    chk(n_wait == PASSES, $sformatf("%0d waits for pulse", n_wait));
    chk(n_pulse == 1, $sformatf("%0d trigger pulses", n_pulse));
    chk(pulse_ns == PULSE * 40.0, $sformatf("trigger pulse %0.1f ns", pulse_ns));
    chk(n_flush > 0, "no flush clocks in stopped-clock mode");
    chk(dac_code[CH] == code(5, N5 - 1), "last word held on the DAC");
    chk(err == 0, "package error");
    $display("played %0d words in %0.1f us", n, (latch_t[$] - latch_t[0]) / 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
