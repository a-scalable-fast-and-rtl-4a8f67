// tb_fig9_waveforms -- the four kinds of demonstration waveform of the
// generator, played on the full-size generator and checked as output
// voltages.
//
// Channel 0 (card 0, first DAC) gets four waveforms, one per segment:
//   segment 0  an abrupt step from the lowest to the highest code (50 + 50 words);
//   segment 1  a staircase of 64 small steps of 2 codes (about 0.6 mV each);
//   segment 2  a Bessel function J0(x), x = 0..20, 400 words around mid-scale;
//   segment 3  a triangle, 256 words up and 256 down in steps of 256 codes.
// The program sets the update rate to 50 MHz / 4 = 12.5 MHz, so every word
// dwells 80 ns, and plays the four segments back to back.
// The testbench samples the modelled output voltage every system cycle and
// keeps each change with its time. It works out the expected voltage of every
// word independently of the models (v = 10 x 50 Ohm x (2 Ip - Ifs), with
// Ip = 20 mA x code / 65535 in nA, truncated to µV), merges equal
// neighbours and checks:
//   * the voltage sequence appears in order;
//   * each level lasts 80 ns per word, and the last level of a segment lasts
//     3 update periods longer (the 4-period segment switch); the first level
//     is left out, as it may equal the output before the run;
//   * the step spans -10 V to +10 V in one update;
//   * the triangle's steps are equal to within 1 µV (linearity of the path).
// The waveform kinds and the 80 ns dwell time are those of the original
// demonstration; the shapes' sizes and the channel are own choice.
module tb_fig9_waveforms;
  import mawg_pkg::*;
  import mawg_tb_pkg::*;
  localparam int N0 = 100, N1 = 64, N2 = 400, N3 = 512;
  localparam realtime T_WORD = 80.0;     // ns, 12.5 MHz update rate
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

  usb_host_model #(.GAP_PCT(10)) u_host (.clk, .fd(usb_fd), .empty_n(usb_empty_n), .slrd_n(usb_slrd_n));
  mawg_top dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // J0(x) by its power series; enough terms for x <= 20 in double precision.
  function automatic real bessel_j0(real x);
    real term = 1.0, sum = 1.0;
    for (int k = 1; k < 60; k++) begin
      term = -term * (x / 2.0) * (x / 2.0) / (real'(k) * real'(k));
      sum += term;
    end
    return sum;
  endfunction

  function automatic logic [15:0] word_code(int seg, int i);
    case (seg)
      0:       return (i < N0 / 2) ? 16'h0000 : 16'hFFFF;
      1:       return 16'(32768 + 2 * i);
      2:       return 16'(32768 + int'(30000.0 * bessel_j0(20.0 * real'(i) / real'(N2))));
      default: return (i < N3 / 2) ? 16'(256 * i) : 16'(256 * (N3 - 1 - i));
    endcase
  endfunction

  function automatic int volts_uv(logic [15:0] c);
    automatic longint ip = longint'(20000000) * longint'(c) / 65535;
    return int'(500 * (2 * ip - 20000000) / 1000);
  endfunction

  // Every change of the output voltage of channel 0, with its time.
  int      rec_v [$];
  realtime rec_t [$];
  always @(posedge clk)
    if (rec_v.size() == 0 || rec_v[$] != vout_uv[0]) begin
      rec_v.push_back(vout_uv[0]);
      rec_t.push_back($realtime);
    end

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  task automatic send(word_q_t q);
    foreach (q[i]) u_host.push(q[i]);
    while (u_host.pending() != 0) @(posedge clk);
  endtask

  function automatic int seg_len(int seg);
    return (seg == 0) ? N0 : (seg == 1) ? N1 : (seg == 2) ? N2 : N3;
  endfunction

  initial begin
    word_q_t q;
    cmd_t c [$];
    logic [17:0] s [$];
    // expected levels: value, number of words, last level of its segment
    int      ev [$];
    int      en [$];
    bit      elast [$];
    int      start, bad_t, bad_v;
    clk_mode = 2'b00; voff_uv = 0; ttl_in = 0;
    repeat (5) @(posedge clk);
    rst = 0;

    for (int seg = 0; seg < 4; seg++) begin
      s.delete();
      for (int i = 0; i < seg_len(seg); i++) begin
        automatic logic [15:0] v = word_code(seg, i);
        s.push_back({1'b0, v[15:8], 1'b0, v[7:0]});
        if (ev.size() > 0 && ev[$] == volts_uv(v) && !elast[$]) en[$]++;
        else begin ev.push_back(volts_uv(v)); en.push_back(1); elast.push_back(0); end
      end
      elast[$] = 1;
      add_data_pkg(q, 0, seg, s);
    end
    send(q);
    while (dut.u_fpga.u_wr.busy || dut.u_fpga.u_buf.rd_valid) @(posedge clk);

    q.delete();
    c.push_back(mk(OP_START_SEQ, 0));
    c.push_back(mk(OP_SET_RATE, 4));
    c.push_back(mk(OP_EXT_CLK, 0));
    for (int seg = 0; seg < 4; seg++) c.push_back(mk(seg, seg_len(seg)));
    c.push_back(mk(OP_END_SEQ, 0));
    add_cmd_pkg(q, c);
    rec_v.delete(); rec_t.delete();
    send(q);
    while (n_done == 0) @(posedge clk);
    repeat (100) @(posedge clk);

    // Find the expected level sequence in the recorded one.
    start = -1;
    for (int k = 0; k + ev.size() <= rec_v.size() && start < 0; k++) begin
      automatic bit ok = 1;
      foreach (ev[j]) if (rec_v[k+j] != ev[j]) begin ok = 0; break; end
      if (ok) start = k;
    end
    chk(start >= 0, $sformatf("voltage sequence of %0d levels not found in %0d changes", ev.size(), rec_v.size()));
    if (start >= 0) begin
      bad_t = 0;
      // level 0 may equal the output before the run, so its start is not seen
      for (int j = 1; j + 1 < ev.size(); j++) begin
        automatic realtime d = rec_t[start+j+1] - rec_t[start+j];
        automatic realtime e = T_WORD * (en[j] + (elast[j] ? 3 : 0));
        if (d != e) begin
          if (bad_t < 5) $display("level %0d (%0d uV): %0.1f ns, expected %0.1f", j, ev[j], d, e);
          bad_t++;
        end
      end
      chk(bad_t == 0, $sformatf("%0d levels with a wrong dwell time", bad_t));
      chk(rec_v[start] == -10000000 && rec_v[start+1] == 10000000, "step from -10 V to +10 V");
      // triangle: the last N3 - 1 levels (the apex holds for 2 words)
      bad_v = 0;
      begin
        automatic int t0 = start + ev.size() - (N3 - 1);
        automatic int step = rec_v[t0+1] - rec_v[t0];
        for (int j = t0; j + 1 < start + ev.size(); j++) begin
          automatic int d = rec_v[j+1] - rec_v[j];
          if ((d > 0 ? d - step : -d - step) > 1 || (d > 0 ? step - d : step + d) > 1) bad_v++;
        end
        chk(step > 78000 && step < 78300, $sformatf("triangle step %0d uV", step));
      end
      chk(bad_v == 0, $sformatf("%0d triangle steps differ by more than 1 uV", bad_v));
    end
    $display("%0d levels checked, %0d voltage changes recorded", ev.size(), rec_v.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
