// tb_mawg_fpga -- the control-board FPGA fed by the USB FIFO model. A bus
// monitor plays the part of the cards' write ports (address counter per card,
// 9-bit byte lanes) and of the read side. Sends a data-package of 3 packets
// for channel 9 (card 4, DAC2) into segment 3 and checks the 12 sub-words the
// monitor's memory then holds. Sends a command-package (SetUpdateRate 4,
// internal clock, StartSegment 3:12, SendPulse 2) and checks one segment load
// of segment 3, 12 reads on consecutive ticks 4 cycles apart, a trigger pulse
// of 2 ticks (8 cycles) and the end of the program. A second data-package
// sent while the program runs must not write before the program has ended.
// Also checks that a bad start word raises err.
module tb_mawg_fpga;
  import mawg_pkg::*;
  import mawg_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic [15:0] usb_fd;
  logic usb_empty_n, usb_slrd_n, usb_sloe_n, ttl_in, ttl_out, running, done, err;
  logic [1:0] usb_fifoadr, clk_mode;
  bp_bus_t bp;
  int checks = 0, failures = 0;
  logic [35:0] mem [16][logic [16:0]];
  logic [16:0] wptr [16];
  int loads = 0, reads = 0, last_read = -1, pulse_cyc = 0, cyc = 0, dones = 0, errs = 0, wr_while_run = 0;

  usb_host_model #(.GAP_PCT(10)) u_host (.clk, .fd(usb_fd), .empty_n(usb_empty_n), .slrd_n(usb_slrd_n));
  mawg_fpga dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst) begin
    cyc <= cyc + 1;
    if (bp.ctrl.wr_load) wptr[bp.addr[7:4]] = {bp.addr[3:0], 13'h0};
    if (bp.ctrl.wr_stb) begin
      automatic logic [3:0] c = bp.addr[7:4];
      automatic logic [35:0] w = mem[c].exists(wptr[c]) ? mem[c][wptr[c]] : 36'h0;
      w[9*bp.ctrl.wr_lane +: 9] = {bp.ctrl.wr_bit8, bp.data};
      mem[c][wptr[c]] = w;
      if (bp.ctrl.wr_lane[0]) wptr[c]++;
      if (running) wr_while_run++;
    end
    if (bp.ctrl.tick && bp.ctrl.rd_load) begin
      loads++;
      chk(bp.addr[3:0] == 4'd3, "load segment");
    end
    if (bp.ctrl.tick && bp.ctrl.rd_en) begin
      if (last_read >= 0) chk(cyc - last_read == 4, $sformatf("read spacing %0d", cyc - last_read));
      last_read = cyc;
      reads++;
    end
    if (ttl_out) pulse_cyc++;
    if (done) dones++;
    if (err) errs++;
  end

  initial begin
    word_q_t q;
    logic [17:0] subs [$], subs2 [$];
    cmd_t c [$];
    ttl_in = 0; clk_mode = 2'b00;
    for (int i = 0; i < 12; i++) subs.push_back(18'($urandom));
    for (int i = 0; i < 4; i++) subs2.push_back(18'($urandom));
    add_data_pkg(q, 9, 3, subs);
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (q[i]) u_host.push(q[i]);
    while (u_host.pending() != 0) @(posedge clk);
    wait (!dut.wr_busy);
    repeat (10) @(posedge clk);
    for (int i = 0; i < 12; i++) begin
      automatic logic [16:0] a = 17'(3 * 8192 + i);
      chk(mem[4].exists(a) && mem[4][a][35:18] == subs[i], $sformatf("memory word %0d", i));
    end
    q.delete();
    c.push_back(mk(OP_START_SEQ, 0));
    c.push_back(mk(OP_SET_RATE, 4));
    c.push_back(mk(OP_EXT_CLK, 0));
    c.push_back(mk(3, 12));
    c.push_back(mk(OP_SEND_PULSE, 2));
    c.push_back(mk(OP_END_SEQ, 0));
    add_cmd_pkg(q, c);
    add_data_pkg(q, 2, 0, subs2);
    foreach (q[i]) u_host.push(q[i]);
    wait (dones == 1);
    wait (!dut.wr_busy);
    repeat (20) @(posedge clk);
    chk(loads == 1, $sformatf("loads %0d", loads));
    chk(reads == 12, $sformatf("reads %0d", reads));
    chk(pulse_cyc == 8, $sformatf("pulse cycles %0d", pulse_cyc));
    chk(wr_while_run == 0, "wrote while the sequencer ran");
    for (int i = 0; i < 4; i++)
      chk(mem[1].exists(17'(i)) && mem[1][17'(i)][17:0] == subs2[i], $sformatf("second package word %0d", i));
    chk(errs == 0, "unexpected err");
    u_host.push(16'h0bad);
    repeat (20) @(posedge clk);
    chk(errs == 1, "err on bad start word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
