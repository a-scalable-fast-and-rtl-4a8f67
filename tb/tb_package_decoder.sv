// tb_package_decoder -- sends a data-package of 2 packets (18 bytes), one of
// 1 packet (9 bytes, odd: padded last byte), a garbage word, a command-package
// of 4 commands and a data-package with a wrong end header. Checks the write
// jobs (channel, segment, packet count), every data byte in order, every
// command, and that err pulses exactly for the garbage word and the bad end
// header. The byte sink stalls at random.
module tb_package_decoder;
  import mawg_pkg::*;
  import mawg_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic in_valid, in_ready, job_valid, job_ready, byte_valid, byte_ready, cmd_valid, err;
  logic [15:0] in_word;
  wr_job_t job;
  logic [7:0] byte_data;
  cmd_t cmd;
  int checks = 0, failures = 0, errs = 0;
  word_q_t words;
  logic [7:0] exp_bytes [$];
  wr_job_t exp_jobs [$];
  cmd_t exp_cmds [$];

  package_decoder dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    byte_ready <= ($urandom_range(99) < 70);
    job_ready  <= ($urandom_range(99) < 3);    // slow taker: a job waits while the next package is parsed
  end

  always @(posedge clk) if (!rst) begin
    if (byte_valid && byte_ready) begin
      chk(exp_bytes.size() != 0 && byte_data == exp_bytes[0], $sformatf("byte %h", byte_data));
      if (exp_bytes.size() != 0) void'(exp_bytes.pop_front());
    end
    if (job_valid && job_ready) begin
      chk(exp_jobs.size() != 0 && job == exp_jobs[0], "job");
      if (exp_jobs.size() != 0) void'(exp_jobs.pop_front());
    end
    if (cmd_valid) begin
      chk(exp_cmds.size() != 0 && cmd == exp_cmds[0], $sformatf("cmd %h", cmd));
      if (exp_cmds.size() != 0) void'(exp_cmds.pop_front());
    end
    if (err) errs++;
  end

  // Word source.
  int wi = 0;
  assign in_valid = (wi < words.size());
  assign in_word  = in_valid ? words[wi] : 16'h0;
  always @(posedge clk) if (!rst && in_valid && in_ready) wi <= wi + 1;

  function automatic void add_job(int ch, int seg, logic [17:0] subs [$]);
    wr_job_t j;
    int np = (subs.size() + 3) / 4;
    j.channel = 5'(ch); j.segment = 4'(seg); j.npackets = 16'(np);
    exp_jobs.push_back(j);
    for (int p = 0; p < np; p++) begin
      logic [71:0] pkt;
      for (int k = 0; k < 4; k++) pkt[71-18*k -: 18] = (4*p+k < subs.size()) ? subs[4*p+k] : 18'h0;
      for (int b = 0; b < 9; b++) exp_bytes.push_back(pkt[71-8*b -: 8]);
    end
  endfunction

  initial begin
    logic [17:0] s1 [$], s2 [$];
    cmd_t c [$];
    for (int i = 0; i < 8; i++) s1.push_back(18'($urandom));
    for (int i = 0; i < 4; i++) s2.push_back(18'($urandom));
    add_data_pkg(words, 7, 3, s1);  add_job(7, 3, s1);
    add_data_pkg(words, 22, 15, s2); add_job(22, 15, s2);
    words.push_back(16'h1234);      // garbage: err
    c.push_back(mk(OP_START_SEQ, 0));
    c.push_back(mk(OP_SET_RATE, 2));
    c.push_back(mk(2, 7250));
    c.push_back(mk_repeat(0, 11));
    add_cmd_pkg(words, c);
    foreach (c[i]) exp_cmds.push_back(c[i]);
    add_data_pkg(words, 1, 0, s2);  add_job(1, 0, s2);
    words[words.size()-1] = 16'hBEEF; // bad end header: err
    repeat (3) @(posedge clk);
    rst = 0;
    wait (wi == words.size());
    repeat (50) @(posedge clk);
    chk(exp_bytes.size() == 0, "bytes left over");
    chk(exp_jobs.size() == 0, "jobs left over");
    chk(exp_cmds.size() == 0, "commands left over");
    chk(errs == 2, $sformatf("err pulses %0d", errs));
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
