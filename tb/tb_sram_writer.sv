// tb_sram_writer -- writes 3 packets to channel 5 (card 2, DAC2 lanes 2/3,
// segment 7) and 1 packet to channel 0 (card 0, lanes 0/1, segment 15),
// with bytes arriving at random. A bus monitor rebuilds what the memory would
// hold: it checks one address load per job with {card, segment}, then for
// every sub-word an LS-lane write and an MS-lane write carrying the expected
// 9-bit values, and the number of write strobes. It also checks that no job
// is taken while `hold` is high.
module tb_sram_writer;
  import mawg_pkg::*;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic job_valid, job_ready, byte_valid, byte_ready, hold, busy;
  wr_job_t job;
  logic [7:0] byte_data, wr_addr, wr_data;
  logic wr_load, wr_stb, wr_bit8;
  logic [1:0] wr_lane;
  int checks = 0, failures = 0, loads = 0, stbs = 0;
  logic [7:0] bytes [$];
  logic [8:0] exp_lane [$];    // expected 9-bit lane values in order
  logic [1:0] exp_lane_no [$];
  logic [7:0] exp_addr [$];

  sram_writer dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Byte source with random gaps.
  int bi = 0;
  logic gap;
  always @(posedge clk) gap <= ($urandom_range(99) < 30);
  assign byte_valid = (bi < bytes.size()) && !gap;
  assign byte_data  = (bi < bytes.size()) ? bytes[bi] : 8'h0;
  always @(posedge clk) if (byte_valid && byte_ready) bi <= bi + 1;

  always @(posedge clk) if (!rst) begin
    if (wr_load) begin
      loads++;
      chk(exp_addr.size() != 0 && wr_addr == exp_addr[0], $sformatf("load addr %h", wr_addr));
      if (exp_addr.size() != 0) void'(exp_addr.pop_front());
    end
    if (wr_stb) begin
      stbs++;
      chk(exp_lane.size() != 0 && {wr_bit8, wr_data} == exp_lane[0] && wr_lane == exp_lane_no[0],
          $sformatf("write lane %0d value %h", wr_lane, {wr_bit8, wr_data}));
      if (exp_lane.size() != 0) begin void'(exp_lane.pop_front()); void'(exp_lane_no.pop_front()); end
    end
    if (job_valid && job_ready) chk(!hold, "job taken during hold");
  end

  task automatic give_job(int ch, int seg, int np);
    for (int p = 0; p < np; p++) begin
      logic [71:0] pkt;
      for (int b = 0; b < 9; b++) begin
        pkt[71-8*b -: 8] = 8'($urandom);
        bytes.push_back(pkt[71-8*b -: 8]);
      end
      for (int k = 0; k < 4; k++) begin
        logic [17:0] s = pkt[71-18*k -: 18];
        exp_lane.push_back(s[8:0]);  exp_lane_no.push_back({ch[0], 1'b0});
        exp_lane.push_back(s[17:9]); exp_lane_no.push_back({ch[0], 1'b1});
      end
    end
    exp_addr.push_back({4'(ch / 2), 4'(seg)});
    job.channel = 5'(ch); job.segment = 4'(seg); job.npackets = 16'(np);
    job_valid = 1;
    do @(posedge clk); while (!job_ready);
    #1 job_valid = 0;
  endtask

  initial begin
    job_valid = 0; job = '0; hold = 1;
    repeat (3) @(posedge clk);
    rst = 0;
    job.channel = 5; job.segment = 7; job.npackets = 3;
    job_valid = 1;
    repeat (20) @(posedge clk);
    chk(loads == 0 && !busy, "started while hold");
    #1 job_valid = 0; hold = 0;
    give_job(5, 7, 3);
    give_job(0, 15, 1);
    wait (!busy && exp_lane.size() == 0);
    repeat (5) @(posedge clk);
    chk(loads == 2, $sformatf("loads %0d", loads));
    chk(stbs == 32, $sformatf("strobes %0d", stbs));
    chk(bi == 36, "bytes consumed");
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
