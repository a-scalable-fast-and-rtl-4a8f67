// tb_update_clock_gen -- counts the system cycles between ticks for divisors
// 2, 5 and 0 (taken as 2), then switches to the external clock and drives the
// TTL input with a 14-cycle period: checks one tick and one trig per rising
// edge, 3 cycles after the edge, and no internal ticks in external mode.
module tb_update_clock_gen;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic [15:0] div;
  logic ext_sel, ttl_in, tick, trig;
  int checks = 0, failures = 0;
  int cyc = 0, last_tick = -1, last_edge = -1;

  update_clock_gen dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  task automatic measure(int expect_period, int n);
    int prev = -1, got = 0;
    while (got < n) begin
      @(posedge clk); #1;
      if (tick) begin
        if (prev >= 0) chk(cyc - prev == expect_period, $sformatf("period %0d, expected %0d", cyc - prev, expect_period));
        prev = cyc;
        got++;
      end
    end
  endtask

  initial begin
    int ticks, trigs;
    div = 2; ext_sel = 0; ttl_in = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    measure(2, 20);
    div = 5;
    repeat (10) @(posedge clk);
    measure(5, 20);
    div = 0;
    repeat (10) @(posedge clk);
    measure(2, 10);
    // External clock.
    ext_sel = 1;
    repeat (10) @(posedge clk);
    ticks = 0; trigs = 0;
    for (int e = 0; e < 20; e++) begin
      int t_edge;
      #1 ttl_in = 1;
      t_edge = cyc;
      for (int c = 0; c < 7; c++) begin
        @(posedge clk); #1;
        if (tick) begin ticks++; chk(cyc - t_edge == 3, $sformatf("ext latency %0d", cyc - t_edge)); end
        if (trig) trigs++;
      end
      ttl_in = 0;
      for (int c = 0; c < 7; c++) begin
        @(posedge clk); #1;
        if (tick) begin ticks++; chk(0, "tick on falling side"); end
        if (trig) trigs++;
      end
    end
    chk(ticks == 20, $sformatf("ext ticks %0d", ticks));
    chk(trigs == 20, $sformatf("trigs %0d", trigs));
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
