// tb_usb_fifo_reader -- feeds 500 random words through the FIFO reader with
// random FIFO gaps and random consumer stalls; checks that every word arrives
// once, in order, that nothing is popped from an empty FIFO and that the
// reader moves one word per cycle when nothing stalls.
module tb_usb_fifo_reader;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic [15:0] fd;
  logic empty_n, slrd_n, sloe_n, out_valid, out_ready;
  logic [1:0] fifoadr;
  logic [15:0] out_word;
  int checks = 0, failures = 0;
  logic [15:0] sent [$];
  int got = 0, stall_pct = 30;

  usb_host_model #(.GAP_PCT(25)) u_host (.clk, .fd, .empty_n, .slrd_n);
  usb_fifo_reader dut (.clk, .rst, .usb_fd(fd), .usb_empty_n(empty_n), .usb_slrd_n(slrd_n),
                       .usb_sloe_n(sloe_n), .usb_fifoadr(fifoadr),
                       .out_valid, .out_word, .out_ready);

  always @(posedge clk) out_ready <= ($urandom_range(99) >= stall_pct);

  always @(posedge clk) if (!rst) begin
    if (!slrd_n && !empty_n) begin
      failures++;
      $display("FAIL: pop from empty FIFO");
    end
    if (out_valid && out_ready) begin
      checks++;
      if (sent.size() == 0 || out_word != sent[0]) begin
        failures++;
        $display("FAIL: word %0d got %h", got, out_word);
      end
      if (sent.size() != 0) void'(sent.pop_front());
      got++;
    end
  end

  initial begin
    int t0;
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 500; i++) begin
      automatic logic [15:0] w = 16'($urandom);
      sent.push_back(w);
      u_host.push(w);
    end
    wait (got == 500);
    // Throughput: no gaps, no stalls -> one word per cycle.
    stall_pct = 0;
    @(posedge clk);
    for (int i = 0; i < 100; i++) begin
      sent.push_back(16'(i));
    end
    force u_host.gap = 1'b0;
    t0 = got;
    foreach (sent[i]) u_host.push(sent[i]);
    repeat (103) @(posedge clk);
    checks++;
    if (got - t0 < 100) begin
      failures++;
      $display("FAIL: throughput %0d words in 103 cycles", got - t0);
    end
    checks++;
    if (sloe_n !== 1'b0 || fifoadr !== 2'd0) failures++;
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
