// tb_wave_buffer -- random pushes and pops against a queue model on a 16-byte
// buffer; checks order and content, that wr_ready drops exactly when 16 bytes
// are stored and never earlier, and the 2-cycle write-to-read latency.
module tb_wave_buffer;
  logic clk = 0, rst = 1;
  always #10 clk = ~clk;

  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [7:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [7:0] model [$];
  int push_pct = 60, pop_pct = 40, fulls = 0;

  wave_buffer #(.DEPTH(16)) dut (.clk, .rst, .wr_valid, .wr_data, .wr_ready,
                                 .rd_valid, .rd_data, .rd_ready);

  always @(posedge clk) if (!rst) begin
    // Stored bytes = array + output register.
    if (!wr_ready) begin
      fulls++;
      checks++;
      if (model.size() < 16) begin
        failures++;
        $display("FAIL: not ready with %0d bytes", model.size());
      end
    end
    if (rd_valid && rd_ready) begin
      checks++;
      if (model.size() == 0 || rd_data != model[0]) begin
        failures++;
        $display("FAIL: read %h", rd_data);
      end
      if (model.size() != 0) void'(model.pop_front());
    end
    if (wr_valid && wr_ready) model.push_back(wr_data);
  end

  always @(posedge clk) begin
    wr_valid <= ($urandom_range(99) < push_pct);
    wr_data  <= 8'($urandom);
    rd_ready <= ($urandom_range(99) < pop_pct);
  end

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3000) @(posedge clk);
    push_pct = 20; pop_pct = 90;
    repeat (3000) @(posedge clk);
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL: never full"); end
    // Latency: empty buffer, one write, valid two cycles later.
    push_pct = 0; pop_pct = 100;
    repeat (40) @(posedge clk);
    push_pct = 0; pop_pct = 0;
    @(posedge clk); #1;
    force wr_valid = 1'b1;
    force wr_data  = 8'h5A;
    @(posedge clk); #1;
    release wr_valid;
    release wr_data;
    checks++;
    if (rd_valid) begin failures++; $display("FAIL: too early"); end
    @(posedge clk); #1;
    checks++;
    if (!rd_valid || rd_data != 8'h5A) begin failures++; $display("FAIL: latency"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
