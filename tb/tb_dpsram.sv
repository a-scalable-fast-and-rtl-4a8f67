// tb_dpsram -- on a 256-word copy (8 address bits): loads port A with
// address 32 and writes 40 words lane by lane, some lanes left out, counting
// the address up; reads the words back through port B from address 32 and
// checks every word against a model that honours the byte enables; checks
// that port B holds its output without count-enable, that its address
// counter runs on past 32-word boundaries and stops at the last address, and
// that nothing happens without the port's clock enable.
module tb_dpsram;
  localparam int DEPTH = 256, AW = 8, DW = 36;
  logic clk = 0;
  always #10 clk = ~clk;

  logic a_ce, a_ads, a_cnten, a_we, b_ce, b_ads, b_cnten;
  logic [AW-1:0] a_addr, b_addr;
  logic [3:0] a_be;
  logic [DW-1:0] a_din, b_dout;
  logic [DW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  dpsram #(.DEPTH(DEPTH), .AW(AW), .DW(DW)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cyc();
    @(posedge clk); #1;
  endtask

  task automatic a_idle();
    a_ce = 0; a_ads = 0; a_cnten = 0; a_we = 0; a_be = 0; a_din = '0;
  endtask
  task automatic b_idle();
    b_ce = 0; b_ads = 0; b_cnten = 0;
  endtask

  initial begin
    a_idle(); b_idle(); a_addr = '0; b_addr = '0;
    // Clear the whole memory through port A.
    a_ce = 1; a_ads = 1; a_addr = 0; cyc();
    a_ads = 0; a_we = 1; a_be = 4'hF; a_cnten = 1; a_din = '0;
    repeat (DEPTH) cyc();
    foreach (model[i]) model[i] = '0;
    a_idle();
    // Write 40 words from address 32 with random lane enables.
    a_ce = 1; a_ads = 1; a_addr = 32; cyc();
    a_ads = 0;
    for (int i = 0; i < 40; i++) begin
      automatic logic [DW-1:0] v = {$urandom, $urandom};
      automatic logic [3:0] be = 4'($urandom);
      a_we = 1; a_be = be; a_din = v; a_cnten = 1;
      for (int k = 0; k < 4; k++) if (be[k]) model[32+i][9*k +: 9] = v[9*k +: 9];
      cyc();
    end
    // Write with a_ce low: ignored.
    a_ce = 0; a_din = '1; a_be = 4'hF; cyc(); cyc();
    a_idle();
    // Read back.
    b_ce = 1; b_ads = 1; b_addr = 32; cyc();
    b_ads = 0; b_cnten = 1;
    for (int i = 0; i < 42; i++) begin
      cyc();
      chk(b_dout == model[32+i], $sformatf("word %0d: %h vs %h", 32+i, b_dout, model[32+i]));
    end
    b_cnten = 0;
    repeat (3) begin
      cyc();
      chk(b_dout == model[73], "port B did not hold its output");
    end
    // Counter runs to the end and stops there.
    model[DEPTH-1] = 36'h123456789;
    a_ce = 1; a_ads = 1; a_addr = AW'(DEPTH-1); cyc();
    a_ads = 0; a_we = 1; a_be = 4'hF; a_din = 36'h123456789; cyc();
    a_idle();
    b_ads = 1; b_addr = AW'(DEPTH-3); cyc();
    b_ads = 0; b_cnten = 1;
    cyc(); chk(b_dout == model[DEPTH-3], "end-2");
    cyc(); chk(b_dout == model[DEPTH-2], "end-1");
    repeat (3) begin cyc(); chk(b_dout == 36'h123456789, "counter passed the end"); end
    // No clock enable: no read.
    b_ads = 1; b_addr = 32; cyc();
    b_ads = 0; b_ce = 0; b_cnten = 1; cyc(); cyc();
    chk(b_dout == 36'h123456789, "read without b_ce");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
