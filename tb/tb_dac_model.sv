// tb_dac_model -- clocks the DAC model with a free-running 80 ns clock and a
// new random code before every rising edge; checks that code_out changes
// only on falling edges and equals the code latched 3.5 clock periods before
// (the code of the 4th rising edge back), and the two currents. Then stops the
// clock and checks that the output holds.
module tb_dac_model;
  logic clk = 0;
  logic [15:0] d, code_out;
  logic signed [31:0] ioutp_na, ioutn_na;
  logic [15:0] hist [$];
  int checks = 0, failures = 0;

  dac_model dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic [15:0] prev_code;
    d = 0;
    for (int i = 0; i < 100; i++) begin
      d = (i == 10) ? 16'hFFFF : (i == 11) ? 16'h0000 : 16'($urandom);
      #20 clk = 1;                   // rising edge: latch d
      hist.push_front(d);
      prev_code = code_out;
      #20;
      chk(code_out == prev_code, "output changed on a rising edge");
      clk = 0;                       // falling edge
      #1;
      if (i >= 3) begin
        automatic longint ep = longint'(20000000) * hist[3] / 65535;
        chk(code_out == hist[3], $sformatf("edge %0d: %h vs %h", i, code_out, hist[3]));
        chk(ioutp_na == 32'(ep) && ioutn_na == 20000000 - 32'(ep), $sformatf("currents %0d %0d for %h, expected %0d", ioutp_na, ioutn_na, code_out, ep));
      end
      #19;
    end
    // Stopped clock: hold.
    prev_code = code_out;
    d = ~d;
    #1000;
    chk(code_out == prev_code, "no hold without clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
