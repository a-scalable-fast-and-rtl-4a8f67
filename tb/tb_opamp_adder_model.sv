// tb_opamp_adder_model -- drives complementary current pairs for full-scale
// codes, mid-scale and random codes, with and without a DC offset, and checks
// vout = 10 * 50 Ohm * (ioutp - ioutn) + offset, clipped to +-10 V, with the
// currents in nA and the voltage in µV (the nV product truncated to µV).
module tb_opamp_adder_model;
  logic signed [31:0] ioutp_na, ioutn_na, voff_uv, vout_uv;
  int checks = 0, failures = 0;

  opamp_adder_model dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic try(int ip, int off, int expect_uv);
    ioutp_na = ip; ioutn_na = 20000000 - ip; voff_uv = off;
    #1;
    chk(vout_uv == expect_uv, $sformatf("ip=%0d off=%0d: %0d uV, expected %0d", ip, off, vout_uv, expect_uv));
  endtask

  initial begin
    try(20000000, 0, 10000000);     // +10 V
    try(0, 0, -10000000);        // -10 V
    try(10000000, 0, 0);
    try(10000001, 0, 1);         // 2 nA difference = 1 µV
    try(9999999, 0, -1);
    try(10000000, 3500000, 3500000);
    try(15000000, -3500000, 1500000);
    try(20000000, 2000000, 10000000);   // clipped
    try(0, -2000000, -10000000);     // clipped
    for (int i = 0; i < 50; i++) begin
      automatic int ip = $urandom_range(20000000);
      automatic int off = int'($urandom_range(7000000)) - 3500000;
      automatic longint v = 500 * longint'(2 * ip - 20000000) / 1000 + off;
      if (v > 10000000) v = 10000000;
      if (v < -10000000) v = -10000000;
      try(ip, off, int'(v));
    end
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
