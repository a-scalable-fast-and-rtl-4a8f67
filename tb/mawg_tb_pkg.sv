// mawg_tb_pkg -- helpers shared by the testbenches: building the 16-bit word
// streams of data- and command-packages, and the sub-word layout.
//
// A data-package is DATA_HDR, number of 9-byte packets, channel, segment, the
// bytes two per word (high byte first, odd last byte padded with 0), END_HDR.
// Four 18-bit sub-words make one 9-byte packet, first sub-word in the top
// bits. A command-package is CMD_HDR, a reserved word, the number of commands,
// each command as {opcode, arg[23:16]} and arg[15:0], END_HDR.
package mawg_tb_pkg;
  import mawg_pkg::*;

  typedef logic [15:0] word_q_t [$];

  function automatic void add_data_pkg(ref word_q_t q, input int ch, input int seg,
                                       input logic [17:0] subs [$]);
    logic [7:0] bytes [$];
    int np = (subs.size() + 3) / 4;
    for (int p = 0; p < np; p++) begin
      logic [71:0] pkt = '0;
      for (int k = 0; k < 4; k++)
        pkt[71-18*k -: 18] = (4*p+k < subs.size()) ? subs[4*p+k] : 18'h0;
      for (int b = 0; b < 9; b++) bytes.push_back(pkt[71-8*b -: 8]);
    end
    q.push_back(DATA_HDR);
    q.push_back(16'(np));
    q.push_back(16'(ch));
    q.push_back(16'(seg));
    for (int i = 0; i < bytes.size(); i += 2)
      q.push_back({bytes[i], (i+1 < bytes.size()) ? bytes[i+1] : 8'h00});
    q.push_back(END_HDR);
  endfunction

  function automatic cmd_t mk(input int op, input int arg);
    cmd_t c;
    c.op  = 8'(op);
    c.arg = 24'(arg);
    return c;
  endfunction

  function automatic cmd_t mk_repeat(input int idx, input int n);
    return mk(OP_REPEAT, (idx << 16) | n);
  endfunction

  function automatic void add_cmd_pkg(ref word_q_t q, input cmd_t cmds [$]);
    q.push_back(CMD_HDR);
    q.push_back(16'h0000);
    q.push_back(16'(cmds.size()));
    foreach (cmds[i]) begin
      q.push_back({cmds[i].op, cmds[i].arg[23:16]});
      q.push_back(cmds[i].arg[15:0]);
    end
    q.push_back(END_HDR);
  endfunction

  // Sub-word {bit17, MS byte, bit8, LS byte} to the 16-bit DAC code.
  function automatic logic [15:0] code_of(input logic [17:0] s);
    return {s[16:9], s[7:0]};
  endfunction
endpackage
