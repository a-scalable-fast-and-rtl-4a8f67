// cmd_sequencer -- the command sequencer (CS) of the control-board FPGA.
//
// Commands arrive from the package decoder as cmd_t strobes.
// * Configuration commands act at once: SetUpdateRate sets the clock
//   divisor, ExternalClock (argument 1/0) selects the external or internal
//   update clock.
// * StartSequencer clears the program and starts loading; every data-handling
//   command that follows is stored at the next implicit index (0, 1, ...);
//   EndSequencer closes the list and starts execution once the memory writer
//   is idle. A running program is aborted by a new StartSequencer.
// Execution advances on update-clock ticks. Every command takes a FETCH tick
// (program RAM read) and a DECODE tick, then:
//   StartSegment s:n  one LOAD tick (rd_load, segment s on rd_seg), then n READ
//                     ticks (rd_en), one memory word per tick for every channel;
//   Pause n           n ticks;
//   Repeat i:k        jumps back to index i k times, then falls through
//                     (the block runs k+1 times); one loop counter, no nesting;
//   WaitForPulse      waits for a rising edge of the TTL input (trig) seen after
//                     the command started;
//   SendPulse n       drives ttl_out high for n ticks.
// Timing: between the last READ tick of a segment and the first READ tick of
// a StartSegment that follows it there are exactly 4 ticks (FETCH, DECODE,
// LOAD, READ): the 4-cycle segment switching latency, 160 ns at 25 MHz.
// The command set, its codes and the 4-cycle switching latency follow the
// paper; the store-then-run model, the per-tick state machine, the repeat
// count meaning and the program depth are this design's own choices.
module cmd_sequencer
  import mawg_pkg::*;
#(
  parameter int unsigned PROG_DEPTH = 256,
  parameter int unsigned DIV_W      = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             cmd_valid,
  input  cmd_t             cmd,
  input  logic             tick,
  input  logic             trig,
  input  logic             wr_busy,
  output logic [DIV_W-1:0] rate_div,
  output logic             ext_sel,
  output logic             running,
  output logic             done,      // one-cycle pulse at the end of a program
  output logic             rd_load,
  output logic             rd_en,
  output logic [3:0]       rd_seg,
  output logic             ttl_out
);
  localparam int unsigned PW = $clog2(PROG_DEPTH);

  typedef enum logic [3:0] {
    Q_IDLE, Q_START, Q_FETCH, Q_DECODE, Q_LOAD, Q_READ, Q_PAUSE, Q_WAIT, Q_PULSE
  } state_e;

  cmd_t        prog [PROG_DEPTH];
  cmd_t        ir;
  logic [PW:0] wr_idx, prog_len, pc;
  state_e      st;
  logic        loading, start_pending, trig_seen;
  logic [23:0] cnt;
  logic [15:0] loop_cnt;

  assign running = (st != Q_IDLE);
  assign rd_load = (st == Q_LOAD);
  assign rd_en   = (st == Q_READ);
  assign ttl_out = (st == Q_PULSE);

  // Program store.
  always_ff @(posedge clk) begin
    if (cmd_valid && loading && cmd.op <= 8'(OP_WAIT_PULSE) && wr_idx < (PW+1)'(PROG_DEPTH))
      prog[wr_idx[PW-1:0]] <= cmd;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rate_div      <= DIV_W'(2);
      ext_sel       <= 1'b0;
      wr_idx        <= '0;
      prog_len      <= '0;
      loading       <= 1'b0;
      start_pending <= 1'b0;
      st            <= Q_IDLE;
      pc            <= '0;
      ir            <= '0;
      cnt           <= '0;
      loop_cnt      <= '0;
      rd_seg        <= '0;
      trig_seen     <= 1'b0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      if (trig) trig_seen <= 1'b1;

      // Command intake.
      if (cmd_valid) begin
        if (cmd.op == OP_SET_RATE) rate_div <= DIV_W'(cmd.arg);
        else if (cmd.op == OP_EXT_CLK) ext_sel <= cmd.arg[0];
        else if (cmd.op == OP_START_SEQ) begin
          loading       <= 1'b1;
          wr_idx        <= '0;
          start_pending <= 1'b0;
          st            <= Q_IDLE;
        end else if (cmd.op == OP_END_SEQ && loading) begin
          loading       <= 1'b0;
          prog_len      <= wr_idx;
          start_pending <= 1'b1;
        end else if (loading && cmd.op <= 8'(OP_WAIT_PULSE) && wr_idx < (PW+1)'(PROG_DEPTH)) begin
          wr_idx <= wr_idx + 1'b1;
        end
      end

      if (st == Q_IDLE && start_pending && !wr_busy && !cmd_valid) begin
        start_pending <= 1'b0;
        pc            <= '0;
        loop_cnt      <= '0;
        st            <= Q_START;
      end else if (tick && !(cmd_valid && cmd.op == OP_START_SEQ)) begin
        case (st)
          Q_START: st <= Q_FETCH;
          Q_FETCH: begin
            if (pc >= prog_len) begin
              st   <= Q_IDLE;
              done <= 1'b1;
            end else begin
              ir <= prog[pc[PW-1:0]];
              st <= Q_DECODE;
            end
          end
          Q_DECODE: begin
            trig_seen <= trig;
            cnt       <= ir.arg;
            if (is_start_segment(ir.op)) begin
              rd_seg <= ir.op[3:0];
              st     <= Q_LOAD;
            end else begin
              case (ir.op)
                OP_PAUSE:      if (ir.arg != 0) st <= Q_PAUSE; else begin pc <= pc + 1'b1; st <= Q_FETCH; end
                OP_SEND_PULSE: if (ir.arg != 0) st <= Q_PULSE; else begin pc <= pc + 1'b1; st <= Q_FETCH; end
                OP_WAIT_PULSE: st <= Q_WAIT;
                OP_REPEAT: begin
                  if (loop_cnt < ir.arg[15:0]) begin
                    loop_cnt <= loop_cnt + 1'b1;
                    pc       <= (PW+1)'(ir.arg[23:16]);
                  end else begin
                    loop_cnt <= '0;
                    pc       <= pc + 1'b1;
                  end
                  st <= Q_FETCH;
                end
                default: begin pc <= pc + 1'b1; st <= Q_FETCH; end
              endcase
            end
          end
          Q_LOAD: begin
            if (cnt == 0) begin pc <= pc + 1'b1; st <= Q_FETCH; end
            else st <= Q_READ;
          end
          Q_READ, Q_PAUSE, Q_PULSE: begin
            cnt <= cnt - 1'b1;
            if (cnt == 24'd1) begin
              pc <= pc + 1'b1;
              st <= Q_FETCH;
            end
          end
          Q_WAIT: if (trig_seen) begin
            pc <= pc + 1'b1;
            st <= Q_FETCH;
          end
          default: st <= Q_IDLE;
        endcase
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) $onehot0({rd_load, rd_en, ttl_out}));
endmodule
