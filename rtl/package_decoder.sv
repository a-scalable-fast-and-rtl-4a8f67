// package_decoder -- splits the USB word stream into data- and command-packages.
//
// A data-package is: start header, length (number of 9-byte packets),
// channel number, segment number, the data bytes two per word (high byte
// first, an odd last byte padded), end header. Its channel, segment and
// length are handed to the memory writer as one write job, then its bytes
// are passed to the block-RAM buffer.
// A command-package is: start header, one reserved word, length (number of
// commands, StartSequencer and EndSequencer included), the commands as two
// words each ({opcode, arg[23:16]} then arg[15:0]), end header. Each command
// is passed to the command sequencer as one cmd_t.
// A word that is not a start header where one is expected, or a missing end
// header, raises err for one cycle; the decoder then waits for the next start
// header.
// Interface: valid/ready word input; job and byte outputs use valid/ready;
// the command output is a one-cycle strobe (the sequencer always accepts).
// Timing: one word per cycle while the outputs are ready.
// The field order follows the paper's package diagrams; the header values, the
// word widths of the fields and the command word format are this design's own.
module package_decoder
  import mawg_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic [15:0] in_word,
  output logic        in_ready,
  output logic        job_valid,
  output wr_job_t     job,
  input  logic        job_ready,
  output logic        byte_valid,
  output logic [7:0]  byte_data,
  input  logic        byte_ready,
  output logic        cmd_valid,
  output cmd_t        cmd,
  output logic        err
);
  typedef enum logic [3:0] {
    S_HDR, S_D_LEN, S_D_CH, S_D_SEG, S_D_JOB, S_D_DATA, S_D_LO, S_C_RSV, S_C_LEN,
    S_C_HI, S_C_LO, S_END
  } state_e;

  state_e      st;
  wr_job_t     nxt;           // job being parsed; `job` holds the one offered
  logic [31:0] bytes_left;    // data bytes still to come
  logic [15:0] cmds_left;
  logic [7:0]  lo_byte;
  logic [15:0] cmd_hi;
  logic        take;

  always_comb begin
    in_ready   = 1'b0;
    byte_valid = 1'b0;
    byte_data  = in_word[15:8];
    case (st)
      S_HDR, S_D_LEN, S_D_CH, S_D_SEG, S_C_RSV, S_C_LEN, S_C_HI, S_C_LO, S_END: in_ready = 1'b1;
      S_D_DATA: begin
        byte_valid = in_valid;
        in_ready   = byte_ready;
      end
      S_D_LO: begin
        byte_valid = 1'b1;
        byte_data  = lo_byte;
      end
      default: ;
    endcase
  end
  assign take = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      st         <= S_HDR;
      job_valid  <= 1'b0;
      job        <= '0;
      nxt        <= '0;
      bytes_left <= '0;
      cmds_left  <= '0;
      lo_byte    <= '0;
      cmd_hi     <= '0;
      cmd_valid  <= 1'b0;
      cmd        <= '0;
      err        <= 1'b0;
    end else begin
      cmd_valid <= 1'b0;
      err       <= 1'b0;
      if (job_valid && job_ready) job_valid <= 1'b0;
      case (st)
        S_HDR: if (take) begin
          if (in_word == DATA_HDR)     st <= S_D_LEN;
          else if (in_word == CMD_HDR) st <= S_C_RSV;
          else                         err <= 1'b1;
        end
        S_D_LEN: if (take) begin
          nxt.npackets <= in_word;
          bytes_left   <= 32'(in_word) * PACKET_BYTES;
          st           <= S_D_CH;
        end
        S_D_CH: if (take) begin
          nxt.channel <= in_word[4:0];
          st          <= S_D_SEG;
        end
        S_D_SEG: if (take) begin
          nxt.segment <= in_word[3:0];
          st          <= S_D_JOB;
        end
        // Hand the job over before any byte, so that the writer knows the
        // target before the buffer fills. Wait until a previous job is taken.
        S_D_JOB: if (!job_valid) begin
          job_valid <= 1'b1;
          job       <= nxt;
          st        <= (bytes_left == 0) ? S_END : S_D_DATA;
        end
        S_D_DATA: if (take) begin
          lo_byte <= in_word[7:0];
          if (bytes_left >= 2) begin
            bytes_left <= bytes_left - 2;
            st         <= S_D_LO;
          end else begin
            bytes_left <= '0;
            st         <= S_END;
          end
        end
        S_D_LO: if (byte_ready) begin
          st <= (bytes_left == 0) ? S_END : S_D_DATA;
        end
        S_C_RSV: if (take) st <= S_C_LEN;
        S_C_LEN: if (take) begin
          cmds_left <= in_word;
          st        <= (in_word == 0) ? S_END : S_C_HI;
        end
        S_C_HI: if (take) begin
          cmd_hi <= in_word;
          st     <= S_C_LO;
        end
        S_C_LO: if (take) begin
          cmd_valid <= 1'b1;
          cmd       <= {cmd_hi, in_word};
          cmds_left <= cmds_left - 1'b1;
          st        <= (cmds_left == 16'd1) ? S_END : S_C_HI;
        end
        S_END: if (take) begin
          if (in_word != END_HDR) err <= 1'b1;
          st <= S_HDR;
        end
        default: st <= S_HDR;
      endcase
    end
  end

  // A job is held until taken.
  assert property (@(posedge clk) disable iff (rst) job_valid && !job_ready |=> job_valid && $stable(job));
endmodule
