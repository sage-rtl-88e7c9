// sage_control_unit (CU): coordinates the Scan Unit and the Read Construction
// Unit of one channel for a SAGe_Read command.
//
// How it works. A SAGe_Read command (cmd_op = CMD_SAGE_READ) carries the
// output format the analysis system wants. The CU latches the format, clears
// both units for one cycle, starts the SU (which loads the read set's
// configuration and then decodes), and counts the reads the RCU finishes
// (final chunk of a read accepted downstream). When the SU has decoded all
// reads listed in the configuration and as many reads have left the RCU, the
// command is complete: done rises and stays high until the next command.
//
// Interface: cmd_valid/cmd_ready with cmd_op and cmd_fmt; clear, su_start and
// fmt to the units; su_cfg_done, su_num_reads, su_done and read_out (one
// strobe per finished read) from them; busy, done and reads_out for status.
// Timing: command accepted in IDLE or DONE; one clear cycle, one start cycle.
//
// Follows the paper: a control unit coordinating SU and RCU, a read command
// that selects the output format. Own choices: everything else (the paper
// names this unit and its role only).
// Reset is asynchronous and active low; it also disables the assertions at
// the end, which lint reports as a synchronous use of rst_n (no flop uses it so).
module sage_control_unit
  import sage_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        cmd_valid,
  input  cmd_op_t     cmd_op,
  input  fmt_t        cmd_fmt,
  output logic        cmd_ready,
  // to the units
  output logic        clear,
  output logic        su_start,
  output fmt_t        fmt,
  // from the units
  input  logic        su_cfg_done,
  input  logic [31:0] su_num_reads,
  input  logic        su_done,
  input  logic        read_out,
  // status
  output logic        busy,
  output logic        done,
  output logic [31:0] reads_out
);

  typedef enum logic [2:0] { C_IDLE, C_CLEAR, C_START, C_RUN, C_DONE } cstate_t;

  cstate_t     st_q;
  fmt_t        fmt_q;
  logic [31:0] cnt_q;

  assign cmd_ready = (st_q == C_IDLE) || (st_q == C_DONE);
  assign clear     = (st_q == C_CLEAR);
  assign su_start  = (st_q == C_START);
  assign fmt       = fmt_q;
  assign busy      = (st_q == C_CLEAR) || (st_q == C_START) || (st_q == C_RUN);
  assign done      = (st_q == C_DONE);
  assign reads_out = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= C_IDLE;
      fmt_q <= FMT_2BIT;
      cnt_q <= '0;
    end else begin
      unique case (st_q)
        C_IDLE, C_DONE: if (cmd_valid && cmd_op == CMD_SAGE_READ) begin
          fmt_q <= cmd_fmt;
          cnt_q <= '0;
          st_q  <= C_CLEAR;
        end
        C_CLEAR: st_q <= C_START;
        C_START: st_q <= C_RUN;
        C_RUN: begin
          if (read_out) cnt_q <= cnt_q + 32'd1;
          if (su_cfg_done && su_done &&
              (cnt_q + {31'd0, read_out}) == su_num_reads)
            st_q <= C_DONE;
        end
        default: st_q <= C_IDLE;
      endcase
    end
  end

  // the RCU never finishes more reads than the read set holds
  assert property (@(posedge clk) disable iff (!rst_n)
                   (st_q == C_RUN && su_cfg_done) |-> cnt_q <= su_num_reads);

endmodule
