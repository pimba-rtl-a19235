// pim_cmd_scheduler: host-side issue logic for Pimba's custom DRAM commands.
//
// Commands leave in the order the host queues them; the head of the queue
// waits until every HBM timing rule (Table 1 values, in memory-bus cycles)
// allows it:
//   ACT4         tFAW after the previous ACT4 (four ganged activations use a
//                whole tFAW window) and tRP after PRECHARGES;
//   REG_WRITE    tCCD_L after the previous column command;
//   COMP         tCCD_L after the previous column command, tRCD after ACT4;
//   RESULT_READ  tCCD_L after the previous column command and, since COMP
//                also writes, 3*tCCD_L + tWR after the last COMP (its last
//                write leaves the pipeline three SPU clocks after it);
//   PRECHARGES   tRAS after ACT4, the same write recovery after the last
//                COMP, and tRTP_L after it.
// Queued in the order of the paper's command schedule, this lets REG_WRITE
// fill the idle time between ACT4 commands and RESULT_READ overlap the tRP of
// PRECHARGES; ovl_regw and ovl_rr flag those overlaps. tRCD is not given in
// the paper and is assumed (14). in_ready is combinational; the issued
// command appears registered on out_valid/out_cmd the next cycle.
module pim_cmd_scheduler
  import pimba_pkg::*;
#(
  parameter int TFAW   = 30,
  parameter int TRP    = 14,
  parameter int TRAS   = 34,
  parameter int TCCD_L = 4,
  parameter int TWR    = 16,
  parameter int TRTP_L = 6,
  parameter int TRCD   = 14
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  pim_cmd_t in_cmd,
  output logic     out_valid,
  output pim_cmd_t out_cmd,
  output logic     ovl_regw,
  output logic     ovl_rr
);

  localparam int CW     = 8;
  localparam int T_WREC = 3 * TCCD_L + TWR;
  localparam logic [CW-1:0] SAT = '1;

  logic [CW-1:0] c_act, c_pre, c_col, c_comp;
  logic          legal, issue;

  always_comb begin
    unique case (in_cmd.op)
      CMD_ACT4:        legal = (c_act >= CW'(TFAW)) && (c_pre >= CW'(TRP));
      CMD_REG_WRITE:   legal = (c_col >= CW'(TCCD_L));
      CMD_COMP:        legal = (c_col >= CW'(TCCD_L)) && (c_act >= CW'(TRCD));
      CMD_RESULT_READ: legal = (c_col >= CW'(TCCD_L)) && (c_comp >= CW'(T_WREC));
      CMD_PRECHARGES:  legal = (c_act >= CW'(TRAS)) && (c_comp >= CW'(T_WREC)) &&
                               (c_comp >= CW'(TRTP_L));
      default:         legal = 1'b1;
    endcase
  end

  assign in_ready = legal;
  assign issue    = in_valid && legal && (in_cmd.op != CMD_NOP);

  function automatic logic [CW-1:0] inc(logic [CW-1:0] c);
    return (c == SAT) ? c : c + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_act <= SAT; c_pre <= SAT; c_col <= SAT; c_comp <= SAT;
      out_valid <= 1'b0;
      out_cmd   <= '0;
      ovl_regw  <= 1'b0;
      ovl_rr    <= 1'b0;
    end else begin
      c_act  <= (issue && in_cmd.op == CMD_ACT4)       ? CW'(1) : inc(c_act);
      c_pre  <= (issue && in_cmd.op == CMD_PRECHARGES) ? CW'(1) : inc(c_pre);
      c_comp <= (issue && in_cmd.op == CMD_COMP)       ? CW'(1) : inc(c_comp);
      c_col  <= (issue && (in_cmd.op == CMD_REG_WRITE || in_cmd.op == CMD_COMP ||
                           in_cmd.op == CMD_RESULT_READ)) ? CW'(1) : inc(c_col);
      out_valid <= issue;
      if (issue) out_cmd <= in_cmd;
      ovl_regw <= issue && (in_cmd.op == CMD_REG_WRITE)   && (c_act < CW'(TFAW));
      ovl_rr   <= issue && (in_cmd.op == CMD_RESULT_READ) && (c_pre < CW'(TRP));
    end
  end

endmodule
