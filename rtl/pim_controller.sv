// pim_controller: command decoder of one Pimba pseudo-channel.
//
// It executes the five custom DRAM commands of the paper in all-bank fashion:
//   ACT4         opens row `row` in the four banks of bank group `bg`
//                (four activations ganged, as the paper describes; which
//                four banks are ganged is this design's choice);
//   REG_WRITE    writes one MX8 word into an operand register of SPU `spu`,
//                or of every SPU when `bcast` is set;
//   COMP         starts one iteration in every SPU: it is a pipeline step
//                carrying the column, mode and accumulator fields;
//   RESULT_READ  returns one 256-bit result word of SPU `spu`, one cycle
//                later on rr_data;
//   PRECHARGES   precharges all banks, storing the updated rows.
// Pipeline steps: each COMP is a step. When iterations are still in flight
// and no COMP has come for TCCD_L cycles, the controller inserts a drain step
// (a bubble) every TCCD_L cycles until the pipeline is empty, so the last
// results are written without further commands. The side (bank) read by an
// iteration toggles on every step, bubbles included, and restarts at the
// bottom bank once the pipeline is empty, giving the read order B0, U0, B1,
// U1, ... of the paper's pipeline chart. Since an iteration writes three
// steps after its read, reads and writes always use different banks.
// Encodings, bubble insertion and timing of rr_data are this design's.
module pim_controller
  import pimba_pkg::*;
#(
  parameter int N_SPU  = 8,
  parameter int N_BANK = 2 * N_SPU,
  parameter int TCCD_L = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  pim_cmd_t          cmd,
  // banks: activate / precharge
  output logic [N_BANK-1:0] bank_act,
  output logic [ROW_W-1:0]  bank_act_row,
  output logic [N_BANK-1:0] bank_pre,
  // SPU control
  output logic              step,
  output spe_tag_t          tag,
  output logic [N_SPU-1:0]  reg_we,
  output logic              reg_side,
  output reg_e              reg_sel,
  output mx8_word_t         reg_wdata,
  output logic              rr_side,
  output logic              rr_vec,
  output logic [1:0]        rr_idx,
  input  logic [WORD_W-1:0] spu_rr_data [N_SPU],
  // host result data
  output logic              rr_valid,
  output logic [WORD_W-1:0] rr_data,
  // status
  output logic              pipe_busy,
  output logic              bubble
);

  localparam int CW = $clog2(TCCD_L + 1) + 1;

  logic            is_comp;
  logic [2:0]      inflight;     // valid bits of stages 1..3
  logic [CW-1:0]   since_step;
  logic            side_q;

  assign is_comp   = cmd_valid && (cmd.op == CMD_COMP);
  assign pipe_busy = |inflight;
  assign bubble    = !is_comp && pipe_busy && (since_step >= CW'(TCCD_L));
  assign step      = is_comp || bubble;

  always_comb begin
    tag         = '0;
    tag.valid   = is_comp;
    tag.mode    = cmd.mode;
    tag.side    = side_q;
    tag.col     = cmd.col;
    tag.eidx    = cmd.eidx;
    tag.acc_idx = cmd.acc_idx;
    tag.acc_clr = cmd.acc_clr;
  end

  // activate / precharge
  always_comb begin
    bank_act     = '0;
    bank_pre     = '0;
    bank_act_row = cmd.row;
    if (cmd_valid && cmd.op == CMD_ACT4)
      for (int b = 0; b < N_BANK; b++) bank_act[b] = (b / 4 == int'(cmd.bg));
    if (cmd_valid && cmd.op == CMD_PRECHARGES) bank_pre = '1;
  end

  // operand register writes
  always_comb begin
    reg_side  = cmd.side;
    reg_sel   = cmd.reg_id;
    reg_wdata = cmd.data;
    for (int s = 0; s < N_SPU; s++)
      reg_we[s] = cmd_valid && (cmd.op == CMD_REG_WRITE) && (cmd.bcast || cmd.spu == 3'(s));
  end

  assign rr_side = cmd.side;
  assign rr_vec  = cmd.rr_vec;
  assign rr_idx  = cmd.rr_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight   <= '0;
      since_step <= CW'(TCCD_L);
      side_q     <= SIDE_BOTTOM;
      rr_valid   <= 1'b0;
      rr_data    <= '0;
    end else begin
      rr_valid <= cmd_valid && (cmd.op == CMD_RESULT_READ);
      if (cmd_valid && cmd.op == CMD_RESULT_READ) rr_data <= spu_rr_data[cmd.spu];
      if (step) begin
        inflight   <= {inflight[1:0], is_comp};
        since_step <= CW'(1);
        side_q     <= ({inflight[1:0], is_comp} == 3'b000) ? SIDE_BOTTOM : ~side_q;
      end else if (since_step < CW'(TCCD_L)) begin
        since_step <= since_step + 1'b1;
      end
    end
  end

  // COMP must respect tCCD_L (one SPU clock) from the previous step
  a_comp_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    is_comp |-> since_step >= CW'(TCCD_L));

endmodule
