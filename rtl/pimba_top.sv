// pimba_top: one HBM pseudo-channel of Pimba, from the host command queue
// to the ports of its 16 DRAM banks.
//
// Path of a command: the host queues it (host_valid/host_ready); a REG_WRITE
// marked host_quant carries 32 fp16 values that the Quantization Unit
// (two mx_quantizer) turns into one MX8 word; pim_cmd_scheduler holds it
// until the HBM timing rules allow it and issues it; pim_controller executes
// it on the eight SPUs. SPU s sits between bank 2s (upper) and bank 2s+1
// (bottom), as in the paper's PIM architecture figure, so every COMP runs one
// iteration in all 8 SPUs (all-bank operation) and 16 banks are served by 8
// processing units. The DRAM banks themselves (cell array, sense amplifiers,
// row buffer) are outside this module: bank_* ports carry activate,
// precharge, and the column reads and writes of each bank's row buffer
// (combinational read data, write at the clock edge). RESULT_READ data comes
// back on rr_valid/rr_data. Everything runs on the memory-bus clock; the SPU
// pipeline advances once per COMP, at most every tCCD_L cycles, which is the
// paper's SPU clock (378 MHz for a 1.512 GHz bus).
module pimba_top
  import pimba_pkg::*;
#(
  parameter int N_SPU  = 8,
  parameter int N_BANK = 2 * N_SPU,
  parameter int ACC_N  = 32,
  parameter int VACC_N = 4,
  parameter int TFAW   = 30,
  parameter int TRP    = 14,
  parameter int TRAS   = 34,
  parameter int TCCD_L = 4,
  parameter int TWR    = 16,
  parameter int TRTP_L = 6,
  parameter int TRCD   = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host command queue
  input  logic                    host_valid,
  output logic                    host_ready,
  input  pim_cmd_t                host_cmd,
  input  logic                    host_quant,
  input  logic [31:0][15:0]       host_fp16,
  // results
  output logic                    rr_valid,
  output logic [WORD_W-1:0]       rr_data,
  // banks
  output logic [N_BANK-1:0]       bank_act,
  output logic [ROW_W-1:0]        bank_act_row,
  output logic [N_BANK-1:0]       bank_pre,
  output logic [N_BANK-1:0]       bank_rd,
  output logic [N_BANK-1:0][COL_W-1:0]  bank_rd_col,
  input  logic [N_BANK-1:0][WORD_W-1:0] bank_rdata,
  output logic [N_BANK-1:0]       bank_we,
  output logic [N_BANK-1:0][COL_W-1:0]  bank_wr_col,
  output logic [N_BANK-1:0][WORD_W-1:0] bank_wdata,
  // status
  output logic                    busy,
  output logic                    stat_bubble,    // drain step this cycle
  output logic                    stat_ovl_regw,  // REG_WRITE inside a tFAW window
  output logic                    stat_ovl_rr     // RESULT_READ inside tRP
);

  // ---------------- Quantization Unit ----------------
  mx8_word_t q_word;
  pim_cmd_t  sched_in;
  for (genvar g = 0; g < GROUPS_PER_WORD; g++) begin : g_quant
    mx_quantizer u_q (.x(host_fp16[16*g +: 16]), .y(q_word[g]));
  end
  always_comb begin
    sched_in = host_cmd;
    if (host_quant && host_cmd.op == CMD_REG_WRITE) sched_in.data = q_word;
  end

  // ---------------- command scheduling ----------------
  logic     iss_valid, ovl_regw, ovl_rr;
  pim_cmd_t iss_cmd;
  pim_cmd_scheduler #(
    .TFAW(TFAW), .TRP(TRP), .TRAS(TRAS), .TCCD_L(TCCD_L), .TWR(TWR),
    .TRTP_L(TRTP_L), .TRCD(TRCD)
  ) u_sched (
    .clk(clk), .rst_n(rst_n), .in_valid(host_valid), .in_ready(host_ready),
    .in_cmd(sched_in), .out_valid(iss_valid), .out_cmd(iss_cmd),
    .ovl_regw(ovl_regw), .ovl_rr(ovl_rr)
  );

  // ---------------- command decode ----------------
  logic                step, pipe_busy, bubble;
  spe_tag_t            tag;
  logic [N_SPU-1:0]    reg_we, spu_busy;
  logic                reg_side, rr_side, rr_vec;
  reg_e                reg_sel;
  mx8_word_t           reg_wdata;
  logic [1:0]          rr_idx;
  logic [WORD_W-1:0]   spu_rr [N_SPU];

  pim_controller #(.N_SPU(N_SPU), .N_BANK(N_BANK), .TCCD_L(TCCD_L)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .cmd_valid(iss_valid), .cmd(iss_cmd),
    .bank_act(bank_act), .bank_act_row(bank_act_row), .bank_pre(bank_pre),
    .step(step), .tag(tag), .reg_we(reg_we), .reg_side(reg_side),
    .reg_sel(reg_sel), .reg_wdata(reg_wdata), .rr_side(rr_side),
    .rr_vec(rr_vec), .rr_idx(rr_idx), .spu_rr_data(spu_rr),
    .rr_valid(rr_valid), .rr_data(rr_data), .pipe_busy(pipe_busy),
    .bubble(bubble)
  );

  // ---------------- SPU array ----------------
  for (genvar s = 0; s < N_SPU; s++) begin : g_spu
    spu #(.ACC_N(ACC_N), .VACC_N(VACC_N)) u_spu (
      .clk(clk), .rst_n(rst_n), .step(step), .in_tag(tag),
      .reg_we(reg_we[s]), .reg_side(reg_side), .reg_sel(reg_sel),
      .reg_wdata(reg_wdata), .rr_side(rr_side), .rr_vec(rr_vec),
      .rr_idx(rr_idx), .rr_data(spu_rr[s]), .busy(spu_busy[s]),
      .up_rd(bank_rd[2*s]),       .up_rd_col(bank_rd_col[2*s]),
      .up_rdata(bank_rdata[2*s]), .up_we(bank_we[2*s]),
      .up_wr_col(bank_wr_col[2*s]), .up_wdata(bank_wdata[2*s]),
      .bt_rd(bank_rd[2*s+1]),       .bt_rd_col(bank_rd_col[2*s+1]),
      .bt_rdata(bank_rdata[2*s+1]), .bt_we(bank_we[2*s+1]),
      .bt_wr_col(bank_wr_col[2*s+1]), .bt_wdata(bank_wdata[2*s+1])
    );
  end

  assign busy          = pipe_busy || (|spu_busy);
  assign stat_bubble   = bubble;
  assign stat_ovl_regw = ovl_regw;
  assign stat_ovl_rr   = ovl_rr;

endmodule
