// spu: State-update Processing Unit, one per pair of banks, with access
// interleaving.
//
// The SPU holds the operand registers and one SPE, and sits between the row
// buffers of an upper and a bottom bank. In each iteration an input mux feeds
// the SPE with the column read from the bank named by the iteration's side,
// while an output demux sends the stage-4 result to its own bank. Because the
// pipeline is four stages long (read, multiply, add, write), the iteration
// that writes was read three iterations earlier; with sides alternating each
// iteration, it always belongs to the other bank, so one bank reads while the
// other writes and no row buffer has to do both (the paper's hazard-free
// access interleaving). The side sequence itself comes from pim_controller.
// An assertion checks that a read and a write never hit the same bank in the
// same step. Bank column reads are combinational from the row buffer; writes
// take effect at the clock edge that ends the step.
module spu
  import pimba_pkg::*;
#(
  parameter int ACC_N  = 32,
  parameter int VACC_N = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // pipeline control (broadcast by the controller)
  input  logic              step,
  input  spe_tag_t          in_tag,
  // REG_WRITE
  input  logic              reg_we,
  input  logic              reg_side,
  input  reg_e              reg_sel,
  input  mx8_word_t         reg_wdata,
  // RESULT_READ
  input  logic              rr_side,
  input  logic              rr_vec,
  input  logic [1:0]        rr_idx,
  output logic [WORD_W-1:0] rr_data,
  output logic              busy,
  // upper bank row buffer
  output logic              up_rd,
  output logic [COL_W-1:0]  up_rd_col,
  input  logic [WORD_W-1:0] up_rdata,
  output logic              up_we,
  output logic [COL_W-1:0]  up_wr_col,
  output logic [WORD_W-1:0] up_wdata,
  // bottom bank row buffer
  output logic              bt_rd,
  output logic [COL_W-1:0]  bt_rd_col,
  input  logic [WORD_W-1:0] bt_rdata,
  output logic              bt_we,
  output logic [COL_W-1:0]  bt_wr_col,
  output logic [WORD_W-1:0] bt_wdata
);

  mx8_word_t        ops [2][4];
  mx8_word_t        rd_mux;
  logic             wb_valid, wb_side;
  logic [COL_W-1:0] wb_col;
  mx8_word_t        wb_data;

  spu_regs u_regs (
    .clk(clk), .rst_n(rst_n), .we(reg_we), .side(reg_side), .sel(reg_sel),
    .wdata(reg_wdata), .ops(ops)
  );

  // input mux: the bank named by this iteration's side feeds the SPE
  assign up_rd     = step && in_tag.valid && (in_tag.side == SIDE_UPPER);
  assign bt_rd     = step && in_tag.valid && (in_tag.side == SIDE_BOTTOM);
  assign up_rd_col = in_tag.col;
  assign bt_rd_col = in_tag.col;
  assign rd_mux    = (in_tag.side == SIDE_BOTTOM) ? mx8_word_t'(bt_rdata) : mx8_word_t'(up_rdata);

  spe #(.ACC_N(ACC_N), .VACC_N(VACC_N)) u_spe (
    .clk(clk), .rst_n(rst_n), .step(step), .in_tag(in_tag), .rd_data(rd_mux),
    .ops(ops), .wb_valid(wb_valid), .wb_side(wb_side), .wb_col(wb_col),
    .wb_data(wb_data), .rr_side(rr_side), .rr_vec(rr_vec), .rr_idx(rr_idx),
    .rr_data(rr_data), .busy(busy)
  );

  // output demux: the finished iteration goes back to its own bank
  assign up_we     = wb_valid && (wb_side == SIDE_UPPER);
  assign bt_we     = wb_valid && (wb_side == SIDE_BOTTOM);
  assign up_wr_col = wb_col;
  assign bt_wr_col = wb_col;
  assign up_wdata  = wb_data;
  assign bt_wdata  = wb_data;

  // structural hazard: a bank may not be read and written in one iteration
  a_no_bank_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !((up_rd && up_we) || (bt_rd && bt_we)));

endmodule
