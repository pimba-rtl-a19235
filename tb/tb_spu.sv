// tb_spu: one SPU between two bank models. A full row pair is updated: 64
// iterations (32 columns x 2 banks) read in the order B0, U0, B1, U1, ...,
// one per 4-clock SPU cycle, then 3 drain steps. Checks: every column of both
// row buffers holds d.*S + k*v[col] of its own bank's operands (within 2
// ulp); while the stream runs, every step after the pipeline fills reads one
// bank and writes the other (access interleaving), never the same bank; the
// scalar results equal the dot products of the new state with q.
module tb_spu;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, step = 0;
  spe_tag_t in_tag = '0;
  logic reg_we = 0, reg_side = 0;
  reg_e reg_sel = REG_D;
  mx8_word_t reg_wdata;
  logic rr_side = 0, rr_vec = 0;
  logic [1:0] rr_idx = 0;
  logic [255:0] rr_data;
  logic busy;
  logic up_rd, up_we, bt_rd, bt_we;
  logic [4:0] up_rd_col, up_wr_col, bt_rd_col, bt_wr_col;
  logic [255:0] up_rdata, up_wdata, bt_rdata, bt_wdata;
  logic act = 0, pre = 0;
  int n_interleave = 0, n_conflict = 0;

  spu dut (.clk(clk), .rst_n(rst_n), .step(step), .in_tag(in_tag), .reg_we(reg_we),
           .reg_side(reg_side), .reg_sel(reg_sel), .reg_wdata(reg_wdata),
           .rr_side(rr_side), .rr_vec(rr_vec), .rr_idx(rr_idx), .rr_data(rr_data),
           .busy(busy),
           .up_rd(up_rd), .up_rd_col(up_rd_col), .up_rdata(up_rdata), .up_we(up_we),
           .up_wr_col(up_wr_col), .up_wdata(up_wdata),
           .bt_rd(bt_rd), .bt_rd_col(bt_rd_col), .bt_rdata(bt_rdata), .bt_we(bt_we),
           .bt_wr_col(bt_wr_col), .bt_wdata(bt_wdata));

  hbm_bank_model #(.ROWS(2)) u_up (.clk(clk), .act(act), .act_row(14'd0), .pre(pre),
    .rd(up_rd), .rd_col(up_rd_col), .rdata(up_rdata), .we(up_we), .wr_col(up_wr_col), .wdata(up_wdata));
  hbm_bank_model #(.ROWS(2)) u_bt (.clk(clk), .act(act), .act_row(14'd0), .pre(pre),
    .rd(bt_rd), .rd_col(bt_rd_col), .rdata(bt_rdata), .we(bt_we), .wr_col(bt_wr_col), .wdata(bt_wdata));

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (step) begin
    if ((up_rd && bt_we) || (bt_rd && up_we)) n_interleave++;
    if ((up_rd && up_we) || (bt_rd && bt_we)) n_conflict++;
  end

  mx8_word_t ops [2][4];
  mx8_word_t s0 [2][32];

  initial begin
    real want [32];
    for (int s = 0; s < 2; s++) for (int c = 0; c < 32; c++) begin
      s0[s][c] = rand_word(122, 128);
      if (s == 0) u_up.mem[0][c] = s0[s][c]; else u_bt.mem[0][c] = s0[s][c];
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // operands
    for (int s = 0; s < 2; s++) for (int r = 0; r < 4; r++) begin
      ops[s][r] = rand_word(122, 128);
      @(negedge clk); reg_we = 1; reg_side = 1'(s); reg_sel = reg_e'(r); reg_wdata = ops[s][r];
    end
    @(negedge clk); reg_we = 0; act = 1;
    @(negedge clk); act = 0;
    // 64 iterations + 3 drain steps
    for (int i = 0; i < 67; i++) begin
      @(negedge clk);
      step = 1;
      in_tag = '0;
      if (i < 64) begin
        in_tag.valid = 1; in_tag.mode = MODE_SU; in_tag.side = (i % 2 == 0) ? SIDE_BOTTOM : SIDE_UPPER;
        in_tag.col = 5'(i / 2); in_tag.eidx = 5'(i / 2); in_tag.acc_idx = 5'(i / 2); in_tag.acc_clr = 1;
      end
      @(negedge clk); step = 0; in_tag = '0;
      repeat (2) @(negedge clk);
    end
    checks++; if (n_interleave < 60) begin failures++; $display("interleave %0d", n_interleave); end
    checks++; if (n_conflict != 0) failures++;
    for (int s = 0; s < 2; s++) for (int c = 0; c < 32; c++) begin
      mx8_word_t got;
      got = (s == 0) ? u_up.rowbuf[c] : u_bt.rowbuf[c];
      for (int j = 0; j < 32; j++) want[j] = su_ref(s0[s][c], ops[s][REG_D], ops[s][REG_K], ops[s][REG_V], c, j);
      checks++;
      if (word_err(got, want, 2.0) != 0) begin failures++; $display("side %0d col %0d wrong", s, c); end
      rr_side = 1'(s); rr_vec = 0; rr_idx = 2'(c / 8); #1;
      checks++;
      begin
        acc_scalar_t a;
        a = acc_scalar_t'(rr_data[32*(c%8) +: 32]);
        if (abs_r(acc_val(a) - dot_ref(got, ops[s][REG_Q])) > 2.0 * p2(int'(a.exp) - 12)) begin
          failures++; $display("dot side %0d col %0d", s, c);
        end
      end
    end
    checks++; if (busy) failures++;
    $display("interleaved steps: %0d", n_interleave);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
