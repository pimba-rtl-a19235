// tb_pimba_top: end-to-end run of one pseudo-channel at full size (8 SPUs,
// 16 banks, all parameters at their defaults) against 16 bank models.
// Three rounds go through the host queue, each ACT4 x4 -> COMP burst ->
// PRECHARGES -> RESULT_READ, timed by the built-in scheduler:
//   1. state update of a whole row in every bank (64 COMPs, every column of
//      both banks of each SPU), operands loaded by 64 REG_WRITEs placed
//      between the ACT4s, one of them through the fp16 quantization unit;
//      checked: every updated state word written back to the DRAM array
//      (d.*S + k*v within 2 ulp) and every partial output y = S_t.q;
//      COMPs must run at one per tCCD_L (the SPU clock).
//   2. attention score: two-column keys, dot products with q summed per key.
//   3. attention attend: four value sub-chunks scaled by their scores and
//      summed in the vector accumulator.
// Mechanisms counted, each must occur: drain bubbles, REG_WRITE inside a
// tFAW window, RESULT_READ inside tRP, a step reading one bank while writing
// the other, a quantized REG_WRITE, and COMPs of all three modes.
module tb_pimba_top;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  typedef struct {
    pim_cmd_t          cmd;
    bit                quant;
    logic [31:0][15:0] fp;
  } host_req_t;
  host_req_t hq [$];

  logic host_valid, host_ready, host_quant, rr_valid, busy;
  logic stat_bubble, stat_ovl_regw, stat_ovl_rr;
  pim_cmd_t host_cmd;
  logic [31:0][15:0] host_fp16;
  logic [255:0] rr_data;
  logic [15:0] bank_act, bank_pre, bank_rd, bank_we;
  logic [13:0] bank_act_row;
  logic [15:0][4:0] bank_rd_col, bank_wr_col;
  logic [15:0][255:0] bank_rdata, bank_wdata;

  pimba_top dut (.clk(clk), .rst_n(rst_n), .host_valid(host_valid), .host_ready(host_ready),
    .host_cmd(host_cmd), .host_quant(host_quant), .host_fp16(host_fp16),
    .rr_valid(rr_valid), .rr_data(rr_data), .bank_act(bank_act), .bank_act_row(bank_act_row),
    .bank_pre(bank_pre), .bank_rd(bank_rd), .bank_rd_col(bank_rd_col), .bank_rdata(bank_rdata),
    .bank_we(bank_we), .bank_wr_col(bank_wr_col), .bank_wdata(bank_wdata), .busy(busy),
    .stat_bubble(stat_bubble), .stat_ovl_regw(stat_ovl_regw), .stat_ovl_rr(stat_ovl_rr));

  // ---------------- banks ----------------
  logic [255:0] init_mem [16][3][32];
  logic [255:0] mem_view [16][3][32];
  int           bank_err [16], bank_err0 [16];
  for (genvar b = 0; b < 16; b++) begin : g_bank
    hbm_bank_model #(.ROWS(3)) u_bank (.clk(clk), .act(bank_act[b]), .act_row(bank_act_row),
      .pre(bank_pre[b]), .rd(bank_rd[b]), .rd_col(bank_rd_col[b]), .rdata(bank_rdata[b]),
      .we(bank_we[b]), .wr_col(bank_wr_col[b]), .wdata(bank_wdata[b]));
    initial begin
      @(posedge rst_n);
      for (int r = 0; r < 3; r++) for (int c = 0; c < 32; c++) u_bank.mem[r][c] = init_mem[b][r][c];
    end
    always_comb begin
      for (int r = 0; r < 3; r++) for (int c = 0; c < 32; c++) mem_view[b][r][c] = u_bank.mem[r][c];
      bank_err[b] = u_bank.n_errors;
    end
  end

  always #5 clk = ~clk;

  // ---------------- host queue ----------------
  assign host_valid = rst_n && (hq.size() > 0);
  assign host_cmd   = (hq.size() > 0) ? hq[0].cmd : '0;
  assign host_quant = (hq.size() > 0) ? hq[0].quant : 1'b0;
  assign host_fp16  = (hq.size() > 0) ? hq[0].fp : '0;

  logic [255:0] rr_log [$];
  int cyc = 0;
  int comp_steps [$];
  int n_bubble = 0, n_ovl_regw = 0, n_ovl_rr = 0, n_interleave = 0, n_quant = 0;
  int n_mode [3] = '{0, 0, 0};

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (host_valid && host_ready) begin
      if (hq[0].quant) n_quant++;
      void'(hq.pop_front());
    end
    if (rr_valid) rr_log.push_back(rr_data);
    if (stat_bubble) n_bubble++;
    if (stat_ovl_regw) n_ovl_regw++;
    if (stat_ovl_rr) n_ovl_rr++;
    if (dut.step && dut.tag.valid) begin
      comp_steps.push_back(cyc);
      n_mode[int'(dut.tag.mode)]++;
    end
    for (int s = 0; s < 8; s++)
      if ((bank_rd[2*s] && bank_we[2*s+1]) || (bank_rd[2*s+1] && bank_we[2*s])) n_interleave++;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers ----------------
  function automatic host_req_t req(pim_cmd_t c);
    host_req_t r;
    r.cmd = c; r.quant = 0; r.fp = '0;
    return r;
  endfunction

  task automatic push_act4(int row);
    pim_cmd_t c;
    for (int bg = 0; bg < 4; bg++) begin
      c = '0; c.op = CMD_ACT4; c.bg = 2'(bg); c.row = 14'(row);
      hq.push_back(req(c));
    end
  endtask

  task automatic push_comps(mode_e mode);
    pim_cmd_t c;
    int n = (mode == MODE_SU) ? 64 : 8;
    for (int i = 0; i < n; i++) begin
      c = '0; c.op = CMD_COMP; c.mode = mode; c.col = 5'(i / 2);
      case (mode)
        MODE_SU:    begin c.eidx = 5'(i / 2); c.acc_idx = 5'(i / 2); c.acc_clr = 1; end
        MODE_SCORE: begin c.acc_idx = 5'(16 + (i / 2) / 2); c.acc_clr = ((i / 2) % 2 == 0); end
        default:    begin c.eidx = 5'(i / 2); c.acc_idx = 5'd0; c.acc_clr = (i / 2 == 0); end
      endcase
      hq.push_back(req(c));
    end
  endtask

  task automatic wait_idle();
    while (hq.size() > 0) @(posedge clk);
    repeat (60) @(posedge clk);
  endtask

  mx8_word_t ops [8][2][4];
  mx8_word_t scores;

  initial begin
    pim_cmd_t c;
    host_req_t r;
    real want [32];
    int n;
    // ---------------- data ----------------
    for (int b = 0; b < 16; b++) for (int rw = 0; rw < 3; rw++) for (int col = 0; col < 32; col++)
      init_mem[b][rw][col] = rand_word(rw == 2 ? 124 : 122, rw == 2 ? 126 : 128);
    for (int s = 0; s < 8; s++) for (int sd = 0; sd < 2; sd++) for (int g = 0; g < 4; g++)
      ops[s][sd][g] = rand_word(122, 128);
    // SPU 0 upper d: fp16 decay factors m/64, m in 32..63, exact in MX8
    for (int gr = 0; gr < 2; gr++) begin
      ops[0][0][REG_D][gr].exp = 8'd126; ops[0][0][REG_D][gr].micro = '0;
      for (int e = 0; e < 16; e++) ops[0][0][REG_D][gr].elem[e] = {1'b0, 6'(32 + $urandom_range(31))};
    end
    scores = rand_word(124, 126);

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    bank_err0 = bank_err;  // strobes seen before reset took hold do not count

    // ================= round 1: state update =================
    n = 0;
    for (int bg = 0; bg < 4; bg++) begin
      c = '0; c.op = CMD_ACT4; c.bg = 2'(bg); c.row = 14'd0;
      hq.push_back(req(c));
      for (int k = 0; k < 16; k++) begin
        automatic int s = n / 8, sd = (n / 4) % 2, g = n % 4;
        c = '0; c.op = CMD_REG_WRITE; c.spu = 3'(s); c.side = 1'(sd); c.reg_id = reg_e'(g);
        c.data = ops[s][sd][g];
        r = req(c);
        if (s == 0 && sd == 0 && g == int'(REG_D)) begin
          r.quant = 1; r.cmd.data = '0;
          for (int j = 0; j < 32; j++)
            r.fp[j] = {1'b0, 5'd14, 10'((int'(ops[0][0][REG_D][j/16].elem[j%16][5:0]) - 32) << 5)};
        end
        hq.push_back(r);
        n++;
      end
    end
    push_comps(MODE_SU);
    c = '0; c.op = CMD_PRECHARGES; hq.push_back(req(c));
    for (int s = 0; s < 8; s++) for (int sd = 0; sd < 2; sd++) for (int w = 0; w < 4; w++) begin
      c = '0; c.op = CMD_RESULT_READ; c.spu = 3'(s); c.side = 1'(sd); c.rr_idx = 2'(w);
      hq.push_back(req(c));
    end
    wait_idle();

    // COMP rate: one sub-chunk per SPU clock (tCCD_L = 4 bus cycles)
    checks++;
    if (comp_steps.size() != 64 || comp_steps[63] - comp_steps[0] != 63 * 4) begin
      failures++; $display("COMP rate: %0d steps, span %0d", comp_steps.size(),
                           comp_steps[comp_steps.size()-1] - comp_steps[0]);
    end
    for (int s = 0; s < 8; s++) for (int sd = 0; sd < 2; sd++) for (int col = 0; col < 32; col++) begin
      automatic int b = 2 * s + sd;
      mx8_word_t got;
      acc_scalar_t a;
      got = mem_view[b][0][col];
      for (int j = 0; j < 32; j++)
        want[j] = su_ref(init_mem[b][0][col], ops[s][sd][REG_D], ops[s][sd][REG_K], ops[s][sd][REG_V], col, j);
      checks++;
      if (word_err(got, want, 2.0) != 0) begin
        failures++; if (failures < 8) $display("state spu %0d side %0d col %0d wrong", s, sd, col);
      end
      a = acc_scalar_t'(rr_log[(s * 2 + sd) * 4 + col / 8][32*(col%8) +: 32]);
      checks++;
      if (abs_r(acc_val(a) - dot_ref(got, ops[s][sd][REG_Q])) > 2.0 * p2(int'(a.exp) - 12)) begin
        failures++; if (failures < 8) $display("y spu %0d side %0d col %0d: %g vs %g", s, sd, col,
                                               acc_val(a), dot_ref(got, ops[s][sd][REG_Q]));
      end
    end

    // ================= round 2: attention score =================
    rr_log.delete();
    push_act4(1);
    push_comps(MODE_SCORE);
    c = '0; c.op = CMD_PRECHARGES; hq.push_back(req(c));
    for (int s = 0; s < 8; s++) for (int sd = 0; sd < 2; sd++) begin
      c = '0; c.op = CMD_RESULT_READ; c.spu = 3'(s); c.side = 1'(sd); c.rr_idx = 2'd2;
      hq.push_back(req(c));
    end
    wait_idle();
    for (int s = 0; s < 8; s++) for (int sd = 0; sd < 2; sd++) for (int key = 0; key < 2; key++) begin
      automatic int b = 2 * s + sd;
      real w;
      acc_scalar_t a;
      w = dot_ref(init_mem[b][1][2*key], ops[s][sd][REG_Q]) + dot_ref(init_mem[b][1][2*key+1], ops[s][sd][REG_Q]);
      a = acc_scalar_t'(rr_log[s * 2 + sd][32*key +: 32]);
      checks++;
      if (abs_r(acc_val(a) - w) > 4.0 * p2(int'(a.exp) - 12)) begin
        failures++; $display("score spu %0d side %0d key %0d: %g vs %g", s, sd, key, acc_val(a), w);
      end
    end

    // ================= round 3: attention attend =================
    rr_log.delete();
    for (int sd = 0; sd < 2; sd++) begin
      c = '0; c.op = CMD_REG_WRITE; c.bcast = 1; c.side = 1'(sd); c.reg_id = REG_V; c.data = scores;
      hq.push_back(req(c));
    end
    push_act4(2);
    push_comps(MODE_ATTEND);
    c = '0; c.op = CMD_PRECHARGES; hq.push_back(req(c));
    for (int s = 0; s < 8; s++) for (int sd = 0; sd < 2; sd++) begin
      c = '0; c.op = CMD_RESULT_READ; c.spu = 3'(s); c.side = 1'(sd); c.rr_vec = 1; c.rr_idx = 2'd0;
      hq.push_back(req(c));
    end
    wait_idle();
    for (int s = 0; s < 8; s++) for (int sd = 0; sd < 2; sd++) begin
      automatic int b = 2 * s + sd;
      for (int j = 0; j < 32; j++) begin
        want[j] = 0.0;
        for (int m = 0; m < 4; m++) want[j] += word_val(scores, m) * word_val(init_mem[b][2][m], j);
      end
      checks++;
      if (word_err(mx8_word_t'(rr_log[s * 2 + sd]), want, 6.0) != 0) begin
        failures++; $display("attend spu %0d side %0d wrong", s, sd);
      end
    end

    // ================= mechanisms =================
    $display("bubbles %0d, REG_WRITE in tFAW %0d, RESULT_READ in tRP %0d, interleaved %0d, quantized %0d, SU/score/attend COMPs %0d/%0d/%0d",
             n_bubble, n_ovl_regw, n_ovl_rr, n_interleave, n_quant, n_mode[0], n_mode[1], n_mode[2]);
    checks++; if (n_bubble == 0) failures++;
    checks++; if (n_ovl_regw == 0) failures++;
    checks++; if (n_ovl_rr == 0) failures++;
    checks++; if (n_interleave == 0) failures++;
    checks++; if (n_quant == 0) failures++;
    checks++; if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0) failures++;
    for (int b = 0; b < 16; b++) begin checks++; if (bank_err[b] != bank_err0[b]) failures++; end
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
