// spe: State-update Processing Engine, the four-stage pipeline inside each
// SPU.
//
// One iteration handles one 256-bit sub-chunk (one DRAM column, 32 MX8
// elements). The pipeline advances only on `step`, one SPU clock (tCCD_L
// memory-bus cycles); an iteration enters with in_tag.valid on a step.
//   stage 1  the sub-chunk read from the selected row buffer is registered;
//   stage 2  two MX multipliers: d x S (state decay) and k x v_i (outer
//            product column; v_i is element eidx of v, broadcast);
//   stage 3  MX adder d.S + k.v_i, rounded to MX8 with stochastic rounding;
//   stage 4  the new state is written back to its bank (wb_*) while the dot
//            product unit computes S_t . q into the scalar accumulator.
// So S_t = d (.) S_{t-1} + k v^T and y_t = S_t^T q, per sub-chunk, as in the
// paper. Attention reuses the same units (paper Fig. 10(b)):
//   MODE_SCORE   the read key sub-chunk goes to the dot product with q and is
//                summed into the scalar accumulator entry acc_idx; no write;
//   MODE_ATTEND  the read value sub-chunk is scaled by score v[eidx] in the
//                second multiplier, added (stage 3) to vector accumulator
//                entry acc_idx, and stored there; no DRAM write.
// acc_clr starts a new sum instead of adding to the old one. Accumulators
// are indexed by {side, acc_idx}; the result read port (rr_*) is
// combinational: a scalar read returns 8 consecutive 32-bit entries, a vector
// read one MX8 word. Accumulator sizes, the per-side operand sets and the
// MX8 vector accumulator are this design's own choices.
module spe
  import pimba_pkg::*;
#(
  parameter int ACC_N  = 32,
  parameter int VACC_N = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  input  spe_tag_t    in_tag,
  input  mx8_word_t   rd_data,
  input  mx8_word_t   ops [2][4],
  output logic        wb_valid,
  output logic        wb_side,
  output logic [COL_W-1:0] wb_col,
  output mx8_word_t   wb_data,
  input  logic        rr_side,
  input  logic        rr_vec,
  input  logic [1:0]  rr_idx,
  output logic [WORD_W-1:0] rr_data,
  output logic        busy
);

  localparam int AW = $clog2(ACC_N);
  localparam int VW = (VACC_N > 1) ? $clog2(VACC_N) : 1;

  spe_tag_t  t1, t2, t3;
  mx8_word_t s1, raw2, w3;
  mxw_word_t m1_q, m2_q;

  acc_scalar_t sacc [2][ACC_N];
  mx8_word_t   vacc [2][VACC_N];

  logic [31:0] rnd;
  lfsr #(.W(32)) u_lfsr (.clk(clk), .rst_n(rst_n), .en(step), .state(rnd));

  // ---------------- stage 2: multipliers ----------------
  mx8_word_t m2_a, vbc;
  mxw_word_t m1_d, m2_d;
  always_comb begin
    vbc  = mx8_bcast(ops[t1.side][REG_V], t1.eidx);
    m2_a = (t1.mode == MODE_ATTEND) ? s1 : ops[t1.side][REG_K];
  end

  for (genvar g = 0; g < GROUPS_PER_WORD; g++) begin : g_mul
    mx_multiplier u_decay (.a(ops[t1.side][REG_D][g]), .b(s1[g]),  .y(m1_d[g]));
    mx_multiplier u_outer (.a(m2_a[g]),                 .b(vbc[g]), .y(m2_d[g]));
  end

  // ---------------- stage 3: adder + stochastic rounding ----------------
  mxw_word_t add_b;
  mxs_word_t sum3;
  mx8_word_t q3;
  mx8_word_t vacc_rd;
  always_comb begin
    vacc_rd = vacc[t2.side][VW'(t2.acc_idx)];
    for (int g = 0; g < GROUPS_PER_WORD; g++) begin
      if (t2.mode == MODE_ATTEND)
        add_b[g] = t2.acc_clr ? mxw_group_t'('0) : mx8_to_w(vacc_rd[g]);
      else
        add_b[g] = m1_q[g];
    end
  end

  for (genvar g = 0; g < GROUPS_PER_WORD; g++) begin : g_add
    mx_adder        u_add (.a(add_b[g]), .b(m2_q[g]), .y(sum3[g]));
    mx_sr_quantizer u_sr  (.x(sum3[g]), .rnd(32'({rnd, rnd} >> (16*g))), .y(q3[g]));
  end

  // ---------------- stage 4: dot product ----------------
  acc_scalar_t dp;
  mx_dot_product u_dot (.a(w3), .b(ops[t3.side][REG_Q]), .y(dp));

  assign wb_valid = step && t3.valid && (t3.mode == MODE_SU);
  assign wb_side  = t3.side;
  assign wb_col   = t3.col;
  assign wb_data  = w3;
  assign busy     = t1.valid || t2.valid || t3.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= '0; t2 <= '0; t3 <= '0;
      s1 <= '0; raw2 <= '0; w3 <= '0;
      m1_q <= '0; m2_q <= '0;
      for (int s = 0; s < 2; s++) begin
        for (int i = 0; i < ACC_N; i++)  sacc[s][i] <= '0;
        for (int i = 0; i < VACC_N; i++) vacc[s][i] <= '0;
      end
    end else if (step) begin
      // stage 1
      t1 <= in_tag;
      s1 <= rd_data;
      // stage 2
      t2   <= t1;
      m1_q <= m1_d;
      m2_q <= m2_d;
      raw2 <= s1;
      // stage 3
      t3 <= t2;
      w3 <= (t2.mode == MODE_SCORE) ? raw2 : q3;
      if (t2.valid && t2.mode == MODE_ATTEND) vacc[t2.side][VW'(t2.acc_idx)] <= q3;
      // stage 4
      if (t3.valid && (t3.mode == MODE_SU || t3.mode == MODE_SCORE))
        sacc[t3.side][AW'(t3.acc_idx)] <= t3.acc_clr ? dp : acc_add(sacc[t3.side][AW'(t3.acc_idx)], dp);
    end
  end

  // result read
  always_comb begin
    rr_data = '0;
    if (rr_vec) rr_data = vacc[rr_side][VW'(rr_idx)];
    else
      for (int j = 0; j < 8; j++)
        rr_data[32*j +: 32] = sacc[rr_side][AW'({rr_idx, 3'(j)})];
  end

endmodule
