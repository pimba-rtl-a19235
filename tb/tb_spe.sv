// tb_spe: drives the SPE pipeline directly, one step every 4 clocks.
//  * state update: 8 iterations alternating bottom/upper side; every
//    write-back must appear exactly 3 steps after its read, with its own
//    side and column, and hold d.*S + k*v[eidx] within 2 ulp; the scalar
//    accumulator must hold the dot product of that new state with q.
//  * score: two key sub-chunks summed into one entry (acc_clr on the first),
//    run twice on the same entry
//    must give dot(K0,q) + dot(K1,q) and cause no write-back.
//  * attend: three value sub-chunks scaled by scores and summed into a
//    vector entry must give sum s_m V_m within 4 ulp.
module tb_spe;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, step = 0;
  spe_tag_t  in_tag;
  mx8_word_t rd_data, ops [2][4];
  logic wb_valid, wb_side, busy;
  logic [4:0] wb_col;
  mx8_word_t wb_data;
  logic rr_side = 0, rr_vec = 0;
  logic [1:0] rr_idx = 0;
  logic [255:0] rr_data;
  int nstep = 0;

  spe dut (.clk(clk), .rst_n(rst_n), .step(step), .in_tag(in_tag), .rd_data(rd_data),
           .ops(ops), .wb_valid(wb_valid), .wb_side(wb_side), .wb_col(wb_col),
           .wb_data(wb_data), .rr_side(rr_side), .rr_vec(rr_vec), .rr_idx(rr_idx),
           .rr_data(rr_data), .busy(busy));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // iteration log
  mx8_word_t st_in [8];
  int        st_step [8];
  logic      st_side [8];
  int        st_col [8];
  mx8_word_t st_out [8];
  int        n_wb = 0;

  always @(posedge clk) if (wb_valid) begin
    automatic int i = n_wb;
    n_wb++;
    checks++;
    if (i >= 8 || nstep != st_step[i] + 3 || wb_side != st_side[i] || int'(wb_col) != st_col[i]) begin
      failures++;
      $display("write-back %0d at step %0d side %0d col %0d", i, nstep, wb_side, wb_col);
    end else st_out[i] = wb_data;
  end

  task automatic do_step(spe_tag_t t, mx8_word_t d);
    @(negedge clk);
    in_tag = t; rd_data = d; step = 1;
    @(posedge clk); #1;
    nstep++;
    step = 0; in_tag = '0;
    repeat (3) @(posedge clk);
  endtask

  function automatic acc_scalar_t rd_scalar(int idx);
    return acc_scalar_t'(rr_data[32*(idx%8) +: 32]);
  endfunction

  initial begin
    spe_tag_t t;
    real want [32];
    in_tag = '0; rd_data = '0;
    for (int s = 0; s < 2; s++) for (int r = 0; r < 4; r++) ops[s][r] = rand_word(122, 128);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---- state update ----
    for (int i = 0; i < 8; i++) begin
      t = '0; t.valid = 1; t.mode = MODE_SU; t.side = (i % 2 == 0);
      t.col = 5'(i / 2); t.eidx = 5'(3 * i); t.acc_idx = 5'(8 + i); t.acc_clr = 1;
      st_in[i] = rand_word(122, 128); st_step[i] = nstep; st_side[i] = t.side; st_col[i] = i / 2;
      do_step(t, st_in[i]);
    end
    repeat (3) do_step('0, '0);
    checks++; if (n_wb != 8) begin failures++; $display("write-backs %0d", n_wb); end
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 32; j++)
        want[j] = su_ref(st_in[i], ops[st_side[i]][REG_D], ops[st_side[i]][REG_K],
                         ops[st_side[i]][REG_V], 3 * i, j);
      checks++;
      if (word_err(st_out[i], want, 2.0) != 0) begin failures++; $display("state %0d wrong", i); end
      rr_side = st_side[i]; rr_vec = 0; rr_idx = 2'((8 + i) / 8); #1;
      checks++;
      if (abs_r(acc_val(rd_scalar(8 + i)) - dot_ref(st_out[i], ops[st_side[i]][REG_Q]))
          > 2.0 * p2(int'(rd_scalar(8 + i).exp) - 12)) begin
        failures++; $display("dot %0d got %g want %g", i, acc_val(rd_scalar(8 + i)),
                             dot_ref(st_out[i], ops[st_side[i]][REG_Q]));
      end
    end

    // ---- score, twice into the same entry: acc_clr must drop the old sum ----
    for (int rep = 0; rep < 2; rep++) begin
      mx8_word_t k0, k1;
      real w;
      k0 = rand_word(122, 128); k1 = rand_word(122, 128);
      t = '0; t.valid = 1; t.mode = MODE_SCORE; t.side = SIDE_BOTTOM; t.acc_idx = 5'd2; t.acc_clr = 1;
      do_step(t, k0);
      t.acc_clr = 0; t.col = 1;
      do_step(t, k1);
      repeat (3) do_step('0, '0);
      w = dot_ref(k0, ops[1][REG_Q]) + dot_ref(k1, ops[1][REG_Q]);
      rr_side = 1; rr_vec = 0; rr_idx = 0; #1;
      checks++;
      if (abs_r(acc_val(rd_scalar(2)) - w) > 4.0 * p2(int'(rd_scalar(2).exp) - 12)) begin
        failures++; $display("score got %g want %g", acc_val(rd_scalar(2)), w);
      end
      checks++; if (n_wb != 8) failures++;
    end

    // ---- attend ----
    begin
      mx8_word_t vv [3];
      for (int m = 0; m < 3; m++) vv[m] = rand_word(124, 126);
      for (int m = 0; m < 3; m++) begin
        t = '0; t.valid = 1; t.mode = MODE_ATTEND; t.side = SIDE_UPPER; t.col = 5'(m);
        t.eidx = 5'(m + 10); t.acc_idx = 5'd1; t.acc_clr = (m == 0);
        do_step(t, vv[m]);
      end
      repeat (3) do_step('0, '0);
      for (int j = 0; j < 32; j++) begin
        want[j] = 0.0;
        for (int m = 0; m < 3; m++) want[j] += word_val(ops[0][REG_V], m + 10) * word_val(vv[m], j);
      end
      rr_side = 0; rr_vec = 1; rr_idx = 1; #1;
      checks++;
      if (word_err(mx8_word_t'(rr_data), want, 4.0) != 0) begin failures++; $display("attend wrong"); end
    end
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
