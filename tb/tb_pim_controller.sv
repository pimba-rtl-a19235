// tb_pim_controller: issues commands straight to the controller and checks
// the decode: ACT4 opens exactly the four banks of its bank group with the
// given row; PRECHARGES hits all banks; REG_WRITE enables one SPU or all of
// them; each COMP is a step whose side follows bottom, upper, bottom, ...;
// after the last COMP exactly three drain steps follow, tCCD_L cycles apart,
// and the next burst starts again at the bottom bank; RESULT_READ returns
// the chosen SPU's word one cycle later.
module tb_pim_controller;
  import pimba_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cmd_valid = 0;
  pim_cmd_t cmd;
  logic [15:0] bank_act, bank_pre;
  logic [13:0] bank_act_row;
  logic step, pipe_busy, bubble, reg_side, rr_side, rr_vec, rr_valid;
  spe_tag_t tag;
  logic [7:0] reg_we;
  reg_e reg_sel;
  mx8_word_t reg_wdata;
  logic [1:0] rr_idx;
  logic [255:0] spu_rr_data [8];
  logic [255:0] rr_data;
  int cyc = 0;
  int step_cyc [$];
  logic step_side [$];
  logic step_valid [$];

  pim_controller dut (.clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd(cmd),
    .bank_act(bank_act), .bank_act_row(bank_act_row), .bank_pre(bank_pre),
    .step(step), .tag(tag), .reg_we(reg_we), .reg_side(reg_side), .reg_sel(reg_sel),
    .reg_wdata(reg_wdata), .rr_side(rr_side), .rr_vec(rr_vec), .rr_idx(rr_idx),
    .spu_rr_data(spu_rr_data), .rr_valid(rr_valid), .rr_data(rr_data),
    .pipe_busy(pipe_busy), .bubble(bubble));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (step) begin step_cyc.push_back(cyc); step_side.push_back(tag.side); step_valid.push_back(tag.valid); end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(pim_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    #1;
  endtask
  task automatic idle(int n);
    @(negedge clk); cmd_valid = 0; cmd = '0;
    repeat (n - 1) @(negedge clk);
  endtask

  task automatic comp_burst(int n);
    pim_cmd_t c;
    step_cyc.delete(); step_side.delete(); step_valid.delete();
    for (int i = 0; i < n; i++) begin
      c = '0; c.op = CMD_COMP; c.col = 5'(i / 2);
      issue(c);
      idle(3);
    end
    idle(20);
    checks++;
    if (step_cyc.size() != n + 3) begin failures++; $display("steps %0d", step_cyc.size()); end
    else begin
      for (int i = 0; i < n + 3; i++) begin
        checks++;
        if (i > 0 && step_cyc[i] - step_cyc[i-1] != 4) failures++;
        checks++;
        if (step_valid[i] != (i < n)) failures++;
        if (i < n) begin
          checks++;
          if (step_side[i] != ((i % 2 == 0) ? SIDE_BOTTOM : SIDE_UPPER)) failures++;
        end
      end
    end
    checks++; if (pipe_busy) failures++;
  endtask

  initial begin
    pim_cmd_t c;
    cmd = '0;
    for (int s = 0; s < 8; s++) spu_rr_data[s] = {8{$urandom}};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int bg = 0; bg < 4; bg++) begin
      c = '0; c.op = CMD_ACT4; c.bg = 2'(bg); c.row = 14'(100 + bg);
      issue(c);
      checks++; if (bank_act != (16'hF << (4 * bg)) || bank_act_row != 14'(100 + bg) || bank_pre != 0) failures++;
    end
    idle(2);
    checks++; if (bank_act != 0) failures++;
    c = '0; c.op = CMD_REG_WRITE; c.spu = 3'd3; c.side = 1; c.reg_id = REG_K; c.data = {8{32'h1234_5678}};
    issue(c);
    checks++; if (reg_we != 8'b0000_1000 || reg_side != 1 || reg_sel != REG_K || reg_wdata != c.data) failures++;
    c.bcast = 1; issue(c);
    checks++; if (reg_we != 8'hFF) failures++;
    idle(2);
    checks++; if (reg_we != 0) failures++;
    comp_burst(6);
    comp_burst(5);
    c = '0; c.op = CMD_RESULT_READ; c.spu = 3'd5; c.side = 1; c.rr_vec = 1; c.rr_idx = 2'd2;
    issue(c);
    checks++; if (rr_side != 1 || rr_vec != 1 || rr_idx != 2) failures++;
    idle(1);
    checks++; if (!rr_valid || rr_data != spu_rr_data[5]) failures++;
    c = '0; c.op = CMD_PRECHARGES; issue(c);
    checks++; if (bank_pre != 16'hFFFF) failures++;
    idle(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
