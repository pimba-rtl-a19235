// tb_pim_cmd_scheduler: queues the command sequence of one state-update
// round (four ACT4 with REG_WRITEs between them, a burst of COMPs,
// PRECHARGES, RESULT_READs, then the next ACT4) with the queue always full,
// and records the cycle each command leaves. An independent calculation of
// the earliest legal cycle from Table 1 timing (in-order, one command per
// cycle) must match every issue cycle exactly; REG_WRITE must be seen
// overlapping a tFAW window and RESULT_READ overlapping tRP.
module tb_pim_cmd_scheduler;
  import pimba_pkg::*;
  localparam int TFAW = 30, TRP = 14, TRAS = 34, TCCD_L = 4, TWR = 16, TRTP_L = 6, TRCD = 14;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, ovl_regw, ovl_rr;
  pim_cmd_t in_cmd, out_cmd;
  pim_cmd_t q [$];
  int issued_at [$];
  cmd_e issued_op [$];
  int cyc = 0, n_ovl_regw = 0, n_ovl_rr = 0;

  pim_cmd_scheduler dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .in_cmd(in_cmd), .out_valid(out_valid), .out_cmd(out_cmd), .ovl_regw(ovl_regw), .ovl_rr(ovl_rr));

  always #5 clk = ~clk;

  assign in_valid = rst_n && (q.size() > 0);
  assign in_cmd   = (q.size() > 0) ? q[0] : '0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin issued_at.push_back(cyc); issued_op.push_back(out_cmd.op); end
    if (ovl_regw) n_ovl_regw++;
    if (ovl_rr) n_ovl_rr++;
    if (in_valid && in_ready) void'(q.pop_front());
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pim_cmd_t mk(cmd_e op);
    pim_cmd_t c = '0;
    c.op = op;
    return c;
  endfunction

  initial begin
    cmd_e seq [$];
    int last_act, last_pre, last_col, last_comp, t, prev;
    for (int bg = 0; bg < 4; bg++) begin
      seq.push_back(CMD_ACT4);
      repeat (bg < 3 ? 4 : 2) seq.push_back(CMD_REG_WRITE);
    end
    repeat (16) seq.push_back(CMD_COMP);
    seq.push_back(CMD_PRECHARGES);
    repeat (4) seq.push_back(CMD_RESULT_READ);
    seq.push_back(CMD_ACT4);
    foreach (seq[i]) q.push_back(mk(seq[i]));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (400) @(posedge clk);
    checks++;
    if (issued_at.size() != seq.size()) begin failures++; $display("issued %0d of %0d", issued_at.size(), seq.size()); end
    else begin
      // reference: earliest legal cycle, relative to the first issue
      last_act = -1000; last_pre = -1000; last_col = -1000; last_comp = -1000; prev = -1;
      for (int i = 0; i < seq.size(); i++) begin
        t = prev + 1;
        case (seq[i])
          CMD_ACT4: begin
            if (last_act + TFAW > t) t = last_act + TFAW;
            if (last_pre + TRP > t)  t = last_pre + TRP;
          end
          CMD_REG_WRITE: if (last_col + TCCD_L > t) t = last_col + TCCD_L;
          CMD_COMP: begin
            if (last_col + TCCD_L > t) t = last_col + TCCD_L;
            if (last_act + TRCD > t)   t = last_act + TRCD;
          end
          CMD_RESULT_READ: begin
            if (last_col + TCCD_L > t) t = last_col + TCCD_L;
            if (last_comp + 3 * TCCD_L + TWR > t) t = last_comp + 3 * TCCD_L + TWR;
          end
          CMD_PRECHARGES: begin
            if (last_act + TRAS > t) t = last_act + TRAS;
            if (last_comp + 3 * TCCD_L + TWR > t) t = last_comp + 3 * TCCD_L + TWR;
            if (last_comp + TRTP_L > t) t = last_comp + TRTP_L;
          end
          default: ;
        endcase
        if (i == 0) t = 0;
        case (seq[i])
          CMD_ACT4: last_act = t;
          CMD_PRECHARGES: last_pre = t;
          CMD_COMP: begin last_comp = t; last_col = t; end
          default: last_col = t;
        endcase
        prev = t;
        checks++;
        if (issued_op[i] != seq[i] || issued_at[i] - issued_at[0] != t) begin
          failures++;
          $display("cmd %0d (%s) at %0d want %0d", i, seq[i].name(), issued_at[i] - issued_at[0], t);
        end
      end
    end
    checks++; if (n_ovl_regw == 0) failures++;
    checks++; if (n_ovl_rr == 0) failures++;
    $display("overlapped REG_WRITE %0d, overlapped RESULT_READ %0d", n_ovl_regw, n_ovl_rr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
