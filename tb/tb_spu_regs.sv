// tb_spu_regs: writes random words to all eight operand registers (two sides
// x d, q, k, v) in random order, checks each reads back and that a write
// touches only its own register; checks reset clears them.
module tb_spu_regs;
  import pimba_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0, side = 0;
  reg_e sel = REG_D;
  mx8_word_t wdata, ops [2][4], shadow [2][4];

  spu_regs dut (.clk(clk), .rst_n(rst_n), .we(we), .side(side), .sel(sel),
                .wdata(wdata), .ops(ops));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++) for (int r = 0; r < 4; r++) shadow[s][r] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      side = 1'($urandom); sel = reg_e'(2'($urandom));
      for (int w = 0; w < 8; w++) wdata[w/4][32*(w%4) +: 32] = $urandom;
      we = (i % 3 != 2);
      @(posedge clk); #1;
      if (we) shadow[side][sel] = wdata;
      for (int s = 0; s < 2; s++) for (int r = 0; r < 4; r++) begin
        checks++;
        if (ops[s][r] != shadow[s][r]) failures++;
      end
    end
    we = 0; rst_n = 0; #1;
    for (int s = 0; s < 2; s++) for (int r = 0; r < 4; r++) begin
      checks++; if (ops[s][r] != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
