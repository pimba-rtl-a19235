// tb_lfsr: compares 2000 steps of the LFSR with a bit-by-bit model of the
// polynomial x^32 + x^22 + x^2 + x + 1 (Galois form), checks that the state
// holds while en is low, never becomes zero, and reloads the seed on reset.
module tb_lfsr;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] state, ref_s;

  lfsr dut (.clk(clk), .rst_n(rst_n), .en(en), .state(state));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_step(logic [31:0] s);
    logic [31:0] n;
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = s[0];
    n[21] = s[22] ^ s[0];
    n[1]  = s[2]  ^ s[0];
    n[0]  = s[1]  ^ s[0];
    return n;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    ref_s = 32'hACE1_2468;
    checks++; if (state != ref_s) failures++;
    for (int i = 0; i < 2000; i++) begin
      en = (i % 5 != 4);
      @(posedge clk); #1;
      if (en) ref_s = ref_step(ref_s);
      checks++;
      if (state != ref_s || state == 0) begin
        failures++;
        if (failures < 5) $display("step %0d got %h want %h", i, state, ref_s);
      end
    end
    rst_n = 0; #1;
    checks++; if (state != 32'hACE1_2468) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
