// tb_mx_dot_product: random 256-bit MX8 word pairs; the scalar result must
// match the real dot product of the 32 decoded element pairs, to within the
// precision lost when the smaller group sum is aligned (two units of the
// result's last place).
module tb_mx_dot_product;
  import pimba_pkg::*;
  import mx_ref_pkg::*;
  int checks = 0, failures = 0;
  mx8_word_t a, b;
  acc_scalar_t y;

  mx_dot_product dut (.a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      automatic real want = 0.0, got;
      a = rand_word(118, 134);
      b = rand_word(118, 134);
      if (it % 5 == 0) a[1] = '0;
      #1;
      for (int j = 0; j < 32; j++) want += word_val(a, j) * word_val(b, j);
      got = acc_val(y);
      checks++;
      if (abs_r(got - want) > 2.0 * p2(int'(y.exp) - 12)) begin
        failures++;
        if (failures < 10) $display("it %0d got %g want %g", it, got, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
