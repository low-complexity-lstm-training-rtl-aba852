// tb_fsd8_subnormal: random normalized results over the whole exponent range
// (deep subnormal to overflow). The packed FP16 word must equal the real
// value rounded to FP16 (nearest even, saturating at 65504); exact zero must
// give +0. Counts subnormal, saturated and normal outputs.
module tb_fsd8_subnormal;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  norm_t norm;
  fp16_t result;
  fsd8_subnormal dut (.norm(norm), .result(result));

  int checks = 0, failures = 0, n_sub = 0, n_sat = 0, n_norm = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 6000; n++) begin
      real a, q; int e; logic [15:0] expect_w;
      norm.zero = (n % 100 == 0);
      norm.neg  = 1'($urandom);
      norm.mant = {1'b1, 27'($urandom)};
      if ($urandom_range(0, 1) == 1) norm.mant[15:0] = 16'h8000;  // ties
      norm.exp  = 10'($urandom_range(0, 70)) - 10'sd50;
      a = real'(norm.mant) * pow2(int'(norm.exp) - (NORM_W - 1));
      e = int'(norm.exp);
      q = rne(a / pow2(e - 10));
      if (q >= 2048.0) begin q = 1024.0; e++; end
      norm.rsig = 11'(int'(q));
      norm.rexp = 10'(e);
      #1;
      expect_w = norm.zero ? 16'h0000 : fp16_rne(norm.neg ? -a : a);
      checks++;
      if (result !== expect_w) begin
        failures++;
        if (failures < 5) $display("exp=%0d mant=%h got %h expected %h", norm.exp, norm.mant, result, expect_w);
      end
      if (!norm.zero) begin
        if (result[14:10] == 0) n_sub++;
        else if (result[14:0] == 15'h7BFF) n_sat++;
        else n_norm++;
      end
    end
    checks++;
    if (n_sub == 0 || n_sat == 0 || n_norm == 0) failures++;
    $display("subnormal=%0d saturated=%0d normal=%0d", n_sub, n_sat, n_norm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
