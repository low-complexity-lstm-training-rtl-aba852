// tb_fsd8_round_norm: random signed sums and window exponents. The normalized
// magnitude must carry its leading one at the MSB and keep the exact value,
// and the rounded significand/exponent must equal the value rounded to 11
// significant bits (nearest, ties to even), computed with real numbers.
module tb_fsd8_round_norm;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  logic signed [SUM_W-1:0] sum;
  logic signed [7:0]       max_exp;
  norm_t                   norm;
  fsd8_round_norm dut (.sum(sum), .max_exp(max_exp), .norm(norm));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      real v, a, q; int e, width;
      width = $urandom_range(1, 27);
      sum = SUM_W'($urandom_range(0, (1 << width) - 1));
      if ($urandom_range(0, 1) == 1) sum = -sum;
      if (n == 0) sum = 0;
      max_exp = 8'($urandom_range(0, 41)) - 8'sd23;
      #1;
      v = real'(sum) * pow2(int'(max_exp) - 23);
      a = (v < 0) ? -v : v;
      checks++;
      if (sum == 0) begin
        if (!norm.zero) failures++;
        continue;
      end
      if (norm.zero || !norm.mant[NORM_W-1] || norm.neg != (v < 0) ||
          real'(norm.mant) * pow2(int'(norm.exp) - (NORM_W - 1)) != a) begin
        failures++;
        if (failures < 5) $display("normalize: sum=%0d", sum);
      end
      e = floor_log2(a);
      q = rne(a / pow2(e - 10));
      if (q >= 2048.0) begin q = 1024.0; e++; end
      checks++;
      if (real'(norm.rsig) != q || int'(norm.rexp) != e) begin
        failures++;
        if (failures < 5) $display("round: sum=%0d got %0d/%0d exp %f/%0d", sum, norm.rsig, norm.rexp, q, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
