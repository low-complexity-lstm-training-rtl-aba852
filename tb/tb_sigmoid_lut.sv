// tb_sigmoid_lut: exhaustive check over all 65536 FP16 inputs.
// The reference builds the 42 positive FloatSD8 values <= 0.5 by enumerating
// the format, rounds sigmoid(-|x|) to the nearest of them (real arithmetic),
// and expects y_hi + y_lo = Q for x <= 0 and 1 - Q for x > 0, with y_lo = 0 in
// the first case and y_hi = 1 in the second.
module tb_sigmoid_lut;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  fp16_t x;
  fsd8_t y_hi, y_lo;
  sigmoid_lut dut (.x(x), .y_hi(y_hi), .y_lo(y_lo));

  int checks = 0, failures = 0;
  real lv [$];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 8; e++)
      for (int k = 1; k < 16; k++) begin
        real v; bit dup;
        v = fsd8_val({3'(e), 1'b0, 4'(k)});
        dup = 0;
        foreach (lv[i]) if (lv[i] == v) dup = 1;
        if (!dup && v <= 0.5) lv.push_back(v);
      end
    checks++;
    if (lv.size() != 42) failures++;
    for (int n = 0; n < 65536; n++) begin
      real a, s, q, best, got_v, want;
      x = 16'(n);
      #1;
      a = fp16_val(x); if (a < 0) a = -a;
      s = 1.0 / (1.0 + $exp(a));
      q = lv[0]; best = 10.0;
      foreach (lv[i]) begin
        real d;
        d = (s > lv[i]) ? s - lv[i] : lv[i] - s;
        if (d < best || (d == best && lv[i] < q)) begin best = d; q = lv[i]; end
      end
      got_v = fsd8_val(y_hi) + fsd8_val(y_lo);
      if (x[15] || x[14:0] == 0) want = q; else want = 1.0 - q;
      checks++;
      if (got_v != want ||
          ((x[15] || x[14:0] == 0) ? fsd8_val(y_lo) != 0.0 : fsd8_val(y_hi) != 1.0)) begin
        failures++;
        if (failures < 5) $display("x=%h got %f want %f", x, got_v, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
