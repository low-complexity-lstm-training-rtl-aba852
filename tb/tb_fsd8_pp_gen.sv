// tb_fsd8_pp_gen: checks the partial product generator on random operands.
// Each of the eight product terms must equal (input) x (one digit of the
// weight) x 2^(exp-9), computed from the weight's value with real numbers,
// the two terms of a pair must add up to x*w, and the ninth term must equal
// the FP16 addend. Zero flags are checked against the values.
module tb_fsd8_pp_gen;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  fp8_t      x  [N_PAIRS];
  fsd8_t     w  [N_PAIRS];
  fsd8_dec_t wd [N_PAIRS];
  fp16_t     addend;
  term_t     terms [N_TERMS];

  for (genvar p = 0; p < N_PAIRS; p++) begin : g_dec
    fsd8_weight_decoder u_dec (.w(w[p]), .dec(wd[p]));
  end
  fsd8_pp_gen dut (.x(x), .wd(wd), .addend(addend), .terms(terms));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real tval(term_t t);
    if (!t.nz) return 0.0;
    return (t.neg ? -1.0 : 1.0) * real'(t.sig) / 1024.0 * pow2(int'(t.exp));
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int p = 0; p < N_PAIRS; p++) begin
        x[p] = 8'($urandom);
        w[p] = 8'($urandom);
      end
      addend = 16'($urandom);
      #1;
      for (int p = 0; p < N_PAIRS; p++) begin
        int hi, lo;
        real s;
        s = (w[p][4] ? -1.0 : 1.0) * pow2(int'(w[p][7:5]) - 9);
        fsd8_digits(w[p][3:0], hi, lo);
        checks++;
        if (tval(terms[2*p]) != fp8_val(x[p]) * real'(hi) * s ||
            tval(terms[2*p+1]) != fp8_val(x[p]) * real'(lo) * s) begin
          failures++;
          if (failures < 5) $display("pair %0d x=%h w=%h: %f %f vs %f %f (%0d %0d %h)", p, x[p], w[p], tval(terms[2*p]), tval(terms[2*p+1]), fp8_val(x[p]) * real'(hi) * s, fp8_val(x[p]) * real'(lo) * s, terms[2*p].exp, terms[2*p].sig, terms[2*p]);
        end
        checks++;
        if ((terms[2*p].nz && terms[2*p].sig == 0) ||
            (tval(terms[2*p]) != 0.0 && !terms[2*p].nz) ||
            (tval(terms[2*p]) + tval(terms[2*p+1]) != fp8_val(x[p]) * fsd8_val(w[p])))
          failures++;
      end
      checks++;
      if (tval(terms[8]) != fp16_val(addend) || terms[8].nz != (fp16_val(addend) != 0.0))
        failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
