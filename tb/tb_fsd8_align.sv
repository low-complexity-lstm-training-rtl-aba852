// tb_fsd8_align: random terms are aligned to the largest exponent. Each output
// must equal the term's value divided by the window LSB 2^(Emax-23),
// truncated toward zero, computed with real numbers.
module tb_fsd8_align;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  term_t                   terms   [N_TERMS];
  logic signed [7:0]       max_exp;
  logic signed [ALIGN_W:0] aligned [N_TERMS];
  fsd8_align dut (.terms(terms), .max_exp(max_exp), .aligned(aligned));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int emax;
      emax = -1000;
      for (int i = 0; i < N_TERMS; i++) begin
        terms[i].exp = 8'($urandom_range(0, 40)) - 8'sd20;
        terms[i].nz  = ($urandom_range(0, 4) != 0);
        terms[i].neg = 1'($urandom);
        terms[i].sig = {1'b1, 10'($urandom)};
        if (terms[i].nz && int'(terms[i].exp) > emax) emax = int'(terms[i].exp);
      end
      if (emax == -1000) emax = 0;
      max_exp = 8'(emax);
      #1;
      for (int i = 0; i < N_TERMS; i++) begin
        real q;
        q = terms[i].nz ? real'(terms[i].sig) / 1024.0 * pow2(int'(terms[i].exp)) / pow2(emax - 23) : 0.0;
        q = $floor(q);
        if (terms[i].neg) q = -q;
        checks++;
        if (real'(aligned[i]) != q) begin
          failures++;
          if (failures < 5) $display("term %0d got %0d exp %f", i, aligned[i], q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
