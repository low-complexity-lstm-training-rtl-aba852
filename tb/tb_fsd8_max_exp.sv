// tb_fsd8_max_exp: random sets of nine terms, some of them zero; the detector
// must return the largest exponent among the non-zero terms and flag whether
// any term is non-zero.
module tb_fsd8_max_exp;
  import floatsd8_pkg::*;

  term_t             terms [N_TERMS];
  logic signed [7:0] max_exp;
  logic              any_nz;
  fsd8_max_exp dut (.terms(terms), .max_exp(max_exp), .any_nz(any_nz));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int best; bit any;
      best = -1000; any = 0;
      for (int i = 0; i < N_TERMS; i++) begin
        terms[i].exp = 8'($urandom_range(0, 60)) - 8'sd30;
        terms[i].nz  = ($urandom_range(0, 3) != 0) && (n % 50 != 0);
        terms[i].neg = 1'($urandom);
        terms[i].sig = 11'($urandom);
        if (terms[i].nz) begin
          any = 1;
          if (int'(terms[i].exp) > best) best = int'(terms[i].exp);
        end
      end
      #1;
      checks++;
      if (any_nz != any || (any && int'(max_exp) != best)) begin
        failures++;
        if (failures < 5) $display("got %0d exp %0d", max_exp, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
