// tb_fsd8_csa_tree: the carry-save tree must return the exact sum of nine
// random signed 25-bit terms (including all-maximum and all-minimum sets).
module tb_fsd8_csa_tree;
  import floatsd8_pkg::*;

  logic signed [ALIGN_W:0]  aligned [N_TERMS];
  logic signed [SUM_W-1:0]  sum;
  fsd8_csa_tree dut (.aligned(aligned), .sum(sum));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      longint ref_sum;
      ref_sum = 0;
      for (int i = 0; i < N_TERMS; i++) begin
        int m;
        m = int'($urandom_range(0, (1 << ALIGN_W) - 1));
        if (n == 0) m = (1 << ALIGN_W) - 1;
        aligned[i] = (n == 1 || $urandom_range(0, 1) == 1) ? -(ALIGN_W+1)'(m) : (ALIGN_W+1)'(m);
        ref_sum += longint'(aligned[i]);
      end
      #1;
      checks++;
      if (longint'(sum) != ref_sum) begin
        failures++;
        if (failures < 5) $display("got %0d exp %0d", sum, ref_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
