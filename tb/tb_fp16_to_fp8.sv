// tb_fp16_to_fp8: exhaustive check over all 65536 FP16 inputs against the
// real value rounded to FP8 (nearest even), sign kept.
module tb_fp16_to_fp8;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  fp16_t x;
  fp8_t  y;
  fp16_to_fp8 dut (.x(x), .y(y));

  int checks = 0, failures = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 65536; n++) begin
      fp8_t want;
      x = 16'(n);
      #1;
      want = {x[15], fp8_rne(fp16_val({1'b0, x[14:0]}))[6:0]};
      checks++;
      if (y !== want) begin
        failures++;
        if (failures < 5) $display("x=%h got %h want %h", x, y, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
