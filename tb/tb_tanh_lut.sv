// tb_tanh_lut: exhaustive check over all 65536 FP16 inputs against tanh
// computed in double precision and rounded to FP8 (nearest even); the sign
// of the input is kept, also for results that round to zero.
module tb_tanh_lut;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  fp16_t x;
  fp8_t  y;
  tanh_lut dut (.x(x), .y(y));

  int checks = 0, failures = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 65536; n++) begin
      real a; fp8_t want;
      x = 16'(n);
      #1;
      a = fp16_val({1'b0, x[14:0]});
      want = {x[15], fp8_rne($tanh(a))[6:0]};
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
