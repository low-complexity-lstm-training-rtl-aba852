// tb_fsd8_weight_decoder: exhaustive check of the FloatSD8 weight decoder.
// For all 256 codes, the two decoded digits times 2^(exp-9) must equal the
// weight's value, the MSG digit must sit at positions 2..4 and the second-
// group digit at 0..1, and a zero digit must be flagged as zero.
module tb_fsd8_weight_decoder;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  fsd8_t     w;
  fsd8_dec_t dec;
  fsd8_weight_decoder dut (.w(w), .dec(dec));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real dig(sd_digit_t d);
    if (!d.nz) return 0.0;
    return (d.neg ? -1.0 : 1.0) * pow2(int'(d.pos));
  endfunction

  initial begin
    for (int c = 0; c < 256; c++) begin
      real v;
      w = 8'(c);
      #1;
      v = (dig(dec.hi) + dig(dec.lo)) * pow2(int'(dec.exp) - 9);
      checks++;
      if (v != fsd8_val(w)) begin
        failures++;
        $display("code %h: decoded %f expected %f", w, v, fsd8_val(w));
      end
      checks++;
      if ((dec.hi.nz && (dec.hi.pos < 2 || dec.hi.pos > 4)) || (dec.lo.nz && dec.lo.pos > 1))
        failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
