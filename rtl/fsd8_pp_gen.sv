// fsd8_pp_gen: partial product generator of the FloatSD8 MAC (stage 1).
//
// Each FloatSD8 weight has at most two non-zero signed digits, so its product
// with an FP8 input is two shifted copies of the input's 3-bit significand:
// no multiplier array. For pair p, terms[2p] is the product with the MSG digit
// and terms[2p+1] the product with the second-group digit:
//   sign = input sign XOR digit sign
//   exp  = input exponent + digit position + weight exponent - 9
//   sig  = input significand (1.mm, or 0.mm for a subnormal input), left-
//          justified in 11 bits.
// terms[8] carries the FP16 addend (bias or previous partial sum) unchanged.
// A term is marked zero when its digit or its input is zero. Combinational.
module fsd8_pp_gen
  import floatsd8_pkg::*;
(
  input  fp8_t      x     [N_PAIRS],
  input  fsd8_dec_t wd    [N_PAIRS],
  input  fp16_t     addend,
  output term_t     terms [N_TERMS]
);

  function automatic term_t product(fp8_t xi, sd_digit_t d, logic [2:0] wexp);
    term_t t;
    logic [2:0] sig3;
    logic signed [7:0] ex;
    sig3 = {(xi[6:2] != 5'd0), xi[1:0]};
    ex   = (xi[6:2] == 5'd0) ? 8'(FP_EMIN) : 8'(signed'({3'b000, xi[6:2]}) - FP_EXP_BIAS);
    t.nz  = d.nz && (sig3 != 3'd0);
    t.neg = xi[7] ^ d.neg;
    t.exp = ex + 8'(signed'({5'b0, d.pos})) + 8'(signed'({5'b0, wexp})) - 8'(FSD8_EXP_BIAS);
    t.sig = {sig3, 8'b0};
    return t;
  endfunction

  always_comb begin
    for (int p = 0; p < N_PAIRS; p++) begin
      terms[2*p]   = product(x[p], wd[p].hi, wd[p].exp);
      terms[2*p+1] = product(x[p], wd[p].lo, wd[p].exp);
    end
    terms[N_TERMS-1].sig = {(addend[14:10] != 5'd0), addend[9:0]};
    terms[N_TERMS-1].nz  = (addend[14:0] != 15'd0);
    terms[N_TERMS-1].neg = addend[15];
    terms[N_TERMS-1].exp = (addend[14:10] == 5'd0) ? 8'(FP_EMIN)
                         : 8'(signed'({3'b000, addend[14:10]}) - FP_EXP_BIAS);
  end

endmodule
