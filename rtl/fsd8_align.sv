// fsd8_align: alignment shifters of the FloatSD8 MAC (stage 2).
//
// Each term's 11-bit significand is extended by GUARD zero bits and shifted
// right by (max_exp - exp), so that all terms share one fixed-point scale
// whose LSB weighs 2^(max_exp - 10 - GUARD). Bits shifted past the window are
// dropped (truncation toward zero), which is this design's choice of window;
// with 13 guard bits the sum is exact whenever no term lies more than 13
// binades below the largest one. The sign is then applied in two's
// complement. Zero terms give 0. Combinational.
module fsd8_align
  import floatsd8_pkg::*;
(
  input  term_t                    terms   [N_TERMS],
  input  logic signed [7:0]        max_exp,
  output logic signed [ALIGN_W:0]  aligned [N_TERMS]
);

  always_comb begin
    for (int i = 0; i < N_TERMS; i++) begin
      logic [8:0] shamt;
      logic [ALIGN_W-1:0] mag;
      shamt = 9'(max_exp - terms[i].exp);           // >= 0 for non-zero terms
      mag  = {terms[i].sig, {GUARD{1'b0}}};
      if (!terms[i].nz || shamt >= 9'(ALIGN_W)) mag = '0;
      else                                      mag = mag >> shamt;
      aligned[i] = terms[i].neg ? -signed'({1'b0, mag}) : signed'({1'b0, mag});
    end
  end

endmodule
