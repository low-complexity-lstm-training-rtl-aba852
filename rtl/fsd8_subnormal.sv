// fsd8_subnormal: subnormal handling and FP16 packing of the FloatSD8 MAC
// (stage 5).
//
//   exact zero            -> +0
//   rounded exponent > 15 -> saturate to +-65504 (no Inf in this design)
//   exponent >= -14       -> normal: the stage-4 rounded significand
//   exponent <  -14       -> subnormal: the unrounded normalized magnitude is
//                            shifted to the 2^-24 grid and rounded to nearest
//                            even there; a carry into 2^-14 yields the
//                            smallest normal, which the packing gives for free.
// Combinational.
module fsd8_subnormal
  import floatsd8_pkg::*;
(
  input  norm_t norm,
  output fp16_t result
);

  logic [9:0]        shift;       // right shift of mant onto the 2^-24 grid
  logic [9:0]        kept;        // subnormal significand before rounding
  logic              guard, sticky;
  logic [10:0]       rounded;     // at most 2^10 (smallest normal)

  always_comb begin
    // mant / 2^(NORM_W-1) * 2^exp on a grid of 2^-24: shift = NORM_W-1-(exp+24)
    shift  = 10'(NORM_W - 1 - 24) - 10'(norm.exp);
    kept   = '0;
    guard  = 1'b0;
    sticky = 1'b0;
    if (shift <= 10'(NORM_W)) begin
      for (int i = 0; i < NORM_W; i++) begin
        if (10'(i) >= shift) begin
          if (i - int'(shift) < 10) kept[i - int'(shift)] = norm.mant[i];
        end
        else if (10'(i) + 1 == shift) guard  = norm.mant[i];
        else                          sticky = sticky | norm.mant[i];
      end
    end else begin
      sticky = |norm.mant;
    end
    rounded = 11'(kept) + 11'(guard && (sticky || kept[0]));

    if (norm.zero)
      result = 16'h0000;
    else if (norm.rexp > 10'sd15)
      result = {norm.neg, FP16_MAX[14:0]};
    else if (norm.exp >= 10'(FP_EMIN))
      result = {norm.neg, 5'(norm.rexp + 10'(FP_EXP_BIAS)), norm.rsig[SIG_W-2:0]};
    else
      result = {norm.neg, 4'b0000, rounded};
  end

endmodule
