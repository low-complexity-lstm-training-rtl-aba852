// fsd8_round_norm: round & normalization stage of the FloatSD8 MAC (stage 4).
//
// Takes the signed sum of the adder tree, whose LSB weighs
// 2^(max_exp - 10 - GUARD). It forms the magnitude, finds the leading one
// (exponent of the result), shifts the magnitude so the leading one sits at
// the MSB, and rounds to an 11-bit FP16 significand with round-to-nearest,
// ties-to-even. A carry out of the rounding bumps the exponent. The unrounded
// normalized magnitude is passed on as well, so that the subnormal stage can
// round a tiny result once, at its own position. Combinational.
module fsd8_round_norm
  import floatsd8_pkg::*;
(
  input  logic signed [SUM_W-1:0] sum,
  input  logic signed [7:0]       max_exp,
  output norm_t                   norm
);

  logic [NORM_W-1:0] mag;
  logic [4:0]        lead;          // position of the leading one
  logic              guard, sticky, rup;
  logic [SIG_W:0]    rsum;

  always_comb begin
    mag  = sum[SUM_W-1] ? NORM_W'(-sum) : NORM_W'(sum);
    lead = '0;
    for (int i = 0; i < NORM_W; i++) if (mag[i]) lead = 5'(i);

    norm.zero = (mag == '0);
    norm.neg  = sum[SUM_W-1];
    norm.mant = mag << (5'(NORM_W - 1) - lead);
    norm.exp  = 10'(max_exp) - 10'(SIG_W - 1 + GUARD) + 10'(lead);

    guard  = norm.mant[NORM_W-SIG_W-1];
    sticky = |norm.mant[NORM_W-SIG_W-2:0];
    rup    = guard && (sticky || norm.mant[NORM_W-SIG_W]);
    rsum   = {1'b0, norm.mant[NORM_W-1 -: SIG_W]} + (SIG_W+1)'(rup);
    if (rsum[SIG_W]) begin
      norm.rsig = {1'b1, {(SIG_W-1){1'b0}}};
      norm.rexp = norm.exp + 10'sd1;
    end else begin
      norm.rsig = rsum[SIG_W-1:0];
      norm.rexp = norm.exp;
    end
  end

endmodule
