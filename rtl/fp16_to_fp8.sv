// fp16_to_fp8: rounds an FP16 value to FP8 (1 sign, 5 exponent, 2 mantissa
// bits), round to nearest, ties to even.
//
// Both formats have 5 exponent bits with bias 15, so a normal number keeps
// its exponent and the 10-bit mantissa is rounded to 2 bits; a carry moves to
// the next binade. Inputs below 2^-14 round on the FP8 subnormal grid 2^-16.
// FP8 has no Inf here, so everything rounds to a finite code; only an input
// with exponent field 31 that carries out saturates to 0x7F/0xFF.
// Used to store the cell state. Combinational.
module fp16_to_fp8
  import floatsd8_pkg::*;
(
  input  fp16_t x,
  output fp8_t  y
);

  logic [10:0] sig;         // FP16 significand with hidden bit
  logic        g, st;
  logic [7:0]  r;           // {exponent, mantissa} + rounding, with carry
  logic [4:0]  sub;         // subnormal FP8 significand, 0..4

  always_comb begin
    sig = {(x[14:10] != 5'd0), x[9:0]};
    sub = '0;
    if (x[14:10] != 5'd0) begin
      // normal: keep exponent, round mantissa at bit 8
      g  = x[7];
      st = |x[6:0];
      r  = {1'b0, x[14:8]} + 8'(g && (st || x[8]));
      y  = r[7] ? {x[15], 7'h7F} : {x[15], r[6:0]};
    end else begin
      // FP16 subnormal: value = sig * 2^-24; FP8 grid 2^-16 -> sig >> 8
      g   = sig[7];
      st  = |sig[6:0];
      sub = 5'(sig[10:8]) + 5'(g && (st || sig[8]));
      r   = '0;
      y   = {x[15], 2'b00, sub};
    end
  end

endmodule
