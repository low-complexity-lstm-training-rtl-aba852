// sigmoid_lut: quantized sigmoid as the sum of two FloatSD8 numbers.
//
// The sigmoid is quantized in two halves so that the error is balanced:
//     y = Q(sigmoid(x))          for x <= 0     -> y_hi = Q,  y_lo = 0
//     y = 1 - Q(sigmoid(-x))     for x >  0     -> y_hi = +1, y_lo = -Q
// where Q rounds to the nearest FloatSD8 value. Both halves need only
// Q(sigmoid(-|x|)), which takes one of 42 values in (0, 0.5]: 0.5 down to
// 2^-9. Q never returns 0 (values below 2^-9 clamp to 2^-9), so the largest
// output is 1 - 2^-9.
//
// Table: level L_0 = 0.5 > L_1 > ... > L_41 = 2^-9 are the 42 positive
// FloatSD8 values <= 0.5, listed with their FloatSD8 codes. Entry j >= 1 also
// holds the threshold T_j = ln(1/m_j - 1), m_j = (L_{j-1} + L_j) / 2, the |x|
// at which sigmoid(-|x|) crosses the midpoint, rounded up to the next FP16
// value. For an FP16 input, |x| >= T_j is then exactly sigmoid(-|x|) <= m_j,
// so the output is the correctly rounded level. |x| is compared with all 41
// thresholds at once and the number of thresholds passed selects the level.
// Positive FP16 numbers compare like integers, so each comparator is a 15-bit
// unsigned compare.
//
// The two-region quantization, the FloatSD8 output pair and the 42-level
// depth follow the paper; the threshold-compare organization of the table is
// this design's choice. Combinational.
module sigmoid_lut
  import floatsd8_pkg::*;
(
  input  fp16_t x,
  output fsd8_t y_hi,
  output fsd8_t y_lo
);

  localparam int LEVELS = 42;

  typedef struct packed {
    logic [15:0] thr;    // FP16 threshold on |x| (entry 0: unused)
    fsd8_t       code;   // FloatSD8 code of the level
  } entry_t;

  localparam entry_t TABLE [LEVELS] = '{
      {16'h0000, 8'hE2},
      {16'h2C01, 8'h8C},
      {16'h3205, 8'hA7},
      {16'h3613, 8'hC3},
      {16'h392D, 8'hA5},
      {16'h3AE6, 8'h89},
      {16'h3BD2, 8'h6E},
      {16'h3C3B, 8'hE1},
      {16'h3C91, 8'h6C},
      {16'h3CEA, 8'h87},
      {16'h3D78, 8'hA3},
      {16'h3E4B, 8'h85},
      {16'h3EFD, 8'h69},
      {16'h3F60, 8'h4E},
      {16'h3FA5, 8'hC1},
      {16'h3FEE, 8'h4C},
      {16'h401E, 8'h67},
      {16'h405D, 8'h83},
      {16'h40BB, 8'h65},
      {16'h410D, 8'h49},
      {16'h413A, 8'h2E},
      {16'h415A, 8'hA1},
      {16'h417C, 8'h2C},
      {16'h41A1, 8'h47},
      {16'h41DC, 8'h63},
      {16'h4235, 8'h45},
      {16'h4284, 8'h29},
      {16'h42AF, 8'h0E},
      {16'h42CE, 8'h81},
      {16'h42EF, 8'h0C},
      {16'h4313, 8'h27},
      {16'h434C, 8'h43},
      {16'h43A4, 8'h25},
      {16'h43F0, 8'h09},
      {16'h4415, 8'h61},
      {16'h4436, 8'h07},
      {16'h445B, 8'h23},
      {16'h4486, 8'h05},
      {16'h44BA, 8'h41},
      {16'h44FB, 8'h03},
      {16'h4552, 8'h21},
      {16'h45D5, 8'h01}
  };

  logic [5:0] level;
  fsd8_t      q;

  always_comb begin
    level = '0;
    for (int j = 1; j < LEVELS; j++)
      if (x[14:0] >= TABLE[j].thr[14:0]) level = 6'(j);
    q = TABLE[level].code;
    if (x[15] || x[14:0] == 15'd0) begin      // x <= 0
      y_hi = q;
      y_lo = FSD8_ZERO;
    end else begin                            // x > 0
      y_hi = FSD8_ONE;
      y_lo = {q[7:5], 1'b1, q[3:0]};          // -Q
    end
  end

endmodule
