// tanh_lut: tanh of an FP16 input, rounded to FP8 (E5M2).
//
// tanh is odd, so only |x| is looked up and the input's sign is put back.
// The output levels are the 61 non-negative FP8 values up to 1.0, whose FP8
// codes are simply 0..60 (0x3C = 1.0). Threshold j (1..60) is
// atanh((v_{j-1} + v_j) / 2), the |x| at which tanh crosses the midpoint of
// FP8 values j-1 and j, rounded up to the next FP16 value; the FP8 code of
// the result is the number of thresholds that |x| reaches. This is round to
// nearest for every FP16 input; |x| >= 1.7 gives 1.0.
//
// Used for the cell input g_t (inside the gate LUT) and for tanh(c_t). The
// paper names the LUT; its FP8 output and organization are this design's
// choice. Combinational.
module tanh_lut
  import floatsd8_pkg::*;
(
  input  fp16_t x,
  output fp8_t  y
);

  localparam int N_THR = 60;

  localparam logic [15:0] THR [N_THR] = '{
      16'h0081,
      16'h0181,
      16'h0281,
      16'h0381,
      16'h0481,
      16'h0581,
      16'h0681,
      16'h0781,
      16'h0881,
      16'h0981,
      16'h0A81,
      16'h0B81,
      16'h0C81,
      16'h0D81,
      16'h0E81,
      16'h0F81,
      16'h1081,
      16'h1181,
      16'h1281,
      16'h1381,
      16'h1481,
      16'h1581,
      16'h1681,
      16'h1781,
      16'h1881,
      16'h1981,
      16'h1A81,
      16'h1B81,
      16'h1C81,
      16'h1D81,
      16'h1E81,
      16'h1F81,
      16'h2081,
      16'h2181,
      16'h2281,
      16'h2381,
      16'h2481,
      16'h2581,
      16'h2681,
      16'h2781,
      16'h2881,
      16'h2981,
      16'h2A82,
      16'h2B83,
      16'h2C82,
      16'h2D84,
      16'h2E86,
      16'h2F89,
      16'h3088,
      16'h318F,
      16'h3298,
      16'h33A5,
      16'h34A0,
      16'h35BC,
      16'h36E6,
      16'h3812,
      16'h3918,
      16'h3ABF,
      16'h3C8A,
      16'h3EDF
  };

  logic [5:0] level;

  always_comb begin
    level = '0;
    for (int j = 0; j < N_THR; j++)
      if (x[14:0] >= THR[j][14:0]) level = 6'(j + 1);
    y = {x[15], 1'b0, level};
  end

endmodule
