// gate_lut: the activation stage between the four PEs and the cell MAC.
//
// Applies the quantized sigmoid to the input, forget and output gate
// pre-activations (each becomes a pair of FloatSD8 numbers) and tanh to the
// cell-input pre-activation (FP8). The results, the valid bit and the batch
// index are registered: one cycle of latency. The register is this design's
// choice; the paper shows one "Sigmoid / Tanh LUT" block here.
module gate_lut
  import floatsd8_pkg::*;
#(
  parameter int unsigned IDX_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_index,
  input  fp16_t            pre_i,
  input  fp16_t            pre_g,
  input  fp16_t            pre_f,
  input  fp16_t            pre_o,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_index,
  output fsd8_t            i_hi, i_lo,
  output fsd8_t            f_hi, f_lo,
  output fsd8_t            o_hi, o_lo,
  output fp8_t             g
);

  fsd8_t i_hi_c, i_lo_c, f_hi_c, f_lo_c, o_hi_c, o_lo_c;
  fp8_t  g_c;

  sigmoid_lut u_sig_i (.x(pre_i), .y_hi(i_hi_c), .y_lo(i_lo_c));
  sigmoid_lut u_sig_f (.x(pre_f), .y_hi(f_hi_c), .y_lo(f_lo_c));
  sigmoid_lut u_sig_o (.x(pre_o), .y_hi(o_hi_c), .y_lo(o_lo_c));
  tanh_lut    u_tanh_g (.x(pre_g), .y(g_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    out_index <= in_index;
    i_hi <= i_hi_c;  i_lo <= i_lo_c;
    f_hi <= f_hi_c;  f_lo <= f_lo_c;
    o_hi <= o_hi_c;  o_lo <= o_lo_c;
    g    <= g_c;
  end

endmodule
