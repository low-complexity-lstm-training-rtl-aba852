// floatsd8_mac: five-stage pipelined FloatSD8 multiply-accumulate unit.
//
// Computes  result = round_FP16( addend + sum_{p=0..3} x[p] * w[p] )
// for four FP8 inputs x, four FloatSD8 weights w and one FP16 addend (the
// bias or the previous partial sum). Each weight has at most two non-zero
// signed digits, so the four products are eight shifted copies of the inputs'
// 3-bit significands; together with the addend, nine terms are summed.
//
// Pipeline (one register after each stage, LATENCY = 5 cycles):
//   1  weight decoder, partial product generator, max exponent detector
//   2  alignment shifters (24-bit window below the largest exponent)
//   3  Wallace tree of 3:2 carry-save adders and a final adder
//   4  leading-one detection, normalization, round to nearest even
//   5  subnormal handling, overflow saturation, FP16 packing
//
// Interface: operands with in_valid in cycle t give out_valid/result in cycle
// t+5. A new operation may start every cycle. in_tag rides along unchanged
// (the PE uses it for the batch index, the LSTM unit for o_t). The stage
// split follows the paper's MAC block diagram; the window width, the
// valid/tag pipeline and the reset behaviour are this design's choices.
module floatsd8_mac
  import floatsd8_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp8_t             x      [N_PAIRS],
  input  fsd8_t            w      [N_PAIRS],
  input  fp16_t            addend,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fp16_t            result,
  output logic [TAG_W-1:0] out_tag
);

  localparam int LATENCY = 5;

  // ---- stage 1: decode, partial products, max exponent ----
  fsd8_dec_t         wd [N_PAIRS];
  term_t             terms_c [N_TERMS];
  logic signed [7:0] max_exp_c;
  logic              any_nz_c;

  for (genvar p = 0; p < N_PAIRS; p++) begin : g_dec
    fsd8_weight_decoder u_dec (.w(w[p]), .dec(wd[p]));
  end
  fsd8_pp_gen  u_ppg (.x(x), .wd(wd), .addend(addend), .terms(terms_c));
  fsd8_max_exp u_mex (.terms(terms_c), .max_exp(max_exp_c), .any_nz(any_nz_c));

  term_t             s1_terms [N_TERMS];
  logic signed [7:0] s1_max_exp;

  // ---- stage 2: alignment ----
  logic signed [ALIGN_W:0] aligned_c [N_TERMS];
  fsd8_align u_aln (.terms(s1_terms), .max_exp(s1_max_exp), .aligned(aligned_c));

  logic signed [ALIGN_W:0] s2_aligned [N_TERMS];
  logic signed [7:0]       s2_max_exp;

  // ---- stage 3: Wallace tree ----
  logic signed [SUM_W-1:0] sum_c;
  fsd8_csa_tree u_csa (.aligned(s2_aligned), .sum(sum_c));

  logic signed [SUM_W-1:0] s3_sum;
  logic signed [7:0]       s3_max_exp;

  // ---- stage 4: round & normalize ----
  norm_t norm_c;
  fsd8_round_norm u_rn (.sum(s3_sum), .max_exp(s3_max_exp), .norm(norm_c));

  norm_t s4_norm;

  // ---- stage 5: subnormal handling ----
  fp16_t result_c;
  fsd8_subnormal u_sub (.norm(s4_norm), .result(result_c));

  // valid / tag shift register, one entry per stage
  logic [LATENCY-1:0] vld;
  logic [TAG_W-1:0]   tag [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
    end else begin
      vld <= {vld[LATENCY-2:0], in_valid};
    end
  end

  always_ff @(posedge clk) begin
    tag[0] <= in_tag;
    for (int s = 1; s < LATENCY; s++) tag[s] <= tag[s-1];
    s1_terms   <= terms_c;
    s1_max_exp <= any_nz_c ? max_exp_c : 8'sd0;
    s2_aligned <= aligned_c;
    s2_max_exp <= s1_max_exp;
    s3_sum     <= sum_c;
    s3_max_exp <= s2_max_exp;
    s4_norm    <= norm_c;
    result     <= result_c;
  end

  assign out_valid = vld[LATENCY-1];
  assign out_tag   = tag[LATENCY-1];

endmodule
