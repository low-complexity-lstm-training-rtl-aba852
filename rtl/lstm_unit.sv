// lstm_unit: FloatSD8 LSTM neuron circuit (top level).
//
// Computes one LSTM neuron for a batch of up to NUM_PSUM sequences:
//   i,f,o = sigmoid(W x + b)   g = tanh(W x + b)     (x = [x_t ; h_{t-1}])
//   c_t = f * c_{t-1} + i * g   h_t = o * tanh(c_t)
// Dataflow:
//   four processing elements (gates i, g, f, o) share the input chunk stream
//   and each take their own weight rows and bias; their FP16 pre-activations
//   -> gate_lut (sigmoid as two FloatSD8 numbers for i, f, o; tanh as FP8
//      for g), one register
//   -> cell MAC: (c_{t-1}, f_hi) + (c_{t-1}, f_lo) + (g, i_hi) + (g, i_lo),
//      5 cycles; c_{t-1} comes from the cell state memory as FP8 and c_t is
//      written back rounded to FP8; o_t travels along as the MAC's tag
//   -> tanh LUT on the FP16 c_t, one register
//   -> output MAC: (tanh c_t, o_hi) + (tanh c_t, o_lo), 5 cycles -> h_t (FP16)
// Because the gate values are FloatSD8 pairs, both element-wise products are
// ordinary FloatSD8 MAC operations.
//
// Interface: the caller streams cfg_chunks chunks of four FP8 elements of
// [x_t ; h_{t-1}] per batch item (chunk-major, valid/ready), with the matching
// FloatSD8 weights of each gate; it must feed h_{t-1} back itself (rounded to
// FP8), after h_valid returned it. h_valid/h_index/h appear 17 cycles after
// the last chunk of an item is accepted (5 PE + 1 LUT + 5 + 1 + 5).
// clear_state zeroes all cell states before a new set of sequences.
// The block structure follows the paper's LSTM unit diagram; operand order,
// FP8 cell storage, pipeline registers and the handshake are this design's.
module lstm_unit
  import floatsd8_pkg::*;
#(
  parameter int unsigned NUM_PSUM = 8,
  parameter int unsigned IDX_W    = $clog2(NUM_PSUM)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IDX_W:0]   cfg_batch,
  input  logic [15:0]      cfg_chunks,
  input  logic             clear_state,
  input  logic             in_valid,
  output logic             in_ready,
  input  fp8_t             x   [N_PAIRS],
  input  fsd8_t            w_i [N_PAIRS],
  input  fsd8_t            w_g [N_PAIRS],
  input  fsd8_t            w_f [N_PAIRS],
  input  fsd8_t            w_o [N_PAIRS],
  input  fp16_t            b_i,
  input  fp16_t            b_g,
  input  fp16_t            b_f,
  input  fp16_t            b_o,
  output logic             h_valid,
  output logic [IDX_W-1:0] h_index,
  output fp16_t            h
);

  // ---- four processing elements, in lock-step ----
  logic [3:0]       pe_ready, pe_valid;
  logic [IDX_W-1:0] pe_index [4];
  fp16_t            pre [4];             // i, g, f, o
  logic             pe_in_valid;

  assign in_ready    = &pe_ready;
  assign pe_in_valid = in_valid && in_ready;

  processing_element #(.NUM_PSUM(NUM_PSUM), .IDX_W(IDX_W)) u_pe_i (
    .clk, .rst_n, .cfg_batch, .cfg_chunks, .in_valid(pe_in_valid), .in_ready(pe_ready[0]),
    .x, .w(w_i), .bias(b_i), .out_valid(pe_valid[0]), .out_index(pe_index[0]), .out_data(pre[0]));
  processing_element #(.NUM_PSUM(NUM_PSUM), .IDX_W(IDX_W)) u_pe_g (
    .clk, .rst_n, .cfg_batch, .cfg_chunks, .in_valid(pe_in_valid), .in_ready(pe_ready[1]),
    .x, .w(w_g), .bias(b_g), .out_valid(pe_valid[1]), .out_index(pe_index[1]), .out_data(pre[1]));
  processing_element #(.NUM_PSUM(NUM_PSUM), .IDX_W(IDX_W)) u_pe_f (
    .clk, .rst_n, .cfg_batch, .cfg_chunks, .in_valid(pe_in_valid), .in_ready(pe_ready[2]),
    .x, .w(w_f), .bias(b_f), .out_valid(pe_valid[2]), .out_index(pe_index[2]), .out_data(pre[2]));
  processing_element #(.NUM_PSUM(NUM_PSUM), .IDX_W(IDX_W)) u_pe_o (
    .clk, .rst_n, .cfg_batch, .cfg_chunks, .in_valid(pe_in_valid), .in_ready(pe_ready[3]),
    .x, .w(w_o), .bias(b_o), .out_valid(pe_valid[3]), .out_index(pe_index[3]), .out_data(pre[3]));

  // the four controllers see the same stream, so they stay in lock-step
  always_ff @(posedge clk) begin
    if (pe_valid[0] || pe_valid != 4'b0000)
      assert (pe_valid == 4'b1111 && pe_index[1] == pe_index[0] &&
              pe_index[2] == pe_index[0] && pe_index[3] == pe_index[0])
        else $error("lstm_unit: processing elements out of step");
  end

  // ---- sigmoid / tanh LUT ----
  logic             gl_valid;
  logic [IDX_W-1:0] gl_index;
  fsd8_t            i_hi, i_lo, f_hi, f_lo, o_hi, o_lo;
  fp8_t             g;

  gate_lut #(.IDX_W(IDX_W)) u_gate_lut (
    .clk, .rst_n, .in_valid(pe_valid[0]), .in_index(pe_index[0]),
    .pre_i(pre[0]), .pre_g(pre[1]), .pre_f(pre[2]), .pre_o(pre[3]),
    .out_valid(gl_valid), .out_index(gl_index),
    .i_hi, .i_lo, .f_hi, .f_lo, .o_hi, .o_lo, .g);

  // ---- cell state MAC: c_t = f * c_{t-1} + i * g ----
  localparam int CTAG_W = IDX_W + 16;    // {index, o_hi, o_lo}
  fp8_t              c_prev, c_store;
  logic              c_valid;
  fp16_t             c_t;
  logic [CTAG_W-1:0] c_tag;
  fp8_t              cm_x [N_PAIRS];
  fsd8_t             cm_w [N_PAIRS];

  assign cm_x = '{c_prev, c_prev, g, g};
  assign cm_w = '{f_hi, f_lo, i_hi, i_lo};

  floatsd8_mac #(.TAG_W(CTAG_W)) u_cell_mac (
    .clk, .rst_n, .in_valid(gl_valid), .x(cm_x), .w(cm_w), .addend(16'h0000),
    .in_tag({gl_index, o_hi, o_lo}),
    .out_valid(c_valid), .result(c_t), .out_tag(c_tag));

  fp16_to_fp8 u_c_quant (.x(c_t), .y(c_store));

  cell_state_mem #(.DEPTH(NUM_PSUM), .IDX_W(IDX_W)) u_c_reg (
    .clk, .rst_n, .clear(clear_state), .we(c_valid), .waddr(c_tag[CTAG_W-1 -: IDX_W]),
    .wdata(c_store), .raddr(gl_index), .rdata(c_prev));

  // ---- tanh LUT on c_t, one register ----
  fp8_t             tc_c, tc;
  logic             tc_valid;
  logic [IDX_W-1:0] tc_index;
  fsd8_t            tc_o_hi, tc_o_lo;

  tanh_lut u_tanh_c (.x(c_t), .y(tc_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tc_valid <= 1'b0;
    else        tc_valid <= c_valid;
  end

  always_ff @(posedge clk) begin
    tc       <= tc_c;
    tc_index <= c_tag[CTAG_W-1 -: IDX_W];
    tc_o_hi  <= c_tag[15:8];
    tc_o_lo  <= c_tag[7:0];
  end

  // ---- output MAC: h_t = o * tanh(c_t) ----
  fp8_t  hm_x [N_PAIRS];
  fsd8_t hm_w [N_PAIRS];

  assign hm_x = '{tc, tc, 8'h00, 8'h00};
  assign hm_w = '{tc_o_hi, tc_o_lo, FSD8_ZERO, FSD8_ZERO};

  floatsd8_mac #(.TAG_W(IDX_W)) u_out_mac (
    .clk, .rst_n, .in_valid(tc_valid), .x(hm_x), .w(hm_w), .addend(16'h0000),
    .in_tag(tc_index), .out_valid(h_valid), .result(h), .out_tag(h_index));

endmodule
