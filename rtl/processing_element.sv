// processing_element: output-stationary LSTM processing element.
//
// Computes, for each of cfg_batch batch items b,
//     out[b] = bias + sum_k x_b[k] * w[k]
// over cfg_chunks chunks of four FP8 inputs and four FloatSD8 weights. The
// controller picks the partial sum register (index) and, on a dot product's
// first chunk, selects the bias instead of the stored partial sum (initial).
// The FloatSD8 MAC adds four products to that addend; its result goes back
// into the partial sum register and, after the last chunk, to the output.
//
// Interface: chunk-major input stream with valid/ready (see pe_controller).
// out_valid pulses once per finished dot product, with out_index = b, five
// cycles after its last chunk is accepted. Throughput is one chunk per cycle
// when cfg_batch >= 6. The datapath is the paper's PE diagram; the handshake
// and the output valid/index are this design's additions.
module processing_element
  import floatsd8_pkg::*;
#(
  parameter int unsigned NUM_PSUM = 8,
  parameter int unsigned IDX_W    = $clog2(NUM_PSUM)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IDX_W:0]   cfg_batch,
  input  logic [15:0]      cfg_chunks,
  input  logic             in_valid,
  output logic             in_ready,
  input  fp8_t             x [N_PAIRS],
  input  fsd8_t            w [N_PAIRS],
  input  fp16_t            bias,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_index,
  output fp16_t            out_data
);

  logic             issue, initial_sel, last;
  logic [IDX_W-1:0] index;
  fp16_t            psum, addend;
  logic             mac_valid;
  fp16_t            mac_result;
  logic [IDX_W:0]   mac_tag;        // {last, index}

  pe_controller #(.NUM_PSUM(NUM_PSUM), .IDX_W(IDX_W)) u_ctrl (
    .clk, .rst_n, .cfg_batch, .cfg_chunks, .in_valid, .in_ready,
    .issue, .index, .initial_sel, .last,
    .wb_valid(mac_valid), .wb_index(mac_tag[IDX_W-1:0])
  );

  psum_regs #(.NUM_PSUM(NUM_PSUM), .IDX_W(IDX_W)) u_psum (
    .clk, .rst_n, .we(mac_valid), .waddr(mac_tag[IDX_W-1:0]), .wdata(mac_result),
    .raddr(index), .rdata(psum)
  );

  // Fig. 7 mux: input 1 = Bias, input 0 = partial sum ("Recurrent Input")
  assign addend = initial_sel ? bias : psum;

  floatsd8_mac #(.TAG_W(IDX_W + 1)) u_mac (
    .clk, .rst_n, .in_valid(issue), .x, .w, .addend, .in_tag({last, index}),
    .out_valid(mac_valid), .result(mac_result), .out_tag(mac_tag)
  );

  assign out_valid = mac_valid && mac_tag[IDX_W];
  assign out_index = mac_tag[IDX_W-1:0];
  assign out_data  = mac_result;

endmodule
