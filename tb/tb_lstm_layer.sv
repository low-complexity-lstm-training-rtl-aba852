// tb_lstm_layer: a small LSTM inference workload on the neuron circuit.
//
// A layer of H = 8 neurons is built from 8 lstm_unit instances that share the
// input chunk stream and the handshake; each unit has its own weight rows and
// biases. Each time step streams [x_t ; h_{t-1}] (E = 24 inputs + 8 fed-back
// outputs = 32 FP8 elements = 8 chunks of 4) for a batch of 8 sequences, so
// every unit keeps 8 partial sums in flight and runs at full rate. The h_t of
// all neurons are rounded to FP8 and fed back at the next step, as an LSTM
// layer does. A sequence of T = 12 steps is run.
//
// Two things are checked:
//   1. every h_t is bit-exact against a reference that repeats the circuit's
//      arithmetic with real numbers (mac_ref for all products and sums, the
//      FloatSD8-quantized sigmoid, tanh rounded to FP8, c kept as FP8);
//   2. the layer tracks an unquantized LSTM (same FloatSD8 weights and FP8
//      inputs, but exact sigmoid/tanh, real-valued sums, c and h kept as
//      reals). The mean absolute error of h over the run must stay below
//      0.05 and the largest below 0.25. These bounds are sanity limits chosen
//      for this test (FP8 E5M2 alone carries up to 12.5% relative error), not
//      figures from the source design.
// Weights and biases are drawn uniformly from +-0.5 and rounded to the
// nearest FloatSD8 / FP16 value; inputs are uniform in +-1 rounded to FP8.
// The full-rate stream (no stall for batch 8) is checked for every step.
module tb_lstm_layer;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  localparam int NP = 8, IW = 3, H = 8, E = 24, NE = E + H, NC = NE / 4, T = 12;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic [IW:0]   cfg_batch;
  logic [15:0]   cfg_chunks;
  logic          clear_state, in_valid;
  logic          rdy   [H];
  fp8_t          x     [N_PAIRS];
  fsd8_t         w_i   [H][N_PAIRS], w_g [H][N_PAIRS], w_f [H][N_PAIRS], w_o [H][N_PAIRS];
  fp16_t         b_i   [H], b_g [H], b_f [H], b_o [H];
  logic          h_valid [H];
  logic [IW-1:0] h_index [H];
  fp16_t         h       [H];

  for (genvar n = 0; n < H; n++) begin : g_neuron
    lstm_unit u (
      .clk, .rst_n, .cfg_batch, .cfg_chunks, .clear_state, .in_valid,
      .in_ready (rdy[n]), .x,
      .w_i (w_i[n]), .w_g (w_g[n]), .w_f (w_f[n]), .w_o (w_o[n]),
      .b_i (b_i[n]), .b_g (b_g[n]), .b_f (b_f[n]), .b_o (b_o[n]),
      .h_valid (h_valid[n]), .h_index (h_index[n]), .h (h[n])
    );
  end

  logic in_ready;
  always_comb begin
    in_ready = 1'b1;
    for (int n = 0; n < H; n++) in_ready &= rdy[n];
  end

  int    checks = 0, failures = 0, cycle = 0, n_h = 0;
  fsd8_t W [H][4][NE];             // per neuron, gate rows: 0 i, 1 g, 2 f, 3 o
  fp16_t B [H][4];
  fp8_t  c_ref [H][NP];
  fp8_t  h_fb  [NP][H];            // h_{t-1} as FP8
  fp16_t h_exp [H][NP];
  real   c_fl  [H][NP], h_fl [NP][H];
  real   err_sum = 0.0, err_max = 0.0;
  int    err_n = 0;
  real   lv [$];

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk)
    for (int n = 0; n < H; n++)
      if (h_valid[n]) begin
        checks++;
        n_h++;
        if (h[n] !== h_exp[n][h_index[n]]) begin
          failures++;
          $display("neuron %0d item %0d: h=%h expected %h", n, h_index[n], h[n], h_exp[n][h_index[n]]);
        end
      end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference pieces (circuit arithmetic) ----
  function automatic fsd8_t fsd8_code(real v);     // positive v, largest exponent
    for (int e = 7; e >= 0; e--)
      for (int k = 1; k < 16; k++)
        if (fsd8_val({3'(e), 1'b0, 4'(k)}) == v) return {3'(e), 1'b0, 4'(k)};
    return 8'h00;
  endfunction

  function automatic fsd8_t fsd8_nearest(real v);  // nearest FloatSD8 code
    fsd8_t best = 8'h00;
    real   bd = (v < 0) ? -v : v;
    for (int c = 0; c < 256; c++) begin
      real d;
      d = fsd8_val(8'(c)) - v;
      if (d < 0) d = -d;
      if (d < bd) begin bd = d; best = 8'(c); end
    end
    return best;
  endfunction

  function automatic void sig_pair(fp16_t pre, output fsd8_t hi, output fsd8_t lo);
    real a, s, q, best;
    a = fp16_val(pre); if (a < 0) a = -a;
    s = 1.0 / (1.0 + $exp(a));
    q = lv[0]; best = 10.0;
    foreach (lv[i]) begin
      real d;
      d = (s > lv[i]) ? s - lv[i] : lv[i] - s;
      if (d < best || (d == best && lv[i] < q)) begin best = d; q = lv[i]; end
    end
    if (pre[15] || pre[14:0] == 0) begin hi = fsd8_code(q); lo = 8'h00; end
    else begin hi = fsd8_code(1.0); lo = fsd8_code(q) | 8'h10; end
  endfunction

  function automatic fp8_t tanh8(fp16_t v);
    return {v[15], fp8_rne($tanh(fp16_val({1'b0, v[14:0]})))[6:0]};
  endfunction

  function automatic fp8_t to8(fp16_t v);
    return {v[15], fp8_rne(fp16_val({1'b0, v[14:0]}))[6:0]};
  endfunction

  function automatic real sigm(real v);
    return 1.0 / (1.0 + $exp(-v));
  endfunction

  function automatic real urand(real a);           // uniform in [-a, a]
    return a * (2.0 * real'($urandom_range(0, 1000000)) / 1000000.0 - 1.0);
  endfunction

  // ---- one time step of the layer for all NP sequences ----
  task automatic step(int t);
    fp8_t xs [NP][NE];
    real  xr [NP][NE];
    real  hn [H][NP];
    int   t0, h0;
    for (int b = 0; b < NP; b++) begin
      for (int k = 0; k < E; k++) begin
        xs[b][k] = fp8_rne(urand(1.0));
        xr[b][k] = fp8_val(xs[b][k]);
      end
      for (int n = 0; n < H; n++) begin
        xs[b][E+n] = h_fb[b][n];
        xr[b][E+n] = h_fl[b][n];
      end
    end
    // circuit reference and float model
    for (int n = 0; n < H; n++)
      for (int b = 0; b < NP; b++) begin
        fp16_t pre [4];
        real   pf  [4];
        fsd8_t ih, il, fh, fl, oh, ol;
        fp8_t  g8, tc;
        fp16_t c16;
        real   d;
        for (int gt = 0; gt < 4; gt++) begin
          pre[gt] = B[n][gt];
          pf[gt]  = fp16_val(B[n][gt]);
          for (int c = 0; c < NC; c++) begin
            fp8_t xv [4]; fsd8_t wv [4];
            for (int k = 0; k < 4; k++) begin xv[k] = xs[b][4*c+k]; wv[k] = W[n][gt][4*c+k]; end
            pre[gt] = mac_ref(xv, wv, pre[gt]);
          end
          for (int k = 0; k < NE; k++) pf[gt] += xr[b][k] * fsd8_val(W[n][gt][k]);
        end
        sig_pair(pre[0], ih, il);
        sig_pair(pre[2], fh, fl);
        sig_pair(pre[3], oh, ol);
        g8 = tanh8(pre[1]);
        c16 = mac_ref('{c_ref[n][b], c_ref[n][b], g8, g8}, '{fh, fl, ih, il}, 16'h0000);
        c_ref[n][b] = to8(c16);
        tc = tanh8(c16);
        h_exp[n][b] = mac_ref('{tc, tc, 8'h00, 8'h00}, '{oh, ol, 8'h00, 8'h00}, 16'h0000);
        c_fl[n][b] = sigm(pf[2]) * c_fl[n][b] + sigm(pf[0]) * $tanh(pf[1]);
        hn[n][b] = sigm(pf[3]) * $tanh(c_fl[n][b]);
        d = fp16_val(h_exp[n][b]) - hn[n][b];
        if (d < 0) d = -d;
        err_sum += d; err_n++;
        if (d > err_max) err_max = d;
      end
    // stream the chunks, chunk-major
    h0 = n_h;
    t0 = cycle;
    for (int c = 0; c < NC; c++)
      for (int b = 0; b < NP; b++) begin
        for (int k = 0; k < 4; k++) begin
          x[k] = xs[b][4*c+k];
          for (int n = 0; n < H; n++) begin
            w_i[n][k] = W[n][0][4*c+k]; w_g[n][k] = W[n][1][4*c+k];
            w_f[n][k] = W[n][2][4*c+k]; w_o[n][k] = W[n][3][4*c+k];
          end
        end
        in_valid = 1;
        #0;
        while (!in_ready) begin @(posedge clk); #1; end
        @(posedge clk); #1;
      end
    in_valid = 0;
    checks++;
    if (cycle - t0 != NC * NP) begin
      failures++;
      $display("step %0d: %0d cycles to stream, expected %0d", t, cycle - t0, NC * NP);
    end
    repeat (22) @(posedge clk);
    #1;
    checks++;
    if (n_h - h0 != H * NP) begin
      failures++;
      $display("step %0d: %0d outputs, expected %0d", t, n_h - h0, H * NP);
    end
    for (int b = 0; b < NP; b++)
      for (int n = 0; n < H; n++) begin
        h_fb[b][n] = to8(h_exp[n][b]);
        h_fl[b][n] = hn[n][b];
      end
  endtask

  initial begin
    for (int e = 0; e < 8; e++)
      for (int k = 1; k < 16; k++) begin
        real v; bit dup;
        v = fsd8_val({3'(e), 1'b0, 4'(k)});
        dup = 0;
        foreach (lv[i]) if (lv[i] == v) dup = 1;
        if (!dup && v <= 0.5) lv.push_back(v);
      end
    for (int n = 0; n < H; n++)
      for (int gt = 0; gt < 4; gt++) begin
        for (int k = 0; k < NE; k++) W[n][gt][k] = fsd8_nearest(urand(0.5));
        B[n][gt] = fp16_rne(urand(0.5));
      end
    for (int n = 0; n < H; n++) begin
      b_i[n] = B[n][0]; b_g[n] = B[n][1]; b_f[n] = B[n][2]; b_o[n] = B[n][3];
      for (int b = 0; b < NP; b++) begin c_ref[n][b] = 0; c_fl[n][b] = 0.0; h_fb[b][n] = 0; h_fl[b][n] = 0.0; end
    end
    in_valid = 0; clear_state = 0;
    cfg_batch = (IW+1)'(NP); cfg_chunks = 16'(NC);
    for (int k = 0; k < 4; k++) begin
      x[k] = 0;
      for (int n = 0; n < H; n++) begin w_i[n][k] = 0; w_g[n][k] = 0; w_f[n][k] = 0; w_o[n][k] = 0; end
    end
    #2 rst_n = 0;
    #20 rst_n = 1;
    @(posedge clk); #1;
    clear_state = 1;
    @(posedge clk); #1;
    clear_state = 0;
    for (int t = 0; t < T; t++) step(t);
    $display("h vs unquantized LSTM over %0d outputs: mean |err| = %f, max |err| = %f",
             err_n, err_sum / err_n, err_max);
    checks++;
    if (err_sum / err_n > 0.05 || err_max > 0.25) begin
      failures++;
      $display("layer does not track the unquantized LSTM");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
