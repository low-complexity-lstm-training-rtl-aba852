// tb_lstm_unit: end-to-end test of the LSTM neuron circuit at its default
// size (8 partial-sum registers / batch slots).
//
// One LSTM neuron with 7 external inputs is run over several time steps for
// a batch of sequences: each step streams [x_t ; h_{t-1}] (8 FP8 elements, 2
// chunks) per batch item, waits for all h_t, rounds them to FP8 and feeds them
// back in the next step. The reference recomputes every step with real
// arithmetic: gate pre-activations as chained mac_ref calls, the quantized
// sigmoid by nearest-level search over the FloatSD8 values (1 - Q(sigmoid(-x))
// for x > 0), tanh rounded to FP8, c_t and h_t through mac_ref, and c stored
// as FP8. Runs:
//   A  batch 8, 4 steps, after clear_state: full rate, must never stall
//   B  batch 3, 3 steps, after clear_state: must stall (MAC wait)
//   C  batch 6, 2 steps, continuing B's cell states for items 0..2 without a
//      clear (so c_{t-1} != 0 is read at the first step)
// Counted: stalls, sigmoid inputs on each side of zero, clears, h latency
// (17 cycles from the last chunk), full-rate streaming.
module tb_lstm_unit;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  localparam int NP = 8, IW = 3, NX = 7, NE = NX + 1, NC = 2;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic [IW:0]   cfg_batch;
  logic [15:0]   cfg_chunks;
  logic          clear_state, in_valid, in_ready;
  fp8_t          x   [N_PAIRS];
  fsd8_t         w_i [N_PAIRS], w_g [N_PAIRS], w_f [N_PAIRS], w_o [N_PAIRS];
  fp16_t         b_i, b_g, b_f, b_o;
  logic          h_valid;
  logic [IW-1:0] h_index;
  fp16_t         h;

  lstm_unit dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n_stall = 0, n_sig_pos = 0, n_sig_neg = 0, n_clear = 0, n_lat = 0, n_full = 0, n_cprev = 0;
  fsd8_t W [4][NE];                // gate rows: 0 i, 1 g, 2 f, 3 o
  fp16_t B [4];
  fp8_t  c_ref [NP];
  fp8_t  h_fb [NP];                // h_{t-1} as FP8
  fp16_t h_exp [NP];
  bit    h_got [NP];
  int    last_cyc [NP];
  real   lv [$];

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid && !in_ready) n_stall++;

  always @(posedge clk) begin
    if (h_valid) begin
      checks++;
      h_got[h_index] = 1;
      if (h !== h_exp[h_index]) begin
        failures++;
        $display("item %0d: h=%h expected %h", h_index, h, h_exp[h_index]);
      end
      checks++;
      if (cycle - last_cyc[h_index] != 17) begin
        failures++;
        $display("item %0d: latency %0d", h_index, cycle - last_cyc[h_index]);
      end else n_lat++;
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference pieces ----
  function automatic fsd8_t fsd8_code(real v);     // positive v, largest exponent
    for (int e = 7; e >= 0; e--)
      for (int k = 1; k < 16; k++)
        if (fsd8_val({3'(e), 1'b0, 4'(k)}) == v) return {3'(e), 1'b0, 4'(k)};
    return 8'h00;
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

  // ---- one time step for items 0..nb-1 ----
  task automatic step(int nb, bit full_rate);
    fp8_t  xs [NP][NE];
    int t0, t1, st0;
    for (int b = 0; b < nb; b++) begin
      fp16_t pre [4];
      fsd8_t ih, il, fh, fl, oh, ol;
      fp8_t  g8, tc;
      fp16_t c16;
      for (int k = 0; k < NX; k++) xs[b][k] = {1'($urandom), 5'($urandom_range(10, 16)), 2'($urandom)};
      xs[b][NX] = h_fb[b];
      for (int gt = 0; gt < 4; gt++) begin
        pre[gt] = B[gt];
        for (int c = 0; c < NC; c++) begin
          fp8_t xv [4]; fsd8_t wv [4];
          for (int k = 0; k < 4; k++) begin xv[k] = xs[b][4*c+k]; wv[k] = W[gt][4*c+k]; end
          pre[gt] = mac_ref(xv, wv, pre[gt]);
        end
        if (gt != 1) begin
          if (pre[gt][15] || pre[gt][14:0] == 0) n_sig_neg++; else n_sig_pos++;
        end
      end
      sig_pair(pre[0], ih, il);
      sig_pair(pre[2], fh, fl);
      sig_pair(pre[3], oh, ol);
      g8 = tanh8(pre[1]);
      if (c_ref[b][6:0] != 0) n_cprev++;
      c16 = mac_ref('{c_ref[b], c_ref[b], g8, g8}, '{fh, fl, ih, il}, 16'h0000);
      c_ref[b] = to8(c16);
      tc = tanh8(c16);
      h_exp[b] = mac_ref('{tc, tc, 8'h00, 8'h00}, '{oh, ol, 8'h00, 8'h00}, 16'h0000);
      h_got[b] = 0;
    end
    cfg_batch = (IW+1)'(nb); cfg_chunks = 16'(NC);
    st0 = n_stall;
    t0 = cycle;
    for (int c = 0; c < NC; c++)
      for (int b = 0; b < nb; b++) begin
        for (int k = 0; k < 4; k++) begin
          x[k] = xs[b][4*c+k];
          w_i[k] = W[0][4*c+k]; w_g[k] = W[1][4*c+k]; w_f[k] = W[2][4*c+k]; w_o[k] = W[3][4*c+k];
        end
        in_valid = 1;
        #0;
        while (!in_ready) begin @(posedge clk); #1; end
        last_cyc[b] = cycle;
        @(posedge clk); #1;
      end
    in_valid = 0;
    t1 = cycle;
    repeat (22) @(posedge clk);
    #1;
    for (int b = 0; b < nb; b++) begin
      checks++;
      if (!h_got[b]) begin failures++; $display("item %0d: no h", b); end
      h_fb[b] = to8(h_exp[b]);
    end
    if (full_rate) begin
      checks++;
      if (t1 - t0 != nb * NC || n_stall != st0) begin
        failures++;
        $display("batch %0d not at full rate: %0d cycles", nb, t1 - t0);
      end else n_full++;
    end
  endtask

  task automatic clear();
    clear_state = 1;
    @(posedge clk); #1;
    clear_state = 0;
    n_clear++;
    for (int b = 0; b < NP; b++) begin c_ref[b] = 8'h00; h_fb[b] = 8'h00; end
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
    for (int gt = 0; gt < 4; gt++) begin
      for (int k = 0; k < NE; k++) W[gt][k] = {3'($urandom_range(2, 6)), 5'($urandom)};
      B[gt] = {1'($urandom), 5'($urandom_range(10, 15)), 10'($urandom)};
    end
    b_i = B[0]; b_g = B[1]; b_f = B[2]; b_o = B[3];
    in_valid = 0; clear_state = 0; cfg_batch = 1; cfg_chunks = 1;
    for (int k = 0; k < 4; k++) begin x[k] = 0; w_i[k] = 0; w_g[k] = 0; w_f[k] = 0; w_o[k] = 0; end
    for (int b = 0; b < NP; b++) begin c_ref[b] = 0; h_fb[b] = 0; last_cyc[b] = 0; end
    #2 rst_n = 0;
    #20 rst_n = 1;
    @(posedge clk); #1;
    clear();
    for (int t = 0; t < 4; t++) step(8, 1);          // A
    clear();
    for (int t = 0; t < 3; t++) step(3, 0);          // B
    for (int t = 0; t < 2; t++) step(6, 1);          // C
    $display("stall cycles=%0d sigmoid x>0: %0d x<=0: %0d clears=%0d latency ok=%0d full-rate steps=%0d nonzero c_prev=%0d",
             n_stall, n_sig_pos, n_sig_neg, n_clear, n_lat, n_full, n_cprev);
    checks++;
    if (n_stall == 0 || n_sig_pos == 0 || n_sig_neg == 0 || n_clear == 0 || n_lat == 0 || n_full == 0 || n_cprev == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
