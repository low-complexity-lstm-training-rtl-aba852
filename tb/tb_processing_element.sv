// tb_processing_element: runs batched dot products through the PE.
// Each batch item b gets its own random FP8 input vector; all items share
// the random FloatSD8 weight vector and the bias. The expected output of item
// b is the chain acc = mac_ref(chunk 0, bias), acc = mac_ref(chunk j, acc),
// i.e. one FP16 rounding per chunk. Three configurations are run:
//   batch 8, 6 chunks  - must take exactly batch*chunks cycles (no stall),
//   batch 6, 3 chunks  - the smallest batch at full rate,
//   batch 3, 4 chunks  - must stall; each item's chunks must be >= 6 cycles
//                        apart (5-cycle MAC plus the write-back).
module tb_processing_element;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  localparam int NP = 8;
  localparam int IW = 3;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic [IW:0]   cfg_batch;
  logic [15:0]   cfg_chunks;
  logic          in_valid, in_ready;
  fp8_t          x [N_PAIRS];
  fsd8_t         w [N_PAIRS];
  fp16_t         bias;
  logic          out_valid;
  logic [IW-1:0] out_index;
  fp16_t         out_data;

  processing_element #(.NUM_PSUM(NP)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, stalls = 0, outputs = 0;
  fp16_t expect_out [NP];
  bit    got [NP];

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid && !in_ready) stalls++;
  always @(posedge clk) begin
    if (out_valid) begin
      checks++; outputs++;
      got[out_index] = 1;
      if (out_data !== expect_out[out_index]) begin
        failures++;
        $display("item %0d: got %h expected %h", out_index, out_data, expect_out[out_index]);
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nb, int nc, bit expect_full_rate);
    fp8_t  xs [NP][16][4];
    fsd8_t ws [16][4];
    fp16_t b;
    int t0, t1, stalls0;
    int last_issue [NP];
    b = 16'($urandom) & 16'hBFFF;           // |bias| < 2
    for (int c = 0; c < nc; c++)
      for (int k = 0; k < 4; k++) begin
        ws[c][k] = 8'($urandom);
        for (int i = 0; i < nb; i++) xs[i][c][k] = {1'($urandom), 5'($urandom_range(8, 18)), 2'($urandom)};
      end
    for (int i = 0; i < nb; i++) begin
      fp16_t acc; fp8_t xv[4]; fsd8_t wv[4];
      acc = b;
      for (int c = 0; c < nc; c++) begin
        xv = xs[i][c]; wv = ws[c];
        acc = mac_ref(xv, wv, acc);
      end
      expect_out[i] = acc;
      got[i] = 0;
      last_issue[i] = -100;
    end
    cfg_batch = (IW+1)'(nb); cfg_chunks = 16'(nc);
    stalls0 = stalls;
    @(posedge clk); #1;
    t0 = cycle;
    for (int c = 0; c < nc; c++)
      for (int i = 0; i < nb; i++) begin
        x = xs[i][c]; w = ws[c]; bias = b; in_valid = 1;
        #0;
        while (!in_ready) begin @(posedge clk); #1; end
        if (c > 0) begin
          checks++;
          if (cycle - last_issue[i] < 6) begin
            failures++;
            $display("item %0d reissued after %0d cycles", i, cycle - last_issue[i]);
          end
        end
        last_issue[i] = cycle;
        @(posedge clk); #1;
      end
    in_valid = 0;
    t1 = cycle;
    repeat (10) @(posedge clk);
    #1;
    for (int i = 0; i < nb; i++) begin
      checks++;
      if (!got[i]) begin failures++; $display("item %0d: no output", i); end
    end
    checks++;
    if (expect_full_rate && (t1 - t0 != nb * nc || stalls != stalls0)) begin
      failures++;
      $display("batch %0d: %0d cycles for %0d chunks", nb, t1 - t0, nb * nc);
    end
    if (!expect_full_rate && stalls == stalls0) begin
      failures++;
      $display("batch %0d: no stall", nb);
    end
    $display("batch %0d chunks %0d: %0d cycles, %0d stall cycles", nb, nc, t1 - t0, stalls - stalls0);
  endtask

  initial begin
    in_valid = 0; bias = 0; cfg_batch = 1; cfg_chunks = 1;
    for (int k = 0; k < 4; k++) begin x[k] = 0; w[k] = 0; end
    #2 rst_n = 0;
    #20 rst_n = 1;
    run(8, 6, 1);
    run(6, 3, 1);
    run(3, 4, 0);
    run(8, 16, 1);
    checks++;
    if (stalls == 0) failures++;
    $display("outputs=%0d stall cycles=%0d", outputs, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
