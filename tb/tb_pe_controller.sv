// tb_pe_controller: drives the controller with an always-valid stream and a
// 5-cycle write-back model of the MAC. Checks, per accepted chunk, that the
// index follows the chunk-major order, that initial marks chunk 0 and last
// the final chunk, and that in_ready is low exactly when the chunk's item was
// issued fewer than 6 cycles earlier. Several batch sizes
// (1, 3, 5, 6, 8) and chunk counts are used; batches >= 6 must not stall.
module tb_pe_controller;
  localparam int NP = 8, IW = 3;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic [IW:0]   cfg_batch;
  logic [15:0]   cfg_chunks;
  logic          in_valid, in_ready, issue, initial_sel, last;
  logic [IW-1:0] index;
  logic          wb_valid;
  logic [IW-1:0] wb_index;

  pe_controller #(.NUM_PSUM(NP)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, stalls = 0;
  logic [4:0]    wb_v;
  logic [IW-1:0] wb_i [5];
  int last_issue [NP];

  always @(posedge clk) cycle <= cycle + 1;

  // MAC model: write-back 5 cycles after issue
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_v <= '0;
    else begin
      wb_v <= {wb_v[3:0], issue};
      wb_i[0] <= index;
      for (int s = 1; s < 5; s++) wb_i[s] <= wb_i[s-1];
    end
  end
  assign wb_valid = wb_v[4];
  assign wb_index = wb_i[4];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nb, int nc, int reps);
    int st0, t0;
    cfg_batch = (IW+1)'(nb); cfg_chunks = 16'(nc);
    for (int i = 0; i < NP; i++) last_issue[i] = -100;
    st0 = stalls; t0 = cycle;
    for (int r = 0; r < reps; r++)
      for (int c = 0; c < nc; c++)
        for (int b = 0; b < nb; b++) begin
          in_valid = 1;
          #0;
          while (1) begin
            bit want_ready;
            want_ready = (cycle - last_issue[b] >= 6);
            checks++;
            if (in_ready != want_ready || int'(index) != b) begin
              failures++;
              if (failures < 10) $display("nb=%0d c=%0d b=%0d: index=%0d ready=%b expected %b", nb, c, b, index, in_ready, want_ready);
            end
            if (in_ready) break;
            stalls++;
            @(posedge clk); #1;
          end
          checks++;
          if (initial_sel != (c == 0) || last != (c == nc - 1) || !issue) begin
            failures++;
            if (failures < 10) $display("nb=%0d c=%0d: initial=%b last=%b", nb, c, initial_sel, last);
          end
          last_issue[b] = cycle;
          @(posedge clk); #1;
        end
    in_valid = 0;
    checks++;
    if (nb >= 6 && (stalls != st0 || cycle - t0 != nb * nc * reps)) failures++;
    if (nb < 6 && nc > 1 && stalls == st0) failures++;
    repeat (8) @(posedge clk); #1;
  endtask

  initial begin
    in_valid = 0; cfg_batch = 1; cfg_chunks = 1;
    #2 rst_n = 0;
    #20 rst_n = 1;
    @(posedge clk); #1;
    run(8, 4, 2);
    run(6, 3, 2);
    run(5, 3, 1);
    run(3, 4, 2);
    run(1, 5, 1);
    run(2, 1, 3);
    $display("stall cycles=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
