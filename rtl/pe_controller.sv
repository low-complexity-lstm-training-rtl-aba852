// pe_controller: sequencing of one output-stationary processing element.
//
// The PE works on a batch of cfg_batch independent dot products (one per
// partial sum register) that share the same weights. Operands arrive as
// 4-element chunks in chunk-major order: chunk 0 of items 0..B-1, then chunk 1
// of items 0..B-1, and so on for cfg_chunks chunks. For each accepted chunk
// the controller gives
//   index   - the batch item, i.e. the partial sum register to use,
//   initial - high on chunk 0: the MAC adds the bias instead of a stored sum,
//   last    - high on the last chunk: the MAC result is a finished output.
// The MAC needs 5 cycles and the result is written back one cycle later, so a
// chunk that reads a partial sum still in flight must wait. A scoreboard bit
// per register is set on issue and cleared on write-back; in_ready is low
// while the chunk's register is busy. This holds for initial chunks too: one
// bit can track only one operation in flight per register. With
// cfg_batch >= 6 the stream never stalls (one chunk per cycle); smaller
// batches wait.
// Counters return to item 0, chunk 0 after the last chunk of the last item.
// Index/initial and the stall-for-five-cycles behaviour follow the paper; the
// chunk order, the scoreboard and the handshake are this design's choices.
module pe_controller #(
  parameter int unsigned NUM_PSUM = 8,
  parameter int unsigned IDX_W    = $clog2(NUM_PSUM)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IDX_W:0]   cfg_batch,    // 1..NUM_PSUM
  input  logic [15:0]      cfg_chunks,   // >= 1
  input  logic             in_valid,
  output logic             in_ready,
  output logic             issue,
  output logic [IDX_W-1:0] index,
  output logic             initial_sel,
  output logic             last,
  input  logic             wb_valid,
  input  logic [IDX_W-1:0] wb_index
);

  logic [IDX_W-1:0]    idx_q;
  logic [15:0]         chunk_q;
  logic [NUM_PSUM-1:0] busy_q;

  assign index       = idx_q;
  assign initial_sel = (chunk_q == 16'd0);
  assign last        = (chunk_q == cfg_chunks - 16'd1);
  assign in_ready    = !busy_q[idx_q];
  assign issue       = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q   <= '0;
      chunk_q <= '0;
      busy_q  <= '0;
    end else begin
      if (wb_valid) busy_q[wb_index] <= 1'b0;
      if (issue) begin
        busy_q[idx_q] <= 1'b1;
        if ({1'b0, idx_q} == cfg_batch - 1'b1) begin
          idx_q   <= '0;
          chunk_q <= last ? 16'd0 : chunk_q + 16'd1;
        end else begin
          idx_q <= idx_q + 1'b1;
        end
      end
    end
  end

  // configuration rule: the batch must fit the partial sum registers
  always_ff @(posedge clk) begin
    if (in_valid)
      assert (cfg_batch != '0 && cfg_batch <= (IDX_W+1)'(NUM_PSUM) && cfg_chunks != 16'd0)
        else $error("pe_controller: invalid configuration");
  end

endmodule
