// cell_state_mem: the cell state memory ("c register") of the LSTM unit.
//
// One FP8 cell state per batch item. The cell MAC reads c_{t-1} of the item
// it works on (combinational read) and c_t is written back at the clock edge
// when we is high. clear zeroes every entry at the next edge (start of a new
// sequence, c_0 = 0) and has priority over a write. Asynchronous reset also
// zeroes the memory. FP8 storage, the depth and the clear are this design's
// choices; the paper specifies a memory for the cell state.
module cell_state_mem
  import floatsd8_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned IDX_W = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             we,
  input  logic [IDX_W-1:0] waddr,
  input  fp8_t             wdata,
  input  logic [IDX_W-1:0] raddr,
  output fp8_t             rdata
);

  fp8_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= 8'h00;
    end else if (clear) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= 8'h00;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem[raddr];

endmodule
