// psum_regs: the partial sum registers of a processing element.
//
// NUM_PSUM FP16 registers, one per batch item. The MAC result is written on
// the clock edge when we is high; the read port is combinational, so a value
// written at the end of cycle t can be read in cycle t+1. All registers reset
// to +0. The register count is this design's choice (the paper asks only for
// more than five to keep the MAC busy).
module psum_regs #(
  parameter int unsigned NUM_PSUM = 8,
  parameter int unsigned IDX_W    = $clog2(NUM_PSUM)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [IDX_W-1:0] waddr,
  input  logic [15:0]      wdata,
  input  logic [IDX_W-1:0] raddr,
  output logic [15:0]      rdata
);

  logic [15:0] regs [NUM_PSUM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_PSUM; i++) regs[i] <= 16'h0000;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata = regs[raddr];

endmodule
