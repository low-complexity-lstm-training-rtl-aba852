// tb_cell_state_mem: random writes/reads against a shadow array, plus clear
// (which must zero every entry and win over a simultaneous write).
module tb_cell_state_mem;
  localparam int D = 8, IW = 3;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic          clear, we;
  logic [IW-1:0] waddr, raddr;
  logic [7:0]    wdata, rdata;

  cell_state_mem #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, clears = 0;
  logic [7:0] shadow [D];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; we = 0; waddr = 0; raddr = 0; wdata = 0;
    #2 rst_n = 0;
    #20 rst_n = 1;
    for (int i = 0; i < D; i++) shadow[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk); #1;
      we = 1'($urandom); waddr = IW'($urandom); wdata = 8'($urandom);
      clear = ($urandom_range(0, 40) == 0);
      raddr = IW'($urandom);
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin
        failures++;
        if (failures < 5) $display("read %0d got %h expected %h", raddr, rdata, shadow[raddr]);
      end
      @(posedge clk);
      if (clear) begin
        for (int i = 0; i < D; i++) shadow[i] = 0;
        clears++;
      end else if (we) shadow[waddr] = wdata;
      #1 we = 0; clear = 0;
    end
    checks++;
    if (clears == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
