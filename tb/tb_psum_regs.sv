// tb_psum_regs: random writes and reads of the partial sum registers against
// a shadow array; checks reset to zero, write-then-read in the next cycle and
// that a cycle without write enable changes nothing.
module tb_psum_regs;
  localparam int NP = 8, IW = 3;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic          we;
  logic [IW-1:0] waddr, raddr;
  logic [15:0]   wdata, rdata;

  psum_regs #(.NUM_PSUM(NP)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] shadow [NP];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    #2 rst_n = 0;
    #20 rst_n = 1;
    for (int i = 0; i < NP; i++) begin
      shadow[i] = 0;
      raddr = IW'(i); #1;
      checks++;
      if (rdata !== 16'h0000) failures++;
    end
    for (int n = 0; n < 2000; n++) begin
      @(posedge clk); #1;
      we = 1'($urandom); waddr = IW'($urandom); wdata = 16'($urandom);
      raddr = IW'($urandom);
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin
        failures++;
        if (failures < 5) $display("read %0d got %h expected %h", raddr, rdata, shadow[raddr]);
      end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1 we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
