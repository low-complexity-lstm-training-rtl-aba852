// tb_floatsd8_mac: self-checking testbench of the five-stage FloatSD8 MAC.
// Streams random and directed operand sets (one per cycle, with random
// bubbles), compares every result with the real-number reference mac_ref and
// checks that each result appears exactly 5 cycles after its operands.
// Also counts results that are subnormal, saturated and exact zero.
module tb_floatsd8_mac;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;

  logic        in_valid;
  logic [7:0]  x [4];
  logic [7:0]  w [4];
  logic [15:0] addend;
  logic [15:0] in_tag;
  logic        out_valid;
  logic [15:0] result;
  logic [15:0] out_tag;

  floatsd8_mac #(.TAG_W(16)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n_sub = 0, n_sat = 0, n_zero = 0;
  logic [15:0] exp_q [$];
  int          cyc_q [$];

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] rand_fp8(int mode);
    logic [7:0] b = 8'($urandom);
    if (mode == 1) b[6:2] = 5'(12 + $urandom_range(0, 6));      // near 1.0
    if (mode == 2) b[6:2] = 5'($urandom_range(0, 3));           // tiny
    return b;
  endfunction

  task automatic issue(logic [7:0] xi[4], logic [7:0] wi[4], logic [15:0] ad);
    x = xi; w = wi; addend = ad; in_valid = 1; in_tag = 16'(cycle);
    exp_q.push_back(mac_ref(xi, wi, ad));
    cyc_q.push_back(cycle);
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  // checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [15:0] e; int c;
      e = exp_q.pop_front(); c = cyc_q.pop_front();
      checks++;
      if (result !== e) begin
        failures++;
        if (failures < 10) $display("MISMATCH got %h exp %h", result, e);
      end
      checks++;
      if (cycle - c != 5 || out_tag != 16'(c)) begin
        failures++;
        $display("LATENCY issue %0d out %0d", c, cycle);
      end
      if (result[14:10] == 0 && result[9:0] != 0) n_sub++;
      if (result[14:0] == 15'h7BFF) n_sat++;
      if (result == 16'h0000) n_zero++;
    end
  end

  initial begin
    logic [7:0] xi[4], wi[4];
    in_valid = 0; in_tag = 0; addend = 0;
    for (int i = 0; i < 4; i++) begin x[i] = 0; w[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // directed: 1.0 * 1.0 (w = 16*2^-4) + 0
    xi = '{8'h3C, 8'h00, 8'h00, 8'h00}; wi = '{8'hAD, 8'h00, 8'h00, 8'h00};
    issue(xi, wi, 16'h0000);                       // expect 1.0 = 3C00
    // exact cancellation: 1*1 + (-1)
    issue(xi, wi, 16'hBC00);
    // overflow: large inputs, large weights
    xi = '{8'h7B, 8'h7B, 8'h7B, 8'h7B}; wi = '{8'hEF, 8'hEF, 8'hEF, 8'hEF};
    issue(xi, wi, 16'h7BFF);
    // subnormal: tiny input, tiny weight
    xi = '{8'h01, 8'h02, 8'h00, 8'h00}; wi = '{8'h01, 8'h03, 8'h00, 8'h00};
    issue(xi, wi, 16'h0001);
    for (int n = 0; n < 4000; n++) begin
      int mode = $urandom_range(0, 2);
      for (int i = 0; i < 4; i++) begin
        xi[i] = rand_fp8(mode);
        wi[i] = 8'($urandom);
      end
      if (mode == 2) addend = 16'($urandom_range(0, 16'h0FFF)) | (16'($urandom_range(0,1)) << 15);
      else addend = 16'($urandom);
      if ($urandom_range(0, 3) == 0) addend = 0;
      issue(xi, wi, addend);
      if ($urandom_range(0, 4) == 0) begin @(posedge clk); #1; end
    end
    repeat (8) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    checks++;
    if (n_sub == 0 || n_sat == 0 || n_zero == 0) begin
      failures++;
      $display("coverage: sub=%0d sat=%0d zero=%0d", n_sub, n_sat, n_zero);
    end
    $display("results: subnormal=%0d saturated=%0d zero=%0d", n_sub, n_sat, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
