// tb_gate_lut: random pre-activations of the four gates. One cycle later the
// i, f, o outputs must be the quantized sigmoid (as the value of their
// FloatSD8 pair, nearest-level search in real arithmetic) and g the FP8 tanh;
// valid and index must be delayed by exactly one cycle.
module tb_gate_lut;
  import floatsd8_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic        in_valid, out_valid;
  logic [2:0]  in_index, out_index;
  fp16_t       pre_i, pre_g, pre_f, pre_o;
  fsd8_t       i_hi, i_lo, f_hi, f_lo, o_hi, o_lo;
  fp8_t        g;

  gate_lut #(.IDX_W(3)) dut (.*);

  int checks = 0, failures = 0;
  real lv [$];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real qsig(fp16_t p);
    real a, s, q, best;
    a = fp16_val(p); if (a < 0) a = -a;
    s = 1.0 / (1.0 + $exp(a));
    q = lv[0]; best = 10.0;
    foreach (lv[i]) begin
      real d;
      d = (s > lv[i]) ? s - lv[i] : lv[i] - s;
      if (d < best || (d == best && lv[i] < q)) begin best = d; q = lv[i]; end
    end
    return (p[15] || p[14:0] == 0) ? q : 1.0 - q;
  endfunction

  initial begin
    for (int e = 0; e < 8; e++)
      for (int k = 1; k < 16; k++) begin
        real v; bit dup;
        v = fsd8_val({3'(e), 1'b0, 4'(k)});
        dup = 0;
        foreach (lv[i]) if (lv[i] == v) dup = 1;
        if (!dup && v <= 0.5) lv.push_back(v);
      end
    in_valid = 0; in_index = 0; pre_i = 0; pre_g = 0; pre_f = 0; pre_o = 0;
    #2 rst_n = 0;
    #20 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      fp16_t pi, pg, pf, po; logic v; logic [2:0] ix;
      @(posedge clk); #1;
      pi = {1'($urandom), 5'($urandom_range(8, 19)), 10'($urandom)};
      pg = {1'($urandom), 5'($urandom_range(8, 19)), 10'($urandom)};
      pf = {1'($urandom), 5'($urandom_range(8, 19)), 10'($urandom)};
      po = {1'($urandom), 5'($urandom_range(8, 19)), 10'($urandom)};
      v = 1'($urandom); ix = 3'($urandom);
      pre_i = pi; pre_g = pg; pre_f = pf; pre_o = po; in_valid = v; in_index = ix;
      @(posedge clk); #1;
      pre_i = 16'($urandom); pre_g = 16'($urandom); pre_f = 16'($urandom); pre_o = 16'($urandom);
      in_valid = 0;
      checks++;
      if (out_valid !== v || (v && out_index !== ix)) failures++;
      checks++;
      if (fsd8_val(i_hi) + fsd8_val(i_lo) != qsig(pi) || fsd8_val(f_hi) + fsd8_val(f_lo) != qsig(pf) ||
          fsd8_val(o_hi) + fsd8_val(o_lo) != qsig(po) ||
          g !== {pg[15], fp8_rne($tanh(fp16_val({1'b0, pg[14:0]})))[6:0]}) begin
        failures++;
        if (failures < 5) $display("pre %h %h %h %h", pi, pg, pf, po);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
