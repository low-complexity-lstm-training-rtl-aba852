// fsd8_csa_tree: Wallace-tree adder of the FloatSD8 MAC (stage 3).
//
// Nine aligned two's-complement terms are reduced with 3:2 carry-save adders
// in four levels (9 -> 6 -> 4 -> 3 -> 2) and the final pair is added by one
// carry-propagate adder. All arithmetic is modulo 2^SUM_W, which is wide
// enough for the true sum of nine ALIGN_W-bit magnitudes. Combinational.
module fsd8_csa_tree
  import floatsd8_pkg::*;
(
  input  logic signed [ALIGN_W:0] aligned [N_TERMS],
  output logic signed [SUM_W-1:0] sum
);

  typedef logic [SUM_W-1:0] word_t;

  // 3:2 compressor: a + b + c == s + cy (mod 2^SUM_W)
  function automatic void csa(input word_t a, input word_t b, input word_t c,
                              output word_t s, output word_t cy);
    s  = a ^ b ^ c;
    cy = ((a & b) | (a & c) | (b & c)) << 1;
  endfunction

  word_t in_w [N_TERMS];
  word_t l1 [6];
  word_t l2 [4];
  word_t l3 [3];
  word_t l4 [2];

  always_comb begin
    for (int i = 0; i < N_TERMS; i++) in_w[i] = word_t'(SUM_W'(aligned[i]));
    csa(in_w[0], in_w[1], in_w[2], l1[0], l1[1]);
    csa(in_w[3], in_w[4], in_w[5], l1[2], l1[3]);
    csa(in_w[6], in_w[7], in_w[8], l1[4], l1[5]);
    csa(l1[0], l1[1], l1[2], l2[0], l2[1]);
    csa(l1[3], l1[4], l1[5], l2[2], l2[3]);
    csa(l2[0], l2[1], l2[2], l3[0], l3[1]);
    l3[2] = l2[3];
    csa(l3[0], l3[1], l3[2], l4[0], l4[1]);
    sum = signed'(l4[0] + l4[1]);
  end

endmodule
