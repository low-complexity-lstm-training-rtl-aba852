// fsd8_max_exp: max exponent detector of the FloatSD8 MAC (stage 1).
//
// Returns the largest exponent among the non-zero terms, which sets the
// alignment window of the adder tree. Zero terms are ignored; when every
// term is zero, max_exp is 0 and any_nz is low. Combinational.
module fsd8_max_exp
  import floatsd8_pkg::*;
(
  input  term_t             terms [N_TERMS],
  output logic signed [7:0] max_exp,
  output logic              any_nz
);

  always_comb begin
    max_exp = '0;
    any_nz  = 1'b0;
    for (int i = 0; i < N_TERMS; i++) begin
      if (terms[i].nz && (!any_nz || terms[i].exp > max_exp)) begin
        max_exp = terms[i].exp;
        any_nz  = 1'b1;
      end
    end
  end

endmodule
