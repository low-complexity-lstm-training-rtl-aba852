// fsd8_weight_decoder: splits a FloatSD8 weight into its exponent and two
// signed power-of-two digits (first stage of the FloatSD8 MAC).
//
// The 4-bit magnitude index selects one of the 16 magnitudes 0..10, 14..18.
// Each is written as a most-significant-group digit (0, 4, 8 or 16, i.e. the
// group's +4/+2/+1 digit two places up) plus a second-group digit (-2..+2).
// Where a magnitude has two such splits (6 and 10) the smaller MSG digit is
// used. The weight's sign bit negates both digits. Purely combinational.
module fsd8_weight_decoder
  import floatsd8_pkg::*;
(
  input  fsd8_t     w,
  output fsd8_dec_t dec
);

  logic [4:0] hi_mag;           // 0, 4, 8 or 16
  logic signed [2:0] lo_val;    // -2..2

  always_comb begin
    unique case (w[3:0])
      4'd0:  begin hi_mag = 5'd0;  lo_val =  3'sd0; end
      4'd1:  begin hi_mag = 5'd0;  lo_val =  3'sd1; end
      4'd2:  begin hi_mag = 5'd0;  lo_val =  3'sd2; end
      4'd3:  begin hi_mag = 5'd4;  lo_val = -3'sd1; end
      4'd4:  begin hi_mag = 5'd4;  lo_val =  3'sd0; end
      4'd5:  begin hi_mag = 5'd4;  lo_val =  3'sd1; end
      4'd6:  begin hi_mag = 5'd4;  lo_val =  3'sd2; end
      4'd7:  begin hi_mag = 5'd8;  lo_val = -3'sd1; end
      4'd8:  begin hi_mag = 5'd8;  lo_val =  3'sd0; end
      4'd9:  begin hi_mag = 5'd8;  lo_val =  3'sd1; end
      4'd10: begin hi_mag = 5'd8;  lo_val =  3'sd2; end
      4'd11: begin hi_mag = 5'd16; lo_val = -3'sd2; end   // 14
      4'd12: begin hi_mag = 5'd16; lo_val = -3'sd1; end   // 15
      4'd13: begin hi_mag = 5'd16; lo_val =  3'sd0; end   // 16
      4'd14: begin hi_mag = 5'd16; lo_val =  3'sd1; end   // 17
      default: begin hi_mag = 5'd16; lo_val = 3'sd2; end  // 18
    endcase

    dec.exp    = w[7:5];
    dec.hi.nz  = (hi_mag != 5'd0);
    dec.hi.neg = w[4];
    unique case (hi_mag)
      5'd4:    dec.hi.pos = 3'd2;
      5'd8:    dec.hi.pos = 3'd3;
      default: dec.hi.pos = 3'd4;
    endcase
    dec.lo.nz  = (lo_val != 3'sd0);
    dec.lo.neg = w[4] ^ (lo_val < 0);
    dec.lo.pos = (lo_val == 3'sd2 || lo_val == -3'sd2) ? 3'd1 : 3'd0;
  end

endmodule
