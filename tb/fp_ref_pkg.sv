// fp_ref_pkg: reference arithmetic for the testbenches, written with real
// numbers and independent of the RTL's bit-level datapath.
//   fp8_val / fp16_val / fsd8_val  decode a bit pattern to its real value
//   fp16_rne / fp8_rne             round a real to nearest even (saturating)
//   mac_ref                        the MAC's documented result: terms are cut
//                                  to a grid of 2^(Emax-23) (toward zero),
//                                  summed exactly, rounded once to FP16
package fp_ref_pkg;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp8_val(logic [7:0] b);
    int e = int'(b[6:2]);
    real m = real'(b[1:0]) / 4.0;
    real v = (e == 0) ? m * pow2(-14) : (1.0 + m) * pow2(e - 15);
    return b[7] ? -v : v;
  endfunction

  function automatic real fp16_val(logic [15:0] b);
    int e = int'(b[14:10]);
    real m = real'(b[9:0]) / 1024.0;
    real v = (e == 0) ? m * pow2(-14) : (1.0 + m) * pow2(e - 15);
    return b[15] ? -v : v;
  endfunction

  function automatic int fsd8_mag(logic [3:0] k);
    return (k <= 10) ? int'(k) : int'(k) + 3;
  endfunction

  function automatic real fsd8_val(logic [7:0] b);
    real v = real'(fsd8_mag(b[3:0])) * pow2(int'(b[7:5]) - 9);
    return b[4] ? -v : v;
  endfunction

  // exponent the hardware gives an FP8 or FP16 field (subnormals share -14)
  function automatic int field_exp(int ef);
    return (ef == 0) ? -14 : ef - 15;
  endfunction

  function automatic real rne(real q);
    real f = $floor(q);
    real d = q - f;
    if (d > 0.5) return f + 1.0;
    if (d < 0.5) return f;
    return ($floor(f / 2.0) * 2.0 == f) ? f : f + 1.0;
  endfunction

  function automatic int floor_log2(real a);
    int e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    return e;
  endfunction

  // generic round to a binary format with MB mantissa bits, EMIN, max pattern
  function automatic logic [15:0] fp16_rne(real r);
    real a = (r < 0) ? -r : r;
    logic s = (r < 0);
    int e; real n;
    if (a == 0.0) return 16'h0000;
    e = floor_log2(a);
    if (e < -14) begin
      n = rne(a / pow2(-24));
      if (n == 0.0) return {s, 15'd0};
      return {s, 15'(int'(n))};
    end
    n = rne(a / pow2(e - 10));
    if (n >= 2048.0) begin n = 1024.0; e++; end
    if (e > 15) return {s, 15'h7BFF};
    return {s, 5'(e + 15), 10'(int'(n) - 1024)};
  endfunction

  function automatic logic [7:0] fp8_rne(real r);
    real a = (r < 0) ? -r : r;
    logic s = (r < 0);
    int e; real n;
    if (a == 0.0) return {s, 7'd0};
    e = floor_log2(a);
    if (e < -14) begin
      n = rne(a / pow2(-16));
      return {s, 7'(int'(n))};
    end
    n = rne(a / pow2(e - 2));
    if (n >= 8.0) begin n = 4.0; e++; end
    if (e > 16) return {s, 7'h7F};
    return {s, 5'(e + 15), 2'(int'(n) - 4)};
  endfunction

  // digits of a FloatSD8 magnitude: MSG digit in {0,4,8,16}, second in -2..2
  function automatic void fsd8_digits(logic [3:0] k, output int hi, output int lo);
    int m = fsd8_mag(k);
    if (m <= 2)       begin hi = 0;  lo = m; end
    else if (m <= 6)  begin hi = 4;  lo = m - 4; end
    else if (m <= 10) begin hi = 8;  lo = m - 8; end
    else              begin hi = 16; lo = m - 16; end
  endfunction

  // Reference for the MAC: returns FP16 bits.
  function automatic logic [15:0] mac_ref(logic [7:0] x[4], logic [7:0] w[4], logic [15:0] addend);
    real v [9];
    int  ex [9];
    bit  nz [9];
    int  emax; bit any; real grid, sum;
    for (int p = 0; p < 4; p++) begin
      int hi, lo;
      real xs = fp8_val(x[p]);
      fsd8_digits(w[p][3:0], hi, lo);
      for (int j = 0; j < 2; j++) begin
        int d = (j == 0) ? hi : lo;
        int ad = (d < 0) ? -d : d;
        v[2*p+j]  = xs * real'(d) * pow2(int'(w[p][7:5]) - 9) * (w[p][4] ? -1.0 : 1.0);
        nz[2*p+j] = (v[2*p+j] != 0.0);
        ex[2*p+j] = field_exp(int'(x[p][6:2])) + floor_log2(real'(ad == 0 ? 1 : ad)) + int'(w[p][7:5]) - 9;
      end
    end
    v[8] = fp16_val(addend);
    nz[8] = (v[8] != 0.0);
    ex[8] = field_exp(int'(addend[14:10]));
    any = 0; emax = 0;
    for (int i = 0; i < 9; i++) if (nz[i] && (!any || ex[i] > emax)) begin emax = ex[i]; any = 1; end
    grid = pow2(emax - 23);
    sum = 0.0;
    for (int i = 0; i < 9; i++) begin
      real q = v[i] / grid;
      q = (q < 0) ? -$floor(-q) : $floor(q);
      sum = sum + q;
    end
    return fp16_rne(sum * grid);
  endfunction

endpackage
