// chsnd_tb_pkg: reference models shared by the testbenches.
//
// pn_chips() computes a PN sequence from the linear recurrence of the LFSR
// (independently of the RTL structure): with a[1-k] the seed bit of stage k,
// a[t+1] = XOR over the polynomial taps k of a[t+1-k], and chip t of the
// output is a[t+1-order]. corr_power() is a direct evaluation of the
// correlation power with the scaling the correlator uses.
package chsnd_tb_pkg;

  typedef bit chips_t [];

  function automatic chips_t pn_chips(input logic [9:0] poly, input logic [9:0] seed,
                                      input int order, input int n);
    bit hist [] = new[n + 20];
    chips_t c = new[n];
    for (int k = 1; k <= 10; k++) hist[10 + 1 - k] = seed[k-1];
    for (int t = 1; t < n + 10; t++) begin
      bit fb = 0;
      for (int k = 1; k <= 10; k++) if (poly[k-1]) fb ^= hist[10 + t - k];
      hist[10 + t] = fb;
    end
    for (int t = 0; t < n; t++) c[t] = hist[10 + t + 1 - order];
    return c;
  endfunction

  // x_re/x_im[l] is the sample l steps in the past (index 0 = newest);
  // coefficient of tap l is chip L-1-l mapped 1 -> +1, 0 -> -1.
  function automatic longint unsigned corr_power(input chips_t c, input int L,
                                                 input longint x_re [], input longint x_im [],
                                                 input int shift);
    longint sr = 0, si = 0;
    longint unsigned p;
    for (int l = 0; l < L; l++) begin
      if (c[L-1-l]) begin sr += x_re[l]; si += x_im[l]; end
      else          begin sr -= x_re[l]; si -= x_im[l]; end
    end
    p = longint'(sr * sr + si * si) >> shift;
    if (p > 64'hFFFF_FFFF) p = 64'hFFFF_FFFF;
    return p;
  endfunction

  function automatic logic signed [15:0] neg16(input logic signed [15:0] v);
    return (v == -16'sd32768) ? 16'sd32767 : 16'(-v);
  endfunction

endpackage
