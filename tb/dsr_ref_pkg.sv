// dsr_ref_pkg: reference models used by the testbenches, written
// independently of the RTL from the definitions:
//   * the orthonormal 16-point DCT kernel, exact (real) and quantised;
//   * the 2D DCT of a 16x16 luminance tile, both in real arithmetic and in
//     the fixed-point format of the hardware (row pass, then column pass, each
//     output rounded as floor(sum / 2^11 + 1/2));
//   * MaxC (largest |c(p,q)| with p+q >= D) and the sampling-rate FSM.
package dsr_ref_pkg;
  import dsr_pkg::*;

  typedef int  imat_t [16][16];
  typedef real rmat_t [16][16];

  function automatic real kernel_real(int p, int q);
    real pi;
    pi = 3.14159265358979323846;
    if (p == 0) return 0.25;
    return $sqrt(2.0 / 16.0) * $cos(((2.0 * q + 1.0) * pi * p) / 32.0);
  endfunction

  // K[p][q] rounded to 11 fraction bits, halves away from zero
  function automatic int kernel_int(int p, int q);
    real v;
    v = kernel_real(p, q) * 2048.0;
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  function automatic imat_t kernel_int_mat();
    imat_t k;
    for (int p = 0; p < 16; p++)
      for (int q = 0; q < 16; q++) k[p][q] = kernel_int(p, q);
    return k;
  endfunction

  function automatic rmat_t kernel_real_mat();
    rmat_t k;
    for (int p = 0; p < 16; p++)
      for (int q = 0; q < 16; q++) k[p][q] = kernel_real(p, q);
    return k;
  endfunction

  // floor(a / 2048 + 1/2) for any sign
  function automatic int round_shift(longint a);
    longint t;
    t = a + 1024;
    return int'(t >>> 11);
  endfunction

  function automatic int luma_ref(int r, int g, int b);
    return (77 * r + 150 * g + 29 * b + 128) / 256;
  endfunction

  // lum[m][n]: row m, column n. Result c[p][q] = DCT(p,q), p vertical freq.
  function automatic imat_t dct2_fixed(imat_t lum);
    imat_t rr, c, k;
    longint acc;
    k = kernel_int_mat();
    for (int m = 0; m < 16; m++)
      for (int q = 0; q < 16; q++) begin
        acc = 0;
        for (int n = 0; n < 16; n++) acc += longint'(k[q][n]) * (lum[m][n] * 4);
        rr[m][q] = round_shift(acc);
      end
    for (int q = 0; q < 16; q++)
      for (int p = 0; p < 16; p++) begin
        acc = 0;
        for (int m = 0; m < 16; m++) acc += longint'(k[p][m]) * rr[m][q];
        c[p][q] = round_shift(acc);
      end
    return c;
  endfunction

  function automatic rmat_t dct2_real(imat_t lum);
    rmat_t c, k;
    real acc;
    k = kernel_real_mat();
    for (int p = 0; p < 16; p++)
      for (int q = 0; q < 16; q++) begin
        acc = 0.0;
        for (int m = 0; m < 16; m++)
          for (int n = 0; n < 16; n++)
            acc += k[p][m] * k[q][n] * real'(lum[m][n]);
        c[p][q] = acc;
      end
    return c;
  endfunction

  function automatic int maxc_int(imat_t c, int d);
    int m;
    m = 0;
    for (int p = 0; p < 16; p++)
      for (int q = 0; q < 16; q++)
        if (p + q >= d) begin
          int a;
          a = (c[p][q] < 0) ? -c[p][q] : c[p][q];
          if (a > m) m = a;
        end
    return m;
  endfunction

  function automatic real maxc_real(rmat_t c, int d);
    real m;
    m = 0.0;
    for (int p = 0; p < 16; p++)
      for (int q = 0; q < 16; q++)
        if (p + q >= d) begin
          real a;
          a = (c[p][q] < 0.0) ? -c[p][q] : c[p][q];
          if (a > m) m = a;
        end
    return m;
  endfunction

  // Sampling-rate FSM as described: level 0 = 1x ... level 4 = 1/256x.
  // decision: 0 maintain, 1 reduce, 2 increase, 3 always.
  function automatic void fsm_ref(input int lvl, input int maxc_r, input int maxc_i,
                                  input dsr_params_t prm, output int nxt, output int dec);
    if (lvl == 4) begin
      nxt = 3; dec = 3;
    end else if (maxc_r < int'(prm.t_reduce[lvl])) begin
      nxt = lvl + 1; dec = 1;
    end else if (lvl >= 1 && maxc_i >= int'(prm.t_increase[lvl-1])) begin
      nxt = lvl - 1; dec = 2;
    end else begin
      nxt = lvl; dec = 0;
    end
  endfunction

  function automatic int d_reduce_of(int lvl, dsr_params_t prm);
    return (lvl <= 3) ? int'(prm.d_reduce[lvl]) : 0;
  endfunction

  function automatic int d_increase_of(int lvl, dsr_params_t prm);
    return (lvl >= 1 && lvl <= 3) ? int'(prm.d_increase[lvl-1]) : 0;
  endfunction

endpackage
