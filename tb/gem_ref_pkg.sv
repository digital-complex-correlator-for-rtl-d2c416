// gem_ref_pkg -- reference arithmetic for the correlator testbenches.
//
// Plain integer models, written independently of the RTL: the Stokes
// parameters of one sample set, the 19-bit saturating sum of a 20 ns period,
// and a model of one integrator (16-MSB truncation and two mean-of-2^n stages).
package gem_ref_pkg;

  // Stokes of one set a[0..3] = ADC1..ADC4; result order I, Q, U, V.
  function automatic void stokes_set(input int a [4], output int s [4]);
    s[0] = a[0]*a[0] + a[1]*a[1] + a[2]*a[2] + a[3]*a[3];
    s[1] = 2 * (a[0]*a[2] + a[1]*a[3]);
    s[2] = 2 * (a[0]*a[3] - a[1]*a[2]);
    s[3] = a[0]*a[0] + a[1]*a[1] - a[2]*a[2] - a[3]*a[3];
  endfunction

  function automatic int sat19(input int x);
    if (x > 262143)  return 262143;
    if (x < -262144) return -262144;
    return x;
  endfunction

  // Floor division by 2^n for signed values.
  function automatic int floor_div_pow2(input longint x, input int n);
    longint d = longint'(1) << n;
    longint q = x / d;
    if (x < 0 && q * d != x) q = q - 1;
    return int'(q);
  endfunction

  // One integrator: returns 1 and the new output when a result is complete.
  class integ_model;
    int m_w, n_w;
    longint acc1, acc2;
    int cnt1, cnt2;
    int last_mid;

    function new(int m_w, int n_w);
      this.m_w = m_w; this.n_w = n_w;
      acc1 = 0; acc2 = 0; cnt1 = 0; cnt2 = 0; last_mid = 0;
    endfunction

    // Feed one 19-bit period value; mid_done/out_done flag a stage dump.
    function automatic void push(input int raw, output bit mid_done, output bit out_done,
                                 output int out);
      int trunc = floor_div_pow2(raw, 3);   // keep the 16 MSBs of 19
      mid_done = 0; out_done = 0; out = 0;
      acc1 += trunc;
      cnt1++;
      if (cnt1 == (1 << m_w)) begin
        last_mid = floor_div_pow2(acc1, m_w);
        acc1 = 0; cnt1 = 0; mid_done = 1;
        acc2 += last_mid;
        cnt2++;
        if (cnt2 == (1 << n_w)) begin
          out = floor_div_pow2(acc2, n_w);
          acc2 = 0; cnt2 = 0; out_done = 1;
        end
      end
    endfunction
  endclass

endpackage
