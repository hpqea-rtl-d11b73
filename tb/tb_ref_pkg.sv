// tb_ref_pkg: reference model for the HPQEA testbenches.
//
// Independent arithmetic for Q2.30 complex numbers (each real product is
// floor-shifted by 30 bits, as the hardware specifies), gate matrices built
// from angles with real arithmetic, and a reference state-vector update for a
// 2x2 gate and for CX. Amplitudes are 64-bit {re, im} words, as in hardware.
package tb_ref_pkg;

  typedef logic [63:0] amp_t;

  function automatic int fx_from_real(real r);
    return int'($rtoi(r * 1073741824.0));
  endfunction

  function automatic real fx_to_real(int v);
    return real'(v) / 1073741824.0;
  endfunction

  function automatic amp_t mk(real re, real im);
    int r, i;
    r = fx_from_real(re);
    i = fx_from_real(im);
    return {r, i};
  endfunction

  function automatic int re_of(amp_t a); return int'(a[63:32]); endfunction
  function automatic int im_of(amp_t a); return int'(a[31:0]);  endfunction

  function automatic int pmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 30);
  endfunction

  function automatic amp_t cmulr(amp_t a, amp_t b);
    int r, i;
    r = pmul(re_of(a), re_of(b)) - pmul(im_of(a), im_of(b));
    i = pmul(re_of(a), im_of(b)) + pmul(im_of(a), re_of(b));
    return {r, i};
  endfunction

  function automatic amp_t caddr(amp_t a, amp_t b);
    int r, i;
    r = re_of(a) + re_of(b);
    i = im_of(a) + im_of(b);
    return {r, i};
  endfunction

  // gate matrices, m[0]=a m[1]=b m[2]=c m[3]=d
  typedef amp_t mat_t [4];

  function automatic mat_t g_h();
    real s = 1.0 / $sqrt(2.0);
    return '{mk(s, 0), mk(s, 0), mk(s, 0), mk(-s, 0)};
  endfunction
  function automatic mat_t g_s();
    return '{mk(1.0, 0), mk(0, 0), mk(0, 0), mk(0, 1.0)};
  endfunction
  function automatic mat_t g_rx(real th);
    return '{mk($cos(th/2), 0), mk(0, -$sin(th/2)), mk(0, -$sin(th/2)), mk($cos(th/2), 0)};
  endfunction
  function automatic mat_t g_ry(real th);
    return '{mk($cos(th/2), 0), mk(-$sin(th/2), 0), mk($sin(th/2), 0), mk($cos(th/2), 0)};
  endfunction
  function automatic mat_t g_rz(real th);
    return '{mk($cos(th/2), -$sin(th/2)), mk(0, 0), mk(0, 0), mk($cos(th/2), $sin(th/2))};
  endfunction

  // Reference: apply a 2x2 gate on qubit t (sparse: diagonal only).
  function automatic void apply_1q(ref amp_t sv[], input mat_t m, input int t,
                                   input bit sparse);
    for (int i = 0; i < sv.size(); i++) begin
      if (((i >> t) & 1) == 0) begin
        int j = i | (1 << t);
        amp_t x0 = sv[i], x1 = sv[j];
        if (sparse) begin
          sv[i] = cmulr(m[0], x0);
          sv[j] = cmulr(m[3], x1);
        end else begin
          sv[i] = caddr(cmulr(m[0], x0), cmulr(m[1], x1));
          sv[j] = caddr(cmulr(m[3], x1), cmulr(m[2], x0));
        end
      end
    end
  endfunction

  function automatic void apply_cx(ref amp_t sv[], input int c, input int t);
    for (int i = 0; i < sv.size(); i++) begin
      if (((i >> c) & 1) == 1 && ((i >> t) & 1) == 0) begin
        amp_t tmp = sv[i];
        sv[i] = sv[i | (1 << t)];
        sv[i | (1 << t)] = tmp;
      end
    end
  endfunction

  // random amplitude with |re|,|im| < 0.5
  function automatic amp_t rand_amp();
    int r, i;
    r = int'($urandom_range(32'h3FFF_FFFF)) - 32'sh2000_0000;
    i = int'($urandom_range(32'h3FFF_FFFF)) - 32'sh2000_0000;
    return {r, i};
  endfunction

endpackage
