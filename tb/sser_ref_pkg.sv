// sser_ref_pkg: bit-accurate reference model of the quantised recurrent
// update, written directly from the GRU / MGU equations and the number
// formats documented in sser_pkg. Testbenches compare the RTL against it.
//
// Formats: weights Q.5, pre-activations Q.4, state and gates Q.7 (1.0 = 128),
// timestamp t read as t / 2^16, polarity +/-1.0 with 16 fraction bits.
// Every multiplier stage rounds half up and saturates to 8 signed bits.
package sser_ref_pkg;

  function automatic int ref_requant(input longint v, input int sh);
    longint r;
    r = (sh == 0) ? v : (v + (longint'(1) << (sh - 1))) >>> sh;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  function automatic int ref_sat(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // Sigmoid table value for pre-activation a (signed, 4 fraction bits).
  function automatic int ref_sigmoid(input int a);
    real s;
    s = 1.0 / (1.0 + $exp(-real'(a) / 16.0));
    return int'($floor(s * 128.0 + 0.5));
  endfunction

  function automatic int ref_tanh(input int a);
    real e, th;
    int q;
    e  = $exp(2.0 * real'(a) / 16.0);
    th = (e - 1.0) / (e + 1.0);
    q  = int'($floor(th * 128.0 + 0.5));
    return (q > 127) ? 127 : q;
  endfunction

  // One recurrent update. G = 3 (GRU: rows z, r, h) or 2 (MGU: rows f, h).
  // x has din entries with xfrac fraction bits.
  function automatic void ref_step(
    input  int g, input int d, input int din, input int xfrac,
    input  longint x [], input int hp [], input int wx [][], input int wh [][],
    input  int b [], output int hn []);
    int wxv [], uhv [];
    int zg, rg, rm, preh, ht, a1, a2;
    longint acc;
    wxv = new[g*d];
    uhv = new[g*d];
    hn  = new[d];
    for (int o = 0; o < g*d; o++) begin
      acc = 0;
      for (int i = 0; i < din; i++) acc += longint'(wx[o][i]) * x[i];
      wxv[o] = ref_requant(acc, 5 + xfrac - 4);
      acc = longint'(b[o]) * 256;
      for (int j = 0; j < d; j++) acc += longint'(wh[o][j]) * longint'(hp[j]);
      uhv[o] = ref_requant(acc, 8);
    end
    for (int c = 0; c < d; c++) begin
      zg = ref_sigmoid(ref_sat(wxv[c] + uhv[c]));
      rg = (g == 3) ? ref_sigmoid(ref_sat(wxv[d + c] + uhv[d + c])) : zg;
      rm = ref_requant(longint'(rg) * longint'(uhv[(g-1)*d + c]), 7);
      preh = ref_sat(wxv[(g-1)*d + c] + rm);
      ht = ref_tanh(preh);
      a1 = ref_requant(longint'(zg) * longint'(ht), 7);
      a2 = ref_requant(longint'(128 - longint'(zg)) * longint'(hp[c]), 7);
      hn[c] = ref_sat(a1 + a2);
    end
  endfunction

endpackage
