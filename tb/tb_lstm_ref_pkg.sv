// tb_lstm_ref_pkg -- bit-exact software reference of the LSTM accelerator's
// arithmetic, used by the testbenches.
//
// Written independently of the RTL: plain integer arithmetic on 64-bit
// values for the fixed-point rules (products summed at full precision, then
// shifted right by 8 with floor rounding and saturated to 16 bits) and direct
// evaluation of sigmoid / tanh with $exp for the lookup tables (DEPTH bins
// over [-8, 8) for sigmoid and [-4, 4) for tanh, value taken at the bin
// centre and rounded to the nearest LSB). The only thing shared with the RTL
// is lstm_pkg::param_value(), i.e. the parameter set itself.
package tb_lstm_ref_pkg;

  typedef longint fxv_t;   // a Q8.8 value held in a wide integer

  function automatic fxv_t ref_narrow(input longint v);
    longint s;
    s = v >>> 8;
    if (s > 32767)  s = 32767;
    if (s < -32768) s = -32768;
    return s;
  endfunction

  function automatic fxv_t ref_lut(input fxv_t x, input int depth, input int range_log2,
                                   input bit is_tanh);
    int    shift, half, idx;
    longint q;
    real   xr, fr;
    shift = 8 + range_log2 + 1 - $clog2(depth);
    half  = depth / 2;
    q     = x >>> shift;
    if (q < -half)     q = -half;
    if (q > half - 1)  q = half - 1;
    idx   = int'(q) + half;
    xr    = (real'(idx - half) + 0.5) * (2.0 ** shift) / 256.0;
    if (is_tanh) fr = ($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr));
    else         fr = 1.0 / (1.0 + $exp(-xr));
    return longint'($floor(fr * 256.0 + 0.5));
  endfunction

  function automatic fxv_t ref_sigmoid(input fxv_t x, input int depth = 256);
    return ref_lut(x, depth, 3, 1'b0);
  endfunction

  function automatic fxv_t ref_tanh(input fxv_t x, input int depth = 256);
    return ref_lut(x, depth, 2, 1'b1);
  endfunction

  function automatic fxv_t w_of(input int unsigned id, input int unsigned idx);
    return fxv_t'(lstm_pkg::param_value(id, idx));
  endfunction

  // One recursion of the cell. xv: N_I inputs, h and c: N_H state (updated).
  // Gate ids: weights f,i,o,g = 0..3, biases 4..7.
  function automatic void ref_step(input fxv_t xv[], ref fxv_t h[], ref fxv_t c[],
                                   input int depth = 256);
    int   ni, nh, n;
    fxv_t v[];
    fxv_t hn[];
    fxv_t act[4];
    ni = xv.size();
    nh = h.size();
    n  = ni + nh;
    v  = new[n];
    hn = new[nh];
    for (int k = 0; k < ni; k++) v[k] = xv[k];
    for (int k = 0; k < nh; k++) v[ni + k] = h[k];
    for (int r = 0; r < nh; r++) begin
      for (int gt = 0; gt < 4; gt++) begin
        longint acc;
        acc = w_of(4 + gt, r) * 256;
        for (int k = 0; k < n; k++) acc += w_of(gt, r * n + k) * v[k];
        act[gt] = ref_narrow(acc);
      end
      begin
        fxv_t f, i, o, g, ct, ht;
        f  = ref_sigmoid(act[0], depth);
        i  = ref_sigmoid(act[1], depth);
        o  = ref_sigmoid(act[2], depth);
        g  = ref_tanh(act[3], depth);
        ct = ref_narrow(f * c[r] + i * g);
        ht = ref_narrow(o * ref_tanh(ct, depth));
        c[r]  = ct;
        hn[r] = ht;
      end
    end
    for (int k = 0; k < nh; k++) h[k] = hn[k];
  endfunction

  // Dense layer: ids 8 (weights, o*N_F + k) and 9 (bias).
  function automatic fxv_t ref_dense(input fxv_t h[], input int o);
    longint acc;
    acc = w_of(9, o) * 256;
    for (int k = 0; k < h.size(); k++) acc += w_of(8, o * h.size() + k) * h[k];
    return ref_narrow(acc);
  endfunction

endpackage
