// apsq_tb_pkg: reference arithmetic for the testbenches.
//
// Written independently of the RTL: quantization uses an explicit floor
// division on 64-bit integers instead of shifts, and the grouped APSQ
// reference follows the grouping algorithm step by step with a list of the
// stored (value, exponent) pairs instead of banks and counters.
package apsq_tb_pkg;

  // round(x / 2^e) with halves rounded up, clipped to [-128, 127]
  function automatic int ref_quant(longint x, int e);
    longint d, v, q;
    d = longint'(1) << e;
    v = x + ((e > 0) ? (d / 2) : 0);
    if (v >= 0) q = v / d;
    else        q = -((-v + d - 1) / d);
    if (q > 127)  q = 127;
    if (q < -128) q = -128;
    return int'(q);
  endfunction

  function automatic longint ref_deq(int q, int e);
    return longint'(q) * (longint'(1) << e);
  endfunction

  // Output of one lane after np PSUM tiles t[0..np-1] with exponents a[],
  // group size gs: the APSQ step happens on tiles 0, gs, 2gs, ... and on the
  // last tile; other tiles are only quantized and kept for the next APSQ step.
  function automatic int ref_apsq(longint t[], int a[], int np, int gs, output int n_apsq, output int n_psq);
    int     kept_q[$];
    int     kept_e[$];
    longint acc;
    int     r;
    n_apsq = 0; n_psq = 0; r = 0;
    for (int i = 0; i < np; i++) begin
      if ((i % gs) == 0 || i == np - 1) begin
        acc = t[i];
        foreach (kept_q[k]) acc += ref_deq(kept_q[k], kept_e[k]);
        r = ref_quant(acc, a[i]);
        kept_q.delete(); kept_e.delete();
        kept_q.push_back(r); kept_e.push_back(a[i]);
        n_apsq++;
      end else begin
        r = ref_quant(t[i], a[i]);
        kept_q.push_back(r); kept_e.push_back(a[i]);
        n_psq++;
      end
    end
    return r;
  endfunction

endpackage
