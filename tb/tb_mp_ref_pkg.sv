// tb_mp_ref_pkg: reference models used by the testbenches.
//
// Written at the behavioural level with 64-bit integers and reals, separately from the RTL:
//  - ref_nibbles/ref_exp: operand value split arithmetically (2*M = sum N_k 16^k for FP16,
//    value = sum N_k 16^k for INT) instead of by bit slicing;
//  - ref_ip_op: one inner-product operation of an MC-IPU(W), partition by partition, into a
//    model accumulator, returning the number of cycles the operation takes;
//  - fp16_value / fp_bits_value: decode IEEE words to reals;
//  - rand_fp16: random FP16 words with a chosen exponent window.
package tb_mp_ref_pkg;
  import mp_pkg::*;

  typedef struct {
    longint acc;
    int     exp;
    bit     empty;
  } ref_acc_t;

  function automatic real pow2(int e);
    real v = 1.0;
    if (e >= 0) for (int k = 0; k < e; k++) v = v * 2.0;
    else        for (int k = 0; k < -e; k++) v = v / 2.0;
    return v;
  endfunction

  function automatic longint asr(longint x, int n);
    if (n <= 0)  return x;
    if (n >= 62) return (x < 0) ? -64'sd1 : 64'sd0;
    return x >>> n;
  endfunction

  function automatic int nibbles_of(dtype_t t);
    case (t)
      DT_INT4: return 1;
      DT_INT8: return 2;
      DT_INT12: return 3;
      DT_INT16: return 4;
      default: return 3;
    endcase
  endfunction

  // signed nibble k of an operand
  function automatic int ref_nibble(logic [15:0] x, dtype_t t, bit sgn, int k);
    int n, v, e, f, mag, m2, n0, n1, n2;
    n = nibbles_of(t);
    if (t == DT_FP16) begin
      e   = int'(x[14:10]);
      f   = int'(x[9:0]);
      mag = (e == 0) ? f : (f + 1024);
      m2  = x[15] ? -2 * mag : 2 * mag;
      n0  = ((m2 % 16) + 16) % 16;
      n1  = (((m2 - n0) / 16) % 16 + 16) % 16;
      n2  = (m2 - n0 - 16 * n1) / 256;
      if (k == 0) return n0;
      if (k == 1) return n1;
      if (k == 2) return n2;
      return 0;
    end
    if (k >= n) return 0;
    v = int'((x >> (4 * k)) & 16'hF);
    if (sgn && k == n - 1 && v >= 8) v = v - 16;
    return v;
  endfunction

  function automatic int ref_exp(logic [15:0] x, dtype_t t);
    if (t != DT_FP16) return 0;
    if (x[14:10] == 5'd0) return -14;
    return int'(x[14:10]) - 15;
  endfunction

  function automatic real fp16_value(logic [15:0] x);
    real v;
    v = (x[14:10] == 0) ? real'(x[9:0]) / 1024.0 : 1.0 + real'(x[9:0]) / 1024.0;
    v = v * pow2(ref_exp(x, DT_FP16));
    return x[15] ? -v : v;
  endfunction

  // integer value of an INT operand
  function automatic longint int_value(logic [15:0] x, dtype_t t, bit sgn);
    longint v = 0;
    for (int k = nibbles_of(t) - 1; k >= 0; k--) v = v * 16 + longint'(ref_nibble(x, t, sgn, k));
    return v;
  endfunction

  // One IP operation of an MC-IPU(W) into the model accumulator. Returns the cycle count.
  function automatic int ref_ip_op(input logic [15:0] a[], input logic [15:0] w[],
                                   input dtype_t at, input bit as, input dtype_t wt,
                                   input bit ws, input int sw_prec, input int W,
                                   inout ref_acc_t st);
    int n, sp, ka, kb, mx, cycles, kmax, s, et;
    int c[], d[];
    bit fp;
    longint S, X;
    n  = a.size();
    sp = W - 9;
    fp = (at == DT_FP16) || (wt == DT_FP16);
    ka = nibbles_of(at);
    kb = nibbles_of(wt);
    c  = new[n];
    d  = new[n];
    mx = -1000;
    for (int q = 0; q < n; q++) begin
      c[q] = ref_exp(a[q], at) + ref_exp(w[q], wt);
      if (c[q] > mx) mx = c[q];
    end
    kmax = 0;
    for (int q = 0; q < n; q++) begin
      d[q] = mx - c[q];
      if (d[q] <= sw_prec && d[q] / sp > kmax) kmax = d[q] / sp;
    end
    cycles = 0;
    for (int i = ka - 1; i >= 0; i--) begin
      for (int j = kb - 1; j >= 0; j--) begin
        for (int k = 0; k <= kmax; k++) begin
          cycles++;
          S = 0;
          for (int q = 0; q < n; q++) begin
            if (d[q] <= sw_prec && d[q] / sp == k)
              S += (longint'(ref_nibble(a[q], at, as, i) * ref_nibble(w[q], wt, ws, j))
                    <<< (W - 9)) >>> (d[q] - k * sp);
          end
          X = S <<< (33 - W);
          s = 4 * ((ka - 1 - i) + (kb - 1 - j)) + k * sp;
          if (!fp) begin
            st.acc   = (st.empty ? 64'sd0 : st.acc) + asr(X, s);
            st.exp   = 0;
            st.empty = 0;
          end else begin
            et = mx - s;
            if (st.empty) begin
              st.acc = X; st.exp = et; st.empty = 0;
            end else if (et > st.exp) begin
              st.acc = X + asr(st.acc, et - st.exp); st.exp = et;
            end else begin
              st.acc = st.acc + asr(X, st.exp - et);
            end
          end
        end
      end
    end
    return cycles;
  endfunction

  // decode an FP16 (fp32 = 0) or FP32 word to a real
  function automatic real fp_bits_value(logic [31:0] x, bit fp32);
    int e, m, bias, mb;
    real v;
    mb   = fp32 ? 23 : 10;
    bias = fp32 ? 127 : 15;
    e    = fp32 ? int'(x[30:23]) : int'(x[14:10]);
    m    = fp32 ? int'(x[22:0]) : int'(x[9:0]);
    if (e == 0) v = real'(m) * pow2((1 - bias - mb));
    else        v = (1.0 + real'(m) / pow2(mb)) * pow2((e - bias));
    if (fp32 ? x[31] : x[15]) v = -v;
    return v;
  endfunction

  // random FP16 with unbiased exponent in [emin, emax] (normal numbers only)
  function automatic logic [15:0] rand_fp16(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(0, emax - emin));
    return {1'($urandom_range(0, 1)), 5'(e + 15), 10'($urandom_range(0, 1023))};
  endfunction

endpackage
