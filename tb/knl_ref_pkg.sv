// knl_ref_pkg: independent reference models used by the testbenches.
//
// The NLFSR reference keeps the 29-bit and 27-bit registers as separate
// arrays and evaluates the feedback from tap tables, so it shares no code
// with the RTL. It also holds reference steps for the 8-bit LFSR and the
// 11-cell CASR, and the additive-delay arbiter PUF function used by the
// behavioural PUF model.
package knl_ref_pkg;

  typedef bit [55:0] chal_t;

  localparam int T29 [11] = '{0, 3, 5, 6, 11, 12, 16, 19, 22, 23, 27};
  localparam int T27 [11] = '{0, 1, 2, 4, 8, 10, 11, 14, 17, 19, 21};

  // One step of the coupled NLFSR; state layout {29-bit, 27-bit}.
  function automatic chal_t ref_step(chal_t st);
    bit a [29];
    bit b [27];
    bit fa, fb;
    chal_t n;
    for (int i = 0; i < 29; i++) a[i] = st[27 + i];
    for (int i = 0; i < 27; i++) b[i] = st[i];
    fa = a[28] & a[20];
    foreach (T29[k]) fa ^= a[T29[k]];
    fa ^= b[0];
    fb = b[10] & b[6];
    foreach (T27[k]) fb ^= b[T27[k]];
    fb ^= a[0];
    for (int i = 0; i < 28; i++) n[27 + i] = a[i + 1];
    n[55] = fa;
    for (int i = 0; i < 26; i++) n[i] = b[i + 1];
    n[26] = fb;
    return n;
  endfunction

  function automatic chal_t ref_steps(chal_t st, int n);
    for (int i = 0; i < n; i++) st = ref_step(st);
    return st;
  endfunction

  // 8-bit Fibonacci LFSR, taps 6,5,1,0, feedback into bit 7.
  function automatic bit [7:0] ref_lfsr(bit [7:0] s);
    return {s[6] ^ s[5] ^ s[1] ^ s[0], s[7:1]};
  endfunction

  // 11-cell null-boundary CA, cell 1 = bit 0 rule 150, others rule 90.
  function automatic bit [10:0] ref_casr(bit [10:0] s);
    bit [10:0] n;
    for (int k = 0; k < 11; k++) begin
      bit l, r;
      l = (k == 0)  ? 1'b0 : s[k-1];
      r = (k == 10) ? 1'b0 : s[k+1];
      n[k] = l ^ r ^ ((k == 0) ? s[0] : 1'b0);
    end
    return n;
  endfunction

  // Stage delay differences of a simulated 56-stage arbiter PUF.
  function automatic int apuf_w(int i);
    int unsigned h;
    h = (i + 1) * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA77;
    h = h ^ (h >> 13);
    return int'(h % 2001) - 1000;
  endfunction

  // Noise-free arbiter response: sign of the additive delay model.
  function automatic bit apuf_ideal(chal_t c);
    int sum, phi;
    sum = apuf_w(56);
    phi = 1;
    for (int i = 55; i >= 0; i--) begin
      phi = c[i] ? -phi : phi;
      sum += apuf_w(i) * phi;
    end
    return sum > 0;
  endfunction

endpackage
