// decim_ref_pkg: word-level reference model of the decimation chain, used by
// the chain-level testbenches. It works on whole sample streams held in
// queues and shares no code with the RTL.
//  - cic_full: the full-precision CIC response y[n] = sum h[k] x[n-k] with
//    h = (1 + z^-1 + ... + z^-15)^5, taken at n = 16m - 54 (the pipelined
//    filter's sample alignment).
//  - cic_pruned: the pruned-width filter (integrators 25/22/20/18/16 bits,
//    16-bit combs) at n = 16m + 15, returned MSB-aligned in 25 bits.
//  - fir_dec2: a direct-form FIR evaluated at input samples 1, 3, 5, ...,
//    rounded half up from 17 fractional bits and saturated to 25 bits; it
//    also counts saturated outputs.
//  - the full tap vectors of the two half-band filters and the droop filter.
package decim_ref_pkg;
  import decim_pkg::*;

  typedef longint lq_t [$];

  localparam longint MAXV = (64'sd1 <<< 24) - 1;
  localparam longint MINV = -(64'sd1 <<< 24);

  function automatic lq_t cic_taps();
    lq_t h, t;
    h = {1};
    for (int s = 0; s < 5; s++) begin
      t = {};
      for (int i = 0; i < h.size() + 15; i++) begin
        longint a = 0;
        for (int k = 0; k < 16; k++) if (i - k >= 0 && i - k < h.size()) a += h[i-k];
        t.push_back(a);
      end
      h = t;
    end
    return h;
  endfunction

  function automatic lq_t cic_full(const ref lq_t x);
    lq_t h, y;
    h = cic_taps();
    for (int m = 0; m < x.size() / 16; m++) begin
      longint a = 0;
      int n = 16 * m - 54;
      for (int k = 0; k < h.size(); k++) if (n - k >= 0) a += h[k] * x[n-k];
      y.push_back(a);
    end
    return y;
  endfunction

  // count: number of integrator additions that leave the 25-bit range
  function automatic lq_t cic_pruned(const ref lq_t x, output int wraps);
    int W [5] = '{25, 22, 20, 18, 16};
    longint unsigned ia [5] = '{0, 0, 0, 0, 0};
    longint unsigned cd [5] = '{0, 0, 0, 0, 0};
    longint full [5] = '{0, 0, 0, 0, 0};
    lq_t y;
    wraps = 0;
    for (int n = 0; n < x.size(); n++) begin
      longint unsigned v;
      longint f;
      v = longint'(x[n]) & ((64'd1 << 25) - 1);
      f = x[n];
      for (int j = 0; j < 5; j++) begin
        ia[j] = (ia[j] + v) & ((64'd1 << W[j]) - 1);
        if (j < 4) v = ia[j] >> (W[j] - W[j+1]);
        // 25-bit wrapping full-precision integrator, for counting wrap-arounds
        f = full[j] + f;
        if (f > MAXV || f < MINV) wraps++;
        f = ((f - MINV) & ((64'sd1 <<< 25) - 1)) + MINV;
        full[j] = f;
      end
      if (n % 16 == 15) begin
        longint unsigned c;
        v = ia[4];
        for (int j = 0; j < 5; j++) begin
          c = (v - cd[j]) & 64'hFFFF;
          cd[j] = v;
          v = c;
        end
        y.push_back(longint'(signed'(16'(v))) * 512);
      end
    end
    return y;
  endfunction

  function automatic lq_t fir_dec2(const ref lq_t x, const ref lq_t h, output int nsat);
    lq_t y;
    nsat = 0;
    for (int n = 1; n < x.size(); n += 2) begin
      longint a = 0, r;
      for (int i = 0; i < h.size(); i++) if (n - i >= 0) a += h[i] * x[n-i];
      r = (a + (64'sd1 <<< 16)) >>> 17;
      if (r > MAXV) begin r = MAXV; nsat++; end
      if (r < MINV) begin r = MINV; nsat++; end
      y.push_back(r);
    end
    return y;
  endfunction

  function automatic lq_t hb1_taps();
    return {0, 32768, 65536, 32768, 0};
  endfunction

  function automatic lq_t hb2_taps();
    lq_t h;
    for (int i = 0; i <= 40; i++) h.push_back(0);
    h[20] = 65536;
    for (int k = 0; k < 10; k++) begin
      h[20 - (2*k+1)] = HB2_COEF[k];
      h[20 + (2*k+1)] = HB2_COEF[k];
    end
    return h;
  endfunction

  function automatic lq_t droop_taps();
    lq_t h;
    for (int i = 0; i < 9; i++) h.push_back(0);
    for (int k = 0; k < 5; k++) begin
      h[k]     = DROOP_COEF[k];
      h[8 - k] = DROOP_COEF[k];
    end
    return h;
  endfunction
endpackage
