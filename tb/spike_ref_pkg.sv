// spike_ref_pkg: integer reference model of one detector channel, and a
// synthetic neural signal source, for the module and system testbenches.
//
// The model restates the algorithm with plain integers, independently of
// the RTL: two-sample smoothing with floor((a+b)/4), TEO of X and S at the
// previous sample truncated by floor division by 64 and 8 and saturated,
// thresholds 2^C1*sigma and 2^C2*sigma + 2^C3*sigma^2 on the integer part of
// sigma_S, strict comparisons, and the window update of sigma_S by
// (count - 20)/1024 clamped to [0, 32767].
package spike_ref_pkg;

  typedef struct {
    int x1, x2, x3;
    int sigma;   // Q5.10 raw value
    int cnt;
  } ref_chan_t;

  typedef struct {
    bit det_x, det_s, spike, upd;
  } ref_out_t;

  function automatic int fdiv(int a, int d);
    int q = a / d;
    if ((a % d != 0) && (a < 0)) q--;
    return q;
  endfunction

  function automatic int sat(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  function automatic int pow2(int v, int e);
    return (e >= 0) ? (v * (1 << e)) : (v / (1 << (-e)));
  endfunction

  function automatic void ref_reset(ref ref_chan_t c, input int sigma_init);
    c.x1 = 0; c.x2 = 0; c.x3 = 0; c.sigma = sigma_init; c.cnt = 0;
  endfunction

  // One sample x0 of a channel; window_end closes the sigma window.
  function automatic ref_out_t ref_step(ref ref_chan_t c, input int x0, input bit window_end,
                                        input int c1 = 2, input int c2 = 1, input int c3 = -1);
    ref_out_t o;
    int s0, s1, s2, xt, st, si, thx, ths, tot, ns;
    s0 = fdiv(x0 + c.x1, 4);
    s1 = fdiv(c.x1 + c.x2, 4);
    s2 = fdiv(c.x2 + c.x3, 4);
    xt = sat(fdiv(c.x1 * c.x1 - x0 * c.x2, 64), -128, 127);
    st = sat(fdiv(s1 * s1 - s0 * s2, 8), -256, 255);
    si = c.sigma / 1024;
    thx = sat(pow2(si, c1), 0, 127);
    ths = sat(pow2(si, c2) + pow2(si * si, c3), 0, 255);
    o.det_x = xt > thx;
    o.det_s = st > ths;
    o.spike = o.det_x || o.det_s;
    tot = c.cnt + ((s0 > si) ? 1 : 0);
    o.upd = 0;
    if (window_end) begin
      ns = sat(c.sigma + tot - 20, 0, 32767);
      o.upd = (ns != c.sigma);
      c.sigma = ns;
      c.cnt = 0;
    end else begin
      c.cnt = sat(tot, 0, 255);
    end
    c.x3 = c.x2; c.x2 = c.x1; c.x1 = x0;
    return o;
  endfunction

  // Synthetic recording of one channel: approximately Gaussian noise of
  // amplitude noise_amp plus, at random, a biphasic spike scaled by
  // spike_amp/64. The result is clipped to the 7-bit range.
  typedef struct {
    int noise_amp;
    int spike_amp;
    int spike_rate;  // one spike start per spike_rate samples on average
    int phase;       // position inside the current spike, -1 = none
  } src_t;

  localparam int SHAPE[8] = '{0, -20, -56, -64, -30, 18, 24, 10};

  function automatic int src_next(ref src_t s);
    int v = 0;
    for (int i = 0; i < 4; i++) v += int'($urandom_range(2 * s.noise_amp)) - s.noise_amp;
    v = v / 2;
    if (s.phase < 0 && s.spike_rate > 0 && $urandom_range(s.spike_rate - 1) == 0) s.phase = 0;
    if (s.phase >= 0) begin
      v += (SHAPE[s.phase] * s.spike_amp) / 64;
      s.phase = (s.phase == 7) ? -1 : s.phase + 1;
    end
    return sat(v, -64, 63);
  endfunction

endpackage
