// squad_ref_pkg: reference models used by the testbenches.
//
// Behavioural, straightforward re-statements of what the pipeline should
// compute, written with plain integers, reals and dynamic arrays so that
// the testbenches can predict the hardware's outputs without reusing any
// of its code: the piecewise-linear sigmoid (evaluated in real numbers),
// 16-bit saturation, the feature definitions on a captured window, and a
// layer-by-layer forward pass of the network.
package squad_ref_pkg;

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // PLAN sigmoid on a Q7.8 input, result in Q7.8 (floor of the real value)
  function automatic int sig_ref(input int xq);
    real x, ax, y;
    x  = real'(xq) / 256.0;
    ax = (x < 0.0) ? -x : x;
    if (ax >= 5.0)        y = 1.0;
    else if (ax >= 2.375) y = ax / 32.0 + 0.84375;
    else if (ax >= 1.0)   y = ax / 8.0 + 0.625;
    else                  y = ax / 4.0 + 0.5;
    // the hardware floors |x|*scale before adding, so floor the same quantity
    begin
      int yq;
      yq = int'($floor(y * 256.0 + 1.0e-9));
      if (x < 0.0) yq = 256 - yq;
      return yq;
    end
  endfunction

  // Forward pass. sizes = {n_in, h1, ..., n_out}; w and b in storage order.
  function automatic void nn_ref(input int x[], input int w[], input int b[],
                                 input int sizes[], output int z[]);
    int a[], nxt[];
    int wp, bp;
    longint acc, pre;
    a  = x;
    wp = 0;
    bp = 0;
    for (int l = 0; l + 1 < sizes.size(); l++) begin
      nxt = new[sizes[l+1]];
      for (int o = 0; o < sizes[l+1]; o++) begin
        acc = 0;
        for (int i = 0; i < sizes[l]; i++) begin
          acc += longint'(w[wp]) * longint'(a[i]);
          wp++;
        end
        pre = (acc >>> 8) + longint'(b[bp]);
        bp++;
        nxt[o] = (l + 2 == sizes.size()) ? sat16(pre) : sig_ref(sat16(pre));
      end
      a = nxt;
    end
    z = a;
  endfunction

  typedef struct {
    int vmax, peak, start, stop, fwhm, rise, fall;
  } feat_ref_t;

  // Features of a captured window whose threshold crossing is at index pre.
  function automatic feat_ref_t feat_ref(input int cap[], input int thr, input int pre);
    feat_ref_t f;
    int first, last;
    f.vmax = cap[0];
    f.peak = 0;
    foreach (cap[i]) if (cap[i] > f.vmax) begin f.vmax = cap[i]; f.peak = i; end
    f.start = pre;
    f.stop  = pre;
    for (int i = pre + 1; i < cap.size(); i++) if (cap[i] >= thr) f.stop = i;
    first = -1;
    last  = -1;
    foreach (cap[i]) if (2 * cap[i] >= f.vmax) begin
      if (first < 0) first = i;
      last = i;
    end
    f.fwhm = (first < 0) ? 0 : last - first + 1;
    f.rise = (f.peak > f.start) ? f.peak - f.start : 0;
    f.fall = (f.stop > f.peak) ? f.stop - f.peak : 0;
    return f;
  endfunction

  // SNSPD-like pulse: linear rise over `rise` samples to `amp`, then an
  // exponential decay with time constant `tau` samples, on top of `base`.
  function automatic int pulse_at(input int k, input int amp, input int rise,
                                  input real tau, input int base);
    if (k < 0) return base;
    if (k < rise) return base + (amp - base) * k / rise;
    return base + int'(real'(amp - base) * $exp(-real'(k - rise) / tau));
  endfunction

endpackage
