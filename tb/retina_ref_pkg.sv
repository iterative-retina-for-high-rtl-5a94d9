// Reference model of the Iterative Retina arithmetic, for the testbenches.
//
// Recomputes cell sums, weights and the two-iteration search from the number
// formats documented in retina_pkg, using the simulator's own exp() rather
// than the RTL's table generator.
package retina_ref_pkg;

  localparam int NH = 18;

  // Gaussian weight of a distance d (1/64 crad) for a given sigma shift.
  function automatic int ref_w(int d, int shift);
    int mag, idx;
    real x;
    mag = (d < 0) ? -d : d;
    idx = mag >> shift;
    if (idx > 63) idx = 63;
    x = real'(idx) / 16.0;
    return int'($floor(255.0 * $exp(-x * x / 2.0) + 0.5));
  endfunction

  // Distance of a hit (r in 1/16 cm, theta in 1/64 crad) to the track
  // theta0 + c*r of a cell centred at (th0s, cs).
  function automatic int ref_d(int th0s, int cs, int r, int th);
    longint p;
    p = longint'(cs) * longint'(r);
    return th0s + int'(p >>> 12) - th;
  endfunction

  typedef struct {
    int n;
    int r  [NH];
    int th [NH];
  } event_t;

  function automatic void ref_cell(input event_t ev, input int th0s, input int cs,
                                   input int shift, input int wmin,
                                   output int sum, output int mask);
    int w;
    sum = 0;
    mask = 0;
    for (int i = 0; i < ev.n; i++) begin
      w = ref_w(ref_d(th0s, cs, ev.r[i], ev.th[i]), shift);
      sum += w;
      if (w >= wmin) mask |= (1 << i);
    end
  endfunction

endpackage
