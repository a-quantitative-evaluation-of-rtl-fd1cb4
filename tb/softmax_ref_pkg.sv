// softmax_ref_pkg: real-number reference models used by the softmax
// testbenches. They restate each exponential approximation in floating
// point, independently of the RTL's fixed-point arithmetic:
//   method 0  Taylor polynomial 1 + x + ... + x^order/order!
//   method 1  chord through e^x at the ends of the segment containing x
//   method 2  parabola through e^x at the start, middle and end of it
// The segments split [-1, 1) into `samples` equal parts; outside the domain
// the edge segment is extended. Results are clipped to [0, maxv] as the
// hardware clips them. err_bound() gives the largest deviation the fixed-
// point datapath may add (in units of one LSB) for an argument x.
package softmax_ref_pkg;

  function automatic real ref_exp(real v, int method, int order, int samples, real maxv);
    real r, h, x0, x1, xm, y0, y1, ym, t;
    int  p;
    if (method == 0) begin
      r = 1.0; t = 1.0;
      for (int n = 1; n <= order; n++) begin
        t = t * v / n;
        r = r + t;
      end
    end else begin
      h = 2.0 / samples;
      p = $rtoi($floor((v + 1.0) / h));
      if (p < 0) p = 0;
      if (p > samples - 1) p = samples - 1;
      x0 = -1.0 + p * h; x1 = x0 + h; xm = x0 + h / 2.0;
      y0 = $exp(x0); y1 = $exp(x1); ym = $exp(xm);
      if (method == 1)
        r = y0 + (y1 - y0) * (v - x0) / h;
      else
        r = y0 * (v - xm) * (v - x1) / ((x0 - xm) * (x0 - x1))
          + ym * (v - x0) * (v - x1) / ((xm - x0) * (xm - x1))
          + y1 * (v - x0) * (v - xm) / ((x1 - x0) * (x1 - xm));
    end
    if (r < 0.0) r = 0.0;
    if (r > maxv) r = maxv;
    return r;
  endfunction

  // Taylor: each truncated term error is multiplied by later factors of x;
  // interpolation: rounding of the stored coefficients times |x|, |x|^2.
  function automatic real err_bound(real v, int method);
    real a = (v < 0.0) ? -v : v;
    return (method == 0) ? 3.0 + 2.0 * a * a : 2.0 + a + a * a;
  endfunction

endpackage
