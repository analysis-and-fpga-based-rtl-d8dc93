// Reference model of the PBNN for the testbenches.
//
// Works straight from the network equation with integer arithmetic:
// y_i = sgn(w_a x_{i-1} + w_b x_i + w_c x_{i+1}) with sgn(0) = +1 on a ring,
// then x_i(t+1) = y_{sigma(i)}. States are bit vectors of up to 64 neurons,
// bit i-1 = neuron i, 1 = +1. The weights come from the connection number as
// (w_a, w_b, w_c) = signs of its bits 2, 1, 0. Nothing here shares code with
// the RTL's Boolean sum-of-products form.
package pbnn_ref_pkg;

  typedef bit [63:0] state_t;

  function automatic int sgnval(input bit b);
    return b ? 1 : -1;
  endfunction

  function automatic state_t ref_hidden(input state_t x, input int n, input int cn);
    state_t y;
    int wa, wb, wc;
    wa = (((cn >> 2) & 1) != 0) ? 1 : -1;
    wb = (((cn >> 1) & 1) != 0) ? 1 : -1;
    wc = ((cn & 1) != 0) ? 1 : -1;
    y = '0;
    for (int i = 0; i < n; i++) begin
      int s;
      s = wa * sgnval(x[(i + n - 1) % n]) + wb * sgnval(x[i]) + wc * sgnval(x[(i + 1) % n]);
      y[i] = (s >= 0);
    end
    return y;
  endfunction

  // sigma[k] is sigma(k+1), values 1..n.
  function automatic state_t ref_next(input state_t x, input int n, input int cn,
                                      input int sigma []);
    state_t y, xn;
    y  = ref_hidden(x, n, cn);
    xn = '0;
    for (int k = 0; k < n; k++) xn[k] = y[sigma[k] - 1];
    return xn;
  endfunction

  // Iterates from x0 long enough to leave any transient and returns the
  // period of the orbit reached, filling orbit with its points.
  function automatic int ref_orbit(input state_t x0, input int n, input int cn,
                                   input int sigma [], ref bit orbit [state_t]);
    state_t x, s;
    int p;
    x = x0;
    for (int t = 0; t < (1 << n) + 1 && t < 200000; t++) x = ref_next(x, n, cn, sigma);
    orbit.delete();
    s = x;
    p = 0;
    do begin
      orbit[x] = 1'b1;
      x = ref_next(x, n, cn, sigma);
      p++;
    end while (x != s);
    return p;
  endfunction

endpackage
