// mcr_ref_pkg: reference model of MCR arithmetic used by the testbenches.
// Written independently of the RTL: trigonometry uses real-valued $cos/$sin,
// modular arithmetic uses plain integer % r, and the normalization reference
// computes the winner-take-all inner products directly.
package mcr_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic int rround(real x);
    return (x >= 0.0) ? int'($floor(x + 0.5)) : -int'($floor(-x + 0.5));
  endfunction

  function automatic int ref_cos(int k, int r, int amp);
    return rround(amp * $cos(2.0 * PI * k / r));
  endfunction

  function automatic int ref_sin(int k, int r, int amp);
    return rround(amp * $sin(2.0 * PI * k / r));
  endfunction

  function automatic int mod_r(int x, int r);
    int m;
    m = x % r;
    return (m < 0) ? m + r : m;
  endfunction

  // per-component modular distance min((a-b) mod r, (b-a) mod r)
  function automatic int comp_dist(int a, int b, int r);
    int d1, d2;
    d1 = mod_r(a - b, r);
    d2 = mod_r(b - a, r);
    return (d1 < d2) ? d1 : d2;
  endfunction

  // winner-take-all projection of (re, im): the quadrant from the signs,
  // then the largest inner product among its r/4+1 directions, the lowest
  // candidate winning a tie
  function automatic int ref_norm(longint re, longint im, int r, int amp);
    int q, best_k;
    longint best, ip;
    if (re >= 0 && im >= 0) q = 0;
    else if (re < 0 && im >= 0) q = 1;
    else if (re < 0 && im < 0) q = 2;
    else q = 3;
    best_k = q * r / 4;
    best   = re * ref_cos(best_k, r, amp) + im * ref_sin(best_k, r, amp);
    for (int c = 1; c <= r / 4; c++) begin
      int k;
      k  = (q * r / 4 + c) % r;
      ip = re * ref_cos(k, r, amp) + im * ref_sin(k, r, amp);
      if (ip > best) begin
        best   = ip;
        best_k = k;
      end
    end
    return best_k;
  endfunction

endpackage
