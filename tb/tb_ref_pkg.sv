// tb_ref_pkg: reference arithmetic for the testbenches, written from the number
// format (spike at timestep t = 2^(-(t-1)/4), weight {s,m} = (-1)^s 2^(-m/2), Q.16)
// with real-valued math rather than the RTL's lookup tables.
package tb_ref_pkg;

  // 2^(-q/4) in Q.16, q >= 0, truncated the way a right shift truncates:
  // round(2^(-(q mod 4)/4) * 65536) / 2^(q div 4)
  function automatic int unsigned pow2_q16(input int unsigned q);
    real frac;
    int unsigned base;
    frac = 2.0 ** (-(real'(q % 4)) / 4.0);
    base = $rtoi(frac * 65536.0 + 0.5);
    return base >> (q / 4);
  endfunction

  // contribution of one spike (timestep t) with weight code w[4:0]
  function automatic int ref_term(input int unsigned t, input logic [4:0] w);
    int unsigned m;
    int v;
    m = w[3:0];
    if (m == 15) return 0;
    v = int'(pow2_q16((t - 1) + 2 * m));
    return w[4] ? -v : v;
  endfunction

  function automatic int unsigned ref_threshold(input int unsigned t);
    return pow2_q16(t - 1);
  endfunction

endpackage
