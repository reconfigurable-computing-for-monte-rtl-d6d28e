// janus_ref_pkg: reference models used by the testbenches.
//
// pr_model is a plain sequential Parisi-Rapuano generator (one number per
// call, lags 24/55/61 on a 62-word queue), written independently of the
// unrolled hardware. hb_prob gives the heat-bath table entry
// P(sigma=+1) = 1/(1+exp(-2*beta*phi)) with phi = 6 - 2F, as an unsigned
// fraction of 2^32 (saturated below 2^32).
package janus_ref_pkg;

  class pr_model;
    bit [31:0] q[$];
    function new();
      q = {};
      for (int i = 0; i < 62; i++) q.push_back(32'd0);
    endfunction
    function void set(int idx, bit [31:0] v);
      q[idx] = v;
    endfunction
    function bit [31:0] next();
      bit [31:0] i_new, r;
      i_new = q[38] + q[7];
      r     = i_new ^ q[1];
      void'(q.pop_front());
      q.push_back(i_new);
      return r;
    endfunction
  endclass

  function automatic bit [31:0] hb_prob(real beta, int f);
    real phi, p, v;
    phi = 6.0 - 2.0 * f;
    p   = 1.0 / (1.0 + $exp(-2.0 * beta * phi));
    v   = p * 4294967296.0;
    if (v > 4294967295.0) v = 4294967295.0;
    return 32'(longint'(v));
  endfunction

endpackage
