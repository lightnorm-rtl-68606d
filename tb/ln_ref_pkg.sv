// ln_ref_pkg: reference model of one LightNorm channel for the testbenches.
//
// Follows the operation order of the hardware units and rounds every single
// operation to FP10-A (forward) or FP10-B (backward) through fp_ref_pkg, so its
// results must match the RTL bit for bit:
//   forward   sum (in stream order), mu = sum*(1/N), sigma = (max-min)*C(B),
//             y = ((x-mu)/sigma)*gamma + beta
//   scalar    k0 = -(gamma/(sigma+eps)), k1 = ((gamma*C(B))*0.5)/(sigma*sqrt(sigma))
//   backward  mean = sum(dy)*(1/N), term = k1*sum((x-mu)*dy),
//             dx = (mean+dy)*k0 (+term if x = xmin, else -term if x = xmax)
package ln_ref_pkg;
  import fp_ref_pkg::*;

  typedef logic [9:0] w10_t;

  function automatic real ra(input real v); return to_real(from_real(v, 5, 4), 5, 4); endfunction
  function automatic real rb(input real v); return to_real(from_real(v, 6, 3), 6, 3); endfunction
  function automatic real va(input w10_t w); return to_real(64'(w), 5, 4); endfunction
  function automatic real vb(input w10_t w); return to_real(64'(w), 6, 3); endfunction
  function automatic w10_t wa(input real v); return w10_t'(from_real(v, 5, 4)); endfunction
  function automatic w10_t wb(input real v); return w10_t'(from_real(v, 6, 3)); endfunction

  // FP10-A word to FP10-B word
  function automatic w10_t a2b(input w10_t w); return wb(va(w)); endfunction

  // rounded quotient with the hardware's division-by-zero rule (saturate)
  function automatic real qdiv(input real a, input real b, input bit fmt_b);
    if (a == 0.0) return 0.0;
    if (b == 0.0) return fmt_b ? rb((a < 0.0) ? -1e300 : 1e300) : ra((a < 0.0) ? -1e300 : 1e300);
    return fmt_b ? rb(a / b) : ra(a / b);
  endfunction

  function automatic void fw_stat(input w10_t xs[$], input w10_t inv_n, input w10_t cb,
                                  output w10_t mu, output w10_t sigma,
                                  output w10_t xmax, output w10_t xmin);
    real acc, mx, mn;
    acc = va(xs[0]); mx = acc; mn = acc; xmax = xs[0]; xmin = xs[0];
    for (int i = 1; i < xs.size(); i++) begin
      acc = ra(acc + va(xs[i]));
      if (va(xs[i]) > mx) begin mx = va(xs[i]); xmax = xs[i]; end
      if (va(xs[i]) < mn) begin mn = va(xs[i]); xmin = xs[i]; end
    end
    mu    = wa(acc * va(inv_n));
    sigma = wa(ra(mx - mn) * va(cb));
  endfunction

  function automatic w10_t fw_y(input w10_t x, input w10_t mu, input w10_t sigma,
                                input w10_t gamma, input w10_t beta);
    real d, xh;
    d  = ra(va(x) - va(mu));
    xh = qdiv(d, va(sigma), 1'b0);
    return wa(ra(xh * va(gamma)) + va(beta));
  endfunction

  function automatic void scalar(input w10_t sigma_b, input w10_t gamma_b, input w10_t cb_b,
                                 input w10_t eps_b, output w10_t k0, output w10_t k1);
    real t, r, p, q, h, s;
    s  = vb(sigma_b);
    t  = rb(s + vb(eps_b));
    k0 = wb(-qdiv(vb(gamma_b), t, 1'b1));
    r  = rb($sqrt((s < 0.0) ? -s : s));
    p  = rb(s * r);
    q  = rb(vb(gamma_b) * vb(cb_b));
    h  = rb(q * 0.5);
    k1 = wb(qdiv(h, p, 1'b1));
  endfunction

  // xs_b and dys are FP10-B words
  function automatic void bw_acc(input w10_t xs_b[$], input w10_t dys[$], input w10_t mu_b,
                                 input w10_t inv_n_b, input w10_t k1,
                                 output w10_t mean, output w10_t term);
    real s0, s1, t;
    for (int i = 0; i < dys.size(); i++) begin
      t = rb(rb(vb(xs_b[i]) - vb(mu_b)) * vb(dys[i]));
      if (i == 0) begin s0 = vb(dys[i]); s1 = t; end
      else begin s0 = rb(s0 + vb(dys[i])); s1 = rb(s1 + t); end
    end
    mean = wb(s0 * vb(inv_n_b));
    term = wb(s1 * vb(k1));
  endfunction

  function automatic w10_t bw_dx(input w10_t x_b, input w10_t dy, input w10_t mean,
                                 input w10_t k0, input w10_t term,
                                 input w10_t xmin_b, input w10_t xmax_b);
    real g1, g2;
    g1 = rb(rb(vb(mean) + vb(dy)) * vb(k0));
    g2 = 0.0;
    if (x_b == xmin_b)      g2 = vb(term);
    else if (x_b == xmax_b) g2 = -vb(term);
    return wb(g1 + g2);
  endfunction
endpackage
