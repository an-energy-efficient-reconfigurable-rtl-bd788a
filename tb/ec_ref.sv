// Reference elliptic-curve arithmetic for the testbenches, written
// independently of the RTL: plain left-to-right double-and-add in affine
// coordinates, with inversion by Fermat's little theorem on 512-bit
// integers, and the point at infinity handled explicitly.
package ec_ref;
  typedef logic [511:0] big_t;

  function automatic big_t mulm(big_t a, big_t b, big_t p);
    return (a * b) % p;
  endfunction

  function automatic big_t powm(big_t b, big_t e, big_t p);
    big_t r = 1;
    for (int i = 255; i >= 0; i--) begin
      r = mulm(r, r, p);
      if (e[i]) r = mulm(r, b, p);
    end
    return r;
  endfunction

  function automatic big_t invm(big_t a, big_t p);
    return powm(a, p - 2, p);
  endfunction

  function automatic big_t subm(big_t a, big_t b, big_t p);
    return (a + p - b) % p;
  endfunction

  // Q = Q + T; inf flags mark the point at infinity
  task automatic padd(inout big_t qx, inout big_t qy, inout bit qinf,
                      input big_t tx, input big_t ty, input bit tinf,
                      input big_t a, input big_t p);
    big_t l, x3;
    if (tinf) return;
    if (qinf) begin qx = tx; qy = ty; qinf = 0; return; end
    if (qx == tx) begin
      if ((qy + ty) % p == 0) begin qinf = 1; return; end
      l = mulm((3 * mulm(qx, qx, p) + a) % p, invm((2 * qy) % p, p), p);
    end else begin
      l = mulm(subm(ty, qy, p), invm(subm(tx, qx, p), p), p);
    end
    x3 = subm(subm(mulm(l, l, p), qx, p), tx, p);
    qy = subm(mulm(l, subm(qx, x3, p), p), qy, p);
    qx = x3;
  endtask

  task automatic smul(input big_t k, input big_t gx, input big_t gy,
                      input big_t a, input big_t p,
                      output big_t rx, output big_t ry, output bit rinf);
    big_t qx = 0, qy = 0;
    bit qinf = 1;
    for (int i = 255; i >= 0; i--) begin
      padd(qx, qy, qinf, qx, qy, qinf, a, p);
      if (k[i]) padd(qx, qy, qinf, gx, gy, 0, a, p);
    end
    rx = qx; ry = qy; rinf = qinf;
  endtask
endpackage
