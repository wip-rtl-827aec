// secp_ref_pkg: reference arithmetic for the testbenches.
//
// Plain, slow and independent of the RTL: field products are formed with a
// full 512-bit product and the % operator, inverses by Fermat's little
// theorem (z^(p-2)), and points are added with the textbook affine chord
// and tangent formulas. Used to compute expected results only.
package secp_ref_pkg;

  typedef logic [255:0] fe_t;

  localparam fe_t P  = 256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFE_FFFFFC2F;
  localparam fe_t GX = 256'h79BE667E_F9DCBBAC_55A06295_CE870B07_029BFCDB_2DCE28D9_59F2815B_16F81798;
  localparam fe_t GY = 256'h483ADA77_26A3C465_5DA4FBFC_0E1108A8_FD17B448_A6855419_9C47D08F_FB10D4B8;
  // published x coordinates of 2G and 3G, to check the reference itself
  localparam fe_t G2X = 256'hC6047F94_41ED7D6D_3045406E_95C07CD8_5C778E4B_8CEF3CA7_ABAC09B9_5C709EE5;
  localparam fe_t G3X = 256'hF9308A01_9258C310_49344F85_F89D5229_B531C845_836F99B0_8601F113_BCE036F9;

  function automatic fe_t fmul(fe_t a, fe_t b);
    logic [511:0] t;
    t = {256'd0, a} * {256'd0, b};
    t = t % {256'd0, P};
    return t[255:0];
  endfunction

  function automatic fe_t fadd(fe_t a, fe_t b);
    logic [256:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, P}) s = s - {1'b0, P};
    return s[255:0];
  endfunction

  function automatic fe_t fsub(fe_t a, fe_t b);
    return (a >= b) ? a - b : a + (P - b);
  endfunction

  function automatic fe_t finv(fe_t a);
    fe_t r, e, base;
    r = 256'd1;
    base = a;
    e = P - 256'd2;
    for (int i = 0; i < 256; i++) begin
      if (e[i]) r = fmul(r, base);
      base = fmul(base, base);
    end
    return r;
  endfunction

  // affine point; inf marks the point at infinity
  typedef struct {
    fe_t  x;
    fe_t  y;
    logic inf;
  } apt_t;

  function automatic apt_t padd(apt_t a, apt_t b);
    apt_t r;
    fe_t  lam;
    if (a.inf) return b;
    if (b.inf) return a;
    if (a.x == b.x) begin
      if (fadd(a.y, b.y) == '0) begin
        r.x = '0; r.y = '0; r.inf = 1'b1;
        return r;
      end
      lam = fmul(fmul(256'd3, fmul(a.x, a.x)), finv(fadd(a.y, a.y)));
    end else begin
      lam = fmul(fsub(b.y, a.y), finv(fsub(b.x, a.x)));
    end
    r.x = fsub(fsub(fmul(lam, lam), a.x), b.x);
    r.y = fsub(fmul(lam, fsub(a.x, r.x)), a.y);
    r.inf = 1'b0;
    return r;
  endfunction

  // k * p by double and add, least significant bit first
  function automatic apt_t pmul(logic [255:0] k, apt_t p);
    apt_t acc, d;
    acc.x = '0; acc.y = '0; acc.inf = 1'b1;
    d = p;
    for (int i = 0; i < 256; i++) begin
      if (k[i]) acc = padd(acc, d);
      d = padd(d, d);
    end
    return acc;
  endfunction

  function automatic apt_t gen();
    apt_t g;
    g.x = GX; g.y = GY; g.inf = 1'b0;
    return g;
  endfunction

endpackage
