// ray_tri_unit: fixed-point edge-function ray-triangle test on a quantized
// triangle.
//
// The triangle's three vertices are 8-bit coordinates in the grid of the leaf
// node that holds it; they are first moved into world fixed-point space with
// the leaf's origin and scale (a = origin + v0, etc.). The test then follows
// the published algorithm:
//   ab = b - a, ac = c - a, bc = c - b, a0 = o - a, b0 = o - b, c0 = o - c
//   aN = ab x a0, bN = bc x b0, cN = c0 x ac
//   dota/b/c = aN.d, bN.d, cN.d      -> any > 0: early reject
//   n = ab x ac, dotn = d.n, dist = -(a0.n) / dotn
//   dist < 0 or dist > tMax           -> reject
// The edge test accepts one winding only, exactly as written (all three dots
// must be <= 0). Because dota + dotb + dotc = dotn, a hit has dotn < 0; a
// triangle with dotn = 0 (ray in its plane, or degenerate) is rejected to
// avoid a division by zero (this design's choice).
//
// Widths come from the precision analysis: with vertices and origins in
// (R=16, Q=8) and directions in (1, 10), edge vectors need 26 bits, the edge
// normals 52 bits and the decisive dot products 65 bits (64 plus sign). No
// bit is dropped before the decision. The 64-bit world vertices are narrowed
// to the (R_TRI, Q_TRI) format; `range_err` flags a vertex or origin that
// does not fit, in which case the result is not meaningful.
//
// t_hit (the dist of the algorithm) is computed as (-(a0.n) << SH) / dotn,
// with SH chosen so that dist has the same Q_T = 9 fractional bits as the
// box test's t. Barycentrics (not
// specified beyond their name) are the edge ratios: weight of vertex 1 =
// dotc / dotn, weight of vertex 2 = dota / dotn, as 16-bit fractions with
// 1.0 = 32768 (this design's choice). Purely combinational.
module ray_tri_unit
  import rt_pkg::*;
#(
  parameter int unsigned VW = ((R_TRI > R_ORG) ? R_TRI : R_ORG) + Q_ORG + 1  // 25
) (
  input  logic signed [31:0]      node_origin [3],
  input  logic signed [7:0]       node_e      [3],
  input  qtri_t                   tri_q,
  input  logic signed [31:0]      org         [3],
  input  logic signed [DIR_W-1:0] dir         [3],
  input  logic [31:0]             t_max,
  output logic                    hit,
  output logic [31:0]             t_hit,
  output logic [15:0]             bary_u,
  output logic [15:0]             bary_v,
  output logic                    range_err
);

  localparam int unsigned EW  = VW + 1;            // edge / vertex-to-origin vectors
  localparam int unsigned CW  = 2 * EW;            // edge-plane normals
  localparam int unsigned DTW = CW + DIR_W + 1;    // decisive dot products (65)
  localparam int unsigned PW  = EW + CW + 2;       // a0 . n
  // a0.n has 2*Q_ORG + Q_ORG fractional bits, dotn has Q_ORG*2 + Q_DIR:
  // shifting by SH gives Q_T fractional bits in the quotient.
  localparam int unsigned SH  = Q_T + Q_DIR - Q_ORG;
  localparam int unsigned NW  = PW + SH + 1;

  typedef logic signed [EW-1:0] ev_t [3];
  typedef logic signed [CW-1:0] cv_t [3];

  logic signed [WORLD_W-1:0] vw [3][3];
  logic [8:0]                derr;

  for (genvar k = 0; k < 3; k++) begin : g_vert
    for (genvar a = 0; a < 3; a++) begin : g_axis
      dequant u_dq (
        .origin   (node_origin[a]),
        .e        (node_e[a]),
        .q        (tri_q.v[k][a]),
        .world    (vw[k][a]),
        .range_err(derr[3*k+a])
      );
    end
  end

  function automatic cv_t xprod(input ev_t p, input ev_t q);
    cv_t r;
    r[0] = CW'(p[1]) * CW'(q[2]) - CW'(p[2]) * CW'(q[1]);
    r[1] = CW'(p[2]) * CW'(q[0]) - CW'(p[0]) * CW'(q[2]);
    r[2] = CW'(p[0]) * CW'(q[1]) - CW'(p[1]) * CW'(q[0]);
    return r;
  endfunction

  function automatic logic signed [DTW-1:0] dot_d(input cv_t p, input logic signed [DIR_W-1:0] d [3]);
    return DTW'(p[0]) * DTW'(d[0]) + DTW'(p[1]) * DTW'(d[1]) + DTW'(p[2]) * DTW'(d[2]);
  endfunction

  logic signed [VW-1:0]  va [3], vb [3], vc [3], vo [3];
  ev_t                   ab, ac, bc, a0, b0, c0;
  cv_t                   an, bn, cn, n;
  logic signed [DTW-1:0] dota, dotb, dotc, dotn;
  logic signed [PW-1:0]  a0n;
  logic signed [NW-1:0]  num, q, qu, qv;
  logic                  fit_err;

  always_comb begin
    fit_err = 1'b0;
    for (int a = 0; a < 3; a++) begin
      va[a] = VW'(vw[0][a]);
      vb[a] = VW'(vw[1][a]);
      vc[a] = VW'(vw[2][a]);
      vo[a] = VW'(org[a]);
      if (WORLD_W'(va[a]) != vw[0][a] || WORLD_W'(vb[a]) != vw[1][a] ||
          WORLD_W'(vc[a]) != vw[2][a] || 32'(vo[a]) != org[a])
        fit_err = 1'b1;
      ab[a] = EW'(vb[a]) - EW'(va[a]);
      ac[a] = EW'(vc[a]) - EW'(va[a]);
      bc[a] = EW'(vc[a]) - EW'(vb[a]);
      a0[a] = EW'(vo[a]) - EW'(va[a]);
      b0[a] = EW'(vo[a]) - EW'(vb[a]);
      c0[a] = EW'(vo[a]) - EW'(vc[a]);
    end
    an   = xprod(ab, a0);
    bn   = xprod(bc, b0);
    cn   = xprod(c0, ac);
    dota = dot_d(an, dir);
    dotb = dot_d(bn, dir);
    dotc = dot_d(cn, dir);
    n    = xprod(ab, ac);
    dotn = dot_d(n, dir);
    a0n  = PW'(a0[0]) * PW'(n[0]) + PW'(a0[1]) * PW'(n[1]) + PW'(a0[2]) * PW'(n[2]);

    num = -(NW'(a0n) <<< SH);
    q   = '0;
    qu  = '0;
    qv  = '0;
    if (dotn != '0) begin
      q  = num / NW'(dotn);
      qu = (NW'(dotc) <<< 15) / NW'(dotn);
      qv = (NW'(dota) <<< 15) / NW'(dotn);
    end

    hit = 1'b1;
    if (dota > 0 || dotb > 0 || dotc > 0) hit = 1'b0;     // early rejection
    if (dotn == '0) hit = 1'b0;                            // parallel / degenerate
    if (q < 0 || q > NW'({1'b0, t_max})) hit = 1'b0;       // out of bounds
    t_hit  = q[31:0];
    bary_u = qu[15:0];
    bary_v = qv[15:0];
  end

  assign range_err = fit_err | (|derr);

endmodule
