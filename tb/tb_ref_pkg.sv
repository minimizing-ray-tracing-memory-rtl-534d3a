// tb_ref_pkg: reference models and stimulus helpers for the testbenches.
//
// The models are written straight from the published algorithms in wide
// (128-bit) integer arithmetic with sequential early returns, independent of
// the RTL's widths, parallel structure and helper modules. The octahedral
// encoder turns a real-valued direction into the 32-bit code a host would
// store, so stimulus can be described in ordinary coordinates.
package tb_ref_pkg;
  import rt_pkg::*;

  typedef logic signed [127:0] big_t;

  // ---------------------------------------------------------------- oct ---
  function automatic logic [31:0] oct_encode(input real x, input real y, input real z);
    real l1, u, v, tu, tv;
    int  iu, iv;
    l1 = (x < 0 ? -x : x) + (y < 0 ? -y : y) + (z < 0 ? -z : z);
    u  = x / l1;
    v  = y / l1;
    if (z < 0) begin
      tu = (1.0 - (v < 0 ? -v : v)) * (u < 0 ? -1.0 : 1.0);
      tv = (1.0 - (u < 0 ? -u : u)) * (v < 0 ? -1.0 : 1.0);
      u  = tu;
      v  = tv;
    end
    iu = $rtoi(u * 32767.0 + (u < 0 ? -0.5 : 0.5));
    iv = $rtoi(v * 32767.0 + (v < 0 ? -0.5 : 0.5));
    return {16'(iv), 16'(iu)};
  endfunction

  // Decoded direction, Q10 (reference: plain integer math, then fold).
  function automatic void oct_decode_ref(input logic [31:0] code, output int d [3]);
    int u, v, au, av, z;
    u = int'($signed(code[15:0]));
    v = int'($signed(code[31:16]));
    // round half up of c / 32 (floor division of c + 16 by 32)
    u = (u + 16 >= 0) ? (u + 16) / 32 : -((-(u + 16) + 31) / 32);
    v = (v + 16 >= 0) ? (v + 16) / 32 : -((-(v + 16) + 31) / 32);
    if (u > 1024) u = 1024;
    if (u < -1024) u = -1024;
    if (v > 1024) v = 1024;
    if (v < -1024) v = -1024;
    au = u < 0 ? -u : u;
    av = v < 0 ? -v : v;
    z  = 1024 - au - av;
    if (z < 0) begin
      d[0] = (u < 0) ? -(1024 - av) : (1024 - av);
      d[1] = (v < 0) ? -(1024 - au) : (1024 - au);
    end else begin
      d[0] = u;
      d[1] = v;
    end
    d[2] = z;
  endfunction

  // ----------------------------------------------------------- dequant ---
  function automatic big_t world_of(input logic [31:0] origin, input logic [7:0] e, input logic [7:0] q);
    big_t o, s;
    o = big_t'($signed(origin));
    s = big_t'(q);
    for (int i = 0; i < int'($signed(e)) + 8; i++) s = s * 2;
    return o + s;
  endfunction

  // C-style truncating division on wide values.
  function automatic big_t tdiv(input big_t n, input big_t d);
    big_t an, ad, q;
    an = n < 0 ? -n : n;
    ad = d < 0 ? -d : d;
    q  = an / ad;
    return ((n < 0) != (d < 0)) ? -q : q;
  endfunction

  // --------------------------------------------------------------- box ---
  // Algorithm 1 with FixedDiv (numerator scaled by 2^11).
  function automatic bit box_ref(input int org [3], input int dir [3],
                                 input big_t bmin [3], input big_t bmax [3]);
    big_t tmin, tmax, t1, t2, tt;
    tmin = 0;
    tmax = {1'b0, {74{1'b1}}} ;       // MAX_FIXED_POINT of a 76-bit t
    tmax = (tmax * 2) + 1;
    for (int a = 0; a < 3; a++) begin
      if (dir[a] == 0) begin
        if (big_t'(org[a]) < bmin[a] || big_t'(org[a]) > bmax[a]) return 1'b0;
      end else begin
        t1 = tdiv((bmin[a] - org[a]) * 2048, dir[a]);
        t2 = tdiv((bmax[a] - org[a]) * 2048, dir[a]);
        if (dir[a] < 0) begin
          tt = t1; t1 = t2; t2 = tt;
        end
        if (t1 > tmin) tmin = t1;
        if (t2 < tmax) tmax = t2;
        if (tmin > tmax) return 1'b0;
      end
    end
    return 1'b1;
  endfunction

  // -------------------------------------------------------------- tri ---
  function automatic void cross3(input big_t p [3], input big_t q [3], output big_t r [3]);
    r[0] = p[1] * q[2] - p[2] * q[1];
    r[1] = p[2] * q[0] - p[0] * q[2];
    r[2] = p[0] * q[1] - p[1] * q[0];
  endfunction

  function automatic big_t dot3(input big_t p [3], input big_t q [3]);
    return p[0] * q[0] + p[1] * q[1] + p[2] * q[2];
  endfunction

  // Algorithm 2 on world-space vertices. Returns hit; t in Q9, barycentrics
  // weight(b), weight(c) with 1.0 = 32768.
  function automatic bit tri_ref(input big_t va [3], input big_t vb [3], input big_t vc [3],
                                 input int org [3], input int dir [3], input longint t_max,
                                 output longint t, output int bu, output int bv);
    big_t ab [3], ac [3], bc [3], a0 [3], b0 [3], c0 [3], d [3];
    big_t an [3], bn [3], cn [3], n [3];
    big_t da, db, dc, dn, num;
    t = 0; bu = 0; bv = 0;
    for (int i = 0; i < 3; i++) begin
      ab[i] = vb[i] - va[i];
      ac[i] = vc[i] - va[i];
      bc[i] = vc[i] - vb[i];
      a0[i] = big_t'(org[i]) - va[i];
      b0[i] = big_t'(org[i]) - vb[i];
      c0[i] = big_t'(org[i]) - vc[i];
      d[i]  = big_t'(dir[i]);
    end
    cross3(ab, a0, an);
    cross3(bc, b0, bn);
    cross3(c0, ac, cn);
    da = dot3(an, d);
    db = dot3(bn, d);
    dc = dot3(cn, d);
    if (da > 0 || db > 0 || dc > 0) return 1'b0;
    cross3(ab, ac, n);
    dn = dot3(d, n);
    if (dn == 0) return 1'b0;
    num = -dot3(a0, n) * 2048;
    t   = longint'(tdiv(num, dn));
    if (tdiv(num, dn) < 0 || tdiv(num, dn) > big_t'(t_max)) return 1'b0;
    bu = int'(tdiv(dc * 32768, dn));
    bv = int'(tdiv(da * 32768, dn));
    return 1'b1;
  endfunction

  // float32 bit pattern of a real (mantissa truncated; zero below 2^-126)
  function automatic logic [31:0] f32(input real x);
    logic [63:0] d;
    int          e;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:0] == '0 || e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), d[51:29]};
  endfunction

  // value of a float32 bit pattern (normal numbers and zero)
  function automatic real r32(input logic [31:0] f);
    if (f[30:23] == 8'd0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

endpackage
