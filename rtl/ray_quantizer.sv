// ray_quantizer: converts a floating-point ray into the core's 32-byte ray.
//
// Rays are generated in IEEE-754 single precision. Before tracing, each ray is
// turned into the fixed-point form the intersection units use: the origin into
// the signed world grid (Q_ORG = 8 fractional bits, 32-bit words) and the
// direction into a 4-byte octahedral code. The hit record is cleared
// (t = all ones, no hit).
//
// Origin: each component m * 2^(e-150) is shifted to Q_ORG fractional bits and
// rounded towards minus infinity, so the fixed-point origin never lies above
// the float origin (the same downward rounding the node origins use).
// Components too large for 32 bits saturate and raise range_err; so do
// infinities and NaNs. Denormals are taken as zero.
//
// Direction: the three magnitudes are aligned to the largest exponent (with
// GUARD extra bits, truncating the smaller ones), summed to S = |x|+|y|+|z|,
// and the octahedral coordinates are formed as exact fractions of S:
// upper half (z >= 0)  u = |x|/S,      v = |y|/S,
// lower half (z < 0)   u = (S-|y|)/S,  v = (S-|x|)/S  (the fold),
// each with the sign of x resp. y, rounded to nearest with 1.0 = 32767.
// Building the folded value from S - |y| rather than 1 - |v| avoids a second
// rounding. A zero direction gives the code 0 (decodes to +z).
//
// What follows the published design: rays are quantized once, before
// traversal, origin and direction to fixed point, the direction by the
// octahedral mapping into a single 4-byte word, and the record is 32 bytes.
// The rounding of the origin, the alignment, the 1.0 = 32767 scale and the
// handling of special values are choices of this design.
//
// Interface: org_f[3], dir_f[3] (float32 bit patterns) in; ray (ray_t) and
// range_err out. Purely combinational: one divider per octahedral component.
// The 128 hit-record bits of `ray` are constant by design (a cleared record).
module ray_quantizer
  import rt_pkg::*;
#(
  parameter int unsigned QO    = Q_ORG,
  parameter int unsigned GUARD = 8
) (
  input  logic [31:0] org_f [3],
  input  logic [31:0] dir_f [3],
  output ray_t        ray,
  output logic        range_err
);

  localparam int unsigned AW = 24 + GUARD;       // aligned magnitude width
  localparam int unsigned SW = AW + 2;           // sum of three magnitudes
  localparam int unsigned NW = SW + 17;          // numerator width

  // float32 -> signed Q(QO) int32, rounded down, saturating.
  function automatic logic [32:0] to_fixed(input logic [31:0] f);
    logic        s, lost, sat;
    logic [7:0]  ex;
    logic [23:0] m;
    logic [31:0] mag;
    logic [31:0] r;
    int          k;
    s    = f[31];
    ex   = f[30:23];
    m    = (ex == 8'd0) ? 24'd0 : {1'b1, f[22:0]};
    k    = int'(ex) - 150 + int'(QO);          // value = m * 2^k
    lost = 1'b0;
    sat  = (ex == 8'hFF);
    mag  = '0;
    if (k >= 0) begin
      if (k >= 8) sat = (m != '0) || sat;       // m >= 2^23 -> needs > 31 bits
      else        mag = 32'(m) << k;
    end else if (k > -25) begin
      mag  = 32'(m) >> (-k);
      lost = (m & ((24'd1 << (-k)) - 24'd1)) != '0;
    end else begin
      lost = (m != '0);
    end
    if (sat)    r = s ? 32'h8000_0000 : 32'h7FFF_FFFF;
    else if (s) r = -(mag + 32'(lost));
    else        r = mag;
    return {sat, r};
  endfunction

  logic [32:0] ofx [3];
  logic [7:0]  ex [3];
  logic [7:0]  emax;
  logic [AW-1:0] am [3];
  logic [SW-1:0] s;
  logic [SW-1:0] nu, nv;
  logic [15:0]   qu, qv;
  logic          su, sv, dir_bad;

  // round(n * 32767 / S) = floor((2 * 32767 * n + S) / (2 S))
  function automatic logic [15:0] frac_q15(input logic [SW-1:0] n, input logic [SW-1:0] d);
    logic [NW-1:0] num, den, q;
    num = NW'(n) * NW'(65534) + NW'(d);
    den = NW'(d) << 1;
    q   = num / den;
    return 16'(q);
  endfunction

  always_comb begin
    for (int a = 0; a < 3; a++) ofx[a] = to_fixed(org_f[a]);

    dir_bad = 1'b0;
    emax    = '0;
    for (int a = 0; a < 3; a++) begin
      ex[a]   = dir_f[a][30:23];
      dir_bad = dir_bad | (ex[a] == 8'hFF);
      if (ex[a] > emax) emax = ex[a];
    end
    for (int a = 0; a < 3; a++) begin
      logic [7:0] d;
      d = emax - ex[a];
      if (ex[a] == 8'd0 || d >= 8'(AW)) am[a] = '0;
      else am[a] = ({1'b1, dir_f[a][22:0], GUARD'(0)}) >> d;
    end
    s = SW'(am[0]) + SW'(am[1]) + SW'(am[2]);

    if (dir_f[2][31] && am[2] != '0) begin     // z < 0: fold
      nu = s - SW'(am[1]);
      nv = s - SW'(am[0]);
    end else begin
      nu = SW'(am[0]);
      nv = SW'(am[1]);
    end
    su = dir_f[0][31] && am[0] != '0;
    sv = dir_f[1][31] && am[1] != '0;

    if (s == '0) begin
      qu = '0;
      qv = '0;
    end else begin
      qu = frac_q15(nu, s);
      qv = frac_q15(nv, s);
    end

    ray            = '0;
    ray.oct_dir[15:0]  = su ? -qu : qu;
    ray.oct_dir[31:16] = sv ? -qv : qv;
    for (int a = 0; a < 3; a++) ray.origin[a] = ofx[a][31:0];
    ray.hit.t      = 32'hFFFF_FFFF;
    range_err      = ofx[0][32] | ofx[1][32] | ofx[2][32] | dir_bad;
  end

endmodule
