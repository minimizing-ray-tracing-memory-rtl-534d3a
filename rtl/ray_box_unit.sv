// ray_box_unit: fixed-point slab test of one ray against one box.
//
// The box corners arrive already moved into the 64-bit world fixed-point
// space (see dequant); the ray origin is in the same grid and the direction
// is the decoded Q_DIR fixed-point vector. Per axis the unit follows the
// published slab algorithm step by step:
//   * direction component zero: the ray is parallel to the slab and misses
//     when its origin lies below min or above max on that axis;
//   * otherwise t1 = FixedDiv(min - org, dir), t2 = FixedDiv(max - org, dir),
//     swapped when dir < 0, and the interval [tmin, tmax] is narrowed.
// tmin starts at 0 and tmax at the largest representable value; the box is
// hit when no axis empties the interval. FixedDiv shifts the numerator left
// by R_DIR + Q_DIR bits before an integer division (truncating toward zero),
// so t carries Q_T = Q_ORG + R_DIR fractional bits, as in the fixed-point
// division of the design. The three axes are evaluated in parallel and
// combined, which is equivalent to the sequential early returns.
//
// Outputs tmin/tmax of the surviving interval for observation. Purely
// combinational.
module ray_box_unit
  import rt_pkg::*;
#(
  parameter int unsigned WW = WORLD_W,
  parameter int unsigned DW = DIR_W,
  parameter int unsigned SH = DIV_SHIFT,
  parameter int unsigned TW = WW + 1 + SH
) (
  input  logic signed [31:0]   org   [3],
  input  logic signed [DW-1:0] dir   [3],
  input  logic signed [WW-1:0] bmin  [3],
  input  logic signed [WW-1:0] bmax  [3],
  output logic                 hit,
  output logic signed [TW-1:0] tmin,
  output logic signed [TW-1:0] tmax
);

  localparam logic signed [TW-1:0] T_MAX = {1'b0, {(TW-1){1'b1}}};

  logic signed [TW-1:0] t1 [3];
  logic signed [TW-1:0] t2 [3];
  logic signed [TW-1:0] lo, hi;
  logic                 outside [3];

  always_comb begin
    for (int a = 0; a < 3; a++) begin
      logic signed [WW:0]   o, dmin, dmax;
      logic signed [TW-1:0] n1, n2, ta, tb;
      o    = (WW+1)'(org[a]);
      dmin = (WW+1)'(bmin[a]) - o;
      dmax = (WW+1)'(bmax[a]) - o;
      outside[a] = (dir[a] == '0) && ((o < (WW+1)'(bmin[a])) || (o > (WW+1)'(bmax[a])));
      n1 = TW'(dmin) <<< SH;
      n2 = TW'(dmax) <<< SH;
      if (dir[a] == '0) begin
        ta = '0;
        tb = '0;
      end else begin
        ta = n1 / TW'(dir[a]);
        tb = n2 / TW'(dir[a]);
      end
      if (dir[a] < 0) begin
        t1[a] = tb;
        t2[a] = ta;
      end else begin
        t1[a] = ta;
        t2[a] = tb;
      end
    end
    lo  = '0;
    hi  = T_MAX;
    hit = 1'b1;
    for (int a = 0; a < 3; a++) begin
      if (dir[a] == '0) begin
        if (outside[a]) hit = 1'b0;
      end else begin
        if (t1[a] > lo) lo = t1[a];
        if (t2[a] < hi) hi = t2[a];
        if (lo > hi) hit = 1'b0;
      end
    end
    tmin = lo;
    tmax = hi;
  end

endmodule
