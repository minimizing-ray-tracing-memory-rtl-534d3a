// dequant: maps one 8-bit local grid coordinate of a node into world space.
//
// Every node spans a local 256-step grid (0..255 per axis) whose origin is a
// signed 32-bit point in the world fixed-point grid (Q_ORG = 8 fractional
// bits) and whose step is a power of two, 2^e world units, with e a signed
// byte per axis. A grid coordinate q therefore lies at
//     world = origin + q * 2^e = origin + (q << (e + Q_ORG))
// in world fixed-point units, which is exact: no rounding happens here. The
// result is a 64-bit signed world coordinate, the shared high precision space
// in which rays, boxes and triangles meet.
//
// e below -Q_ORG would need world bits finer than the grid has; the precision
// analysis bounds leaf precision at Q_TRI = Q_ORG = 8, so such scales do not
// occur in a valid scene. This block clamps the shift to [0, SHIFT_MAX] and
// raises `range_err` when it had to clamp (a choice of this design).
//
// Purely combinational.
module dequant
  import rt_pkg::*;
#(
  parameter int unsigned QO        = Q_ORG,
  parameter int unsigned WW        = WORLD_W,
  parameter int unsigned SHIFT_MAX = 40
) (
  input  logic signed [31:0]   origin,
  input  logic signed [7:0]    e,
  input  logic [7:0]           q,
  output logic signed [WW-1:0] world,
  output logic                 range_err
);

  logic signed [9:0] sh;
  logic [5:0]        sh_c;

  always_comb begin
    sh        = 10'(e) + 10'(QO);
    range_err = 1'b0;
    if (sh < 0) begin
      sh_c      = '0;
      range_err = 1'b1;
    end else if (sh > 10'(SHIFT_MAX)) begin
      sh_c      = 6'(SHIFT_MAX);
      range_err = 1'b1;
    end else begin
      sh_c = sh[5:0];
    end
    world = WW'(origin) + (WW'(q) << sh_c);
  end

endmodule
