// oct_decode: octahedral ray direction decoder.
//
// A ray stores its direction as one 32-bit word: two signed 16-bit
// components (u in bits 15:0, v in bits 31:16, 1.0 = 32767) of a point on the
// unfolded octahedron. This block turns that code into the signed fixed-point
// direction used by the intersection units (R_DIR = 1 range bit, Q_DIR = 10
// fractional bits, 12 bits with sign).
//
// Decoding (standard octahedral mapping): u and v are rescaled from Q15 to
// Q_DIR with rounding, z = 1 - |u| - |v|; when z < 0 the point lies in the
// folded lower half and x = sign(u)(1 - |v|), y = sign(v)(1 - |u|).
// The result has unit L1 norm, not unit length. The core never needs unit
// length: both slab and edge tests are scale invariant, and all hit distances
// of one ray share the same scale. Leaving out the normalisation (a square
// root and a division) is a choice of this design; the octahedral encoding
// itself follows the published method.
//
// Purely combinational, no clock.
module oct_decode
  import rt_pkg::*;
#(
  parameter int unsigned QD = Q_DIR,
  parameter int unsigned DW = R_DIR + Q_DIR + 1
) (
  input  logic [31:0]          oct,
  output logic signed [DW-1:0] dir [3]
);

  localparam int signed ONE = 1 <<< QD;

  // Q15 -> QD with round-half-up, clamped to [-1, 1].
  function automatic logic signed [DW+1:0] to_q(input logic signed [15:0] c);
    logic signed [17:0] r;
    r = (18'(c) + 18'(1 <<< (14 - QD))) >>> (15 - QD);
    if (r > 18'(ONE))  r = 18'(ONE);
    if (r < -18'(ONE)) r = -18'(ONE);
    return (DW+2)'(r);
  endfunction

  logic signed [DW+1:0] u, v, au, av, z, x, y;

  always_comb begin
    u  = to_q(oct[15:0]);
    v  = to_q(oct[31:16]);
    au = (u < 0) ? -u : u;
    av = (v < 0) ? -v : v;
    z  = (DW+2)'(ONE) - au - av;
    if (z < 0) begin
      x = (u < 0) ? -((DW+2)'(ONE) - av) : ((DW+2)'(ONE) - av);
      y = (v < 0) ? -((DW+2)'(ONE) - au) : ((DW+2)'(ONE) - au);
    end else begin
      x = u;
      y = v;
    end
    dir[0] = DW'(x);
    dir[1] = DW'(y);
    dir[2] = DW'(z);
  end

endmodule
