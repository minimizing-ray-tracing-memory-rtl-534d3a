// node_box_tester: one ray against all children of a compressed wide node.
//
// For each of the BVH_WIDTH child slots the six quantized bounding planes
// (lo/hi per axis, 8 bits each) are moved into the 64-bit world space with the
// node's own origin and per-axis power-of-two scale (dequant), and the
// dequantized box goes through its own slab test (ray_box_unit). All slots
// are evaluated in the same cycle, the SIMD over eight boxes that wide nodes
// are meant to enable. The node stores child indices in a 32-byte union;
// a negative index marks an empty slot, which never reports a hit (this
// empty-slot encoding is a choice of this design). Leaf nodes report no hits.
//
// Outputs: hit_mask (bit c = ray enters child c) and valid_mask (children
// actually tested, used for the box-test counter). Purely combinational.
module node_box_tester
  import rt_pkg::*;
(
  input  cnode_t                   node,
  input  logic signed [31:0]       org [3],
  input  logic signed [DIR_W-1:0]  dir [3],
  output logic [BVH_WIDTH-1:0]     hit_mask,
  output logic [BVH_WIDTH-1:0]     valid_mask,
  output logic                     range_err
);

  logic [BVH_WIDTH-1:0] hit_c;
  logic [BVH_WIDTH-1:0] err_c;

  for (genvar c = 0; c < BVH_WIDTH; c++) begin : g_child
    logic [7:0]                 qlo [3];
    logic [7:0]                 qhi [3];
    logic signed [WORLD_W-1:0]  bmin [3];
    logic signed [WORLD_W-1:0]  bmax [3];
    logic [5:0]                 err;
    logic signed [WORLD_W+DIV_SHIFT:0] tmin_unused, tmax_unused;

    assign qlo[0] = node.lo_x[c];
    assign qlo[1] = node.lo_y[c];
    assign qlo[2] = node.lo_z[c];
    assign qhi[0] = node.hi_x[c];
    assign qhi[1] = node.hi_y[c];
    assign qhi[2] = node.hi_z[c];

    for (genvar a = 0; a < 3; a++) begin : g_axis
      dequant u_lo (
        .origin   (node.origin[a]),
        .e        (node.e[a]),
        .q        (qlo[a]),
        .world    (bmin[a]),
        .range_err(err[2*a])
      );
      dequant u_hi (
        .origin   (node.origin[a]),
        .e        (node.e[a]),
        .q        (qhi[a]),
        .world    (bmax[a]),
        .range_err(err[2*a+1])
      );
    end

    ray_box_unit u_box (
      .org (org),
      .dir (dir),
      .bmin(bmin),
      .bmax(bmax),
      .hit (hit_c[c]),
      .tmin(tmin_unused),
      .tmax(tmax_unused)
    );

    assign valid_mask[c] = (node.node_type == NODE_INNER) && !node.child[c][31];
    assign hit_mask[c]   = valid_mask[c] && hit_c[c];
    assign err_c[c]      = valid_mask[c] && (|err);
  end

  assign range_err = |err_c;

endmodule
