// rt_pkg: types and constants shared by the quantized ray stream tracing core.
//
// The number formats follow the precision analysis of the design: ray origins
// and node origins live in one signed world fixed-point grid with Q_ORG = 8
// fractional bits and R_ORG = 16 range bits; ray directions use R_DIR = 1,
// Q_DIR = 10. A compressed 8-wide node is 96 bytes, a quantized triangle is
// 9 bytes and a ray record is 32 bytes, all laid out little-endian in the
// order of the published C structures (first field in the lowest bytes).
// The encoding of the node type byte and of empty child slots, the layout of
// the 16-byte hit record and the t format (Q_T = 9) are choices of this design.
package rt_pkg;

  // Branching factor of the BVH (8-wide nodes are the main configuration).
  localparam int unsigned BVH_WIDTH = 8;

  // Fixed-point formats (R = range bits, Q = fractional bits, plus a sign).
  localparam int unsigned R_ORG = 16;
  localparam int unsigned Q_ORG = 8;
  localparam int unsigned R_DIR = 1;
  localparam int unsigned Q_DIR = 10;
  localparam int unsigned R_TRI = 16;
  localparam int unsigned Q_TRI = 8;
  localparam int unsigned DIR_W = R_DIR + Q_DIR + 1;   // 12-bit signed direction
  localparam int unsigned WORLD_W = 64;                // shared world space width
  // FixedDiv shifts the numerator by R+Q of the direction; t then has
  // Q_ORG + R_DIR = 9 fractional bits.
  localparam int unsigned DIV_SHIFT = R_DIR + Q_DIR;
  localparam int unsigned Q_T = Q_ORG + R_DIR;

  // Node type byte.
  localparam logic [7:0] NODE_INNER = 8'd0;
  localparam logic [7:0] NODE_LEAF  = 8'd1;

  // Child offset marking an empty child slot (any negative offset).
  localparam logic [31:0] CHILD_EMPTY = 32'hFFFF_FFFF;

  // Compressed node, 96 bytes (BVHNode8Comp). Last field = lowest bytes.
  typedef struct packed {
    logic [7:0]                   node_type;  // byte 95
    logic [2:0][7:0]              e;          // signed power-of-two scale per axis
    logic [2:0][31:0]             origin;     // signed world fixed-point origin
    logic [BVH_WIDTH-1:0][31:0]   child;      // inner: child node index; leaf: [0] primitiveOffset, [1] numPrimitives
    logic [BVH_WIDTH-1:0][7:0]    hi_z;
    logic [BVH_WIDTH-1:0][7:0]    lo_z;
    logic [BVH_WIDTH-1:0][7:0]    hi_y;
    logic [BVH_WIDTH-1:0][7:0]    lo_y;
    logic [BVH_WIDTH-1:0][7:0]    hi_x;
    logic [BVH_WIDTH-1:0][7:0]    lo_x;       // bytes 0..7
  } cnode_t;

  localparam int unsigned NODE_BYTES = $bits(cnode_t) / 8;

  // Quantized triangle, 9 bytes: v[vertex][axis], 8 bits each.
  typedef struct packed {
    logic [2:0][2:0][7:0] v;
  } qtri_t;

  localparam int unsigned TRI_BYTES = $bits(qtri_t) / 8;

  // 16-byte intersection record. t doubles as the ray's tMax.
  typedef struct packed {
    logic [31:0] flags;      // bit 0: a hit was recorded
    logic [15:0] bary_v;     // weight of vertex 2, 1.0 = 32768
    logic [15:0] bary_u;     // weight of vertex 1, 1.0 = 32768
    logic [31:0] tri_index;
    logic [31:0] t;          // unsigned, Q_T fractional bits
  } hit_t;

  // 32-byte ray: intersection record, origin, octahedral direction.
  typedef struct packed {
    logic [31:0]      oct_dir;  // [15:0] u, [31:16] v, signed Q15 each
    logic [2:0][31:0] origin;   // signed world fixed-point
    hit_t             hit;      // bytes 0..15
  } ray_t;

  localparam int unsigned RAY_BYTES = $bits(ray_t) / 8;

endpackage
