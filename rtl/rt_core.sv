// rt_core: ray stream tracing core on a quantized 8-wide BVH.
//
// The core finds, for a stream of up to RAY_DEPTH rays, the closest triangle
// each ray hits. Its purpose is to move few bytes: BVH nodes are stored as
// 96-byte compressed nodes (8-bit child bounds in a per-node power-of-two
// grid), triangles as 9 bytes (8-bit vertices in the grid of their leaf),
// rays as 32 bytes (fixed-point origin, octahedral direction, hit record),
// and all rays share one traversal stack whose entries carry ray lists, so
// each node is fetched once for all rays that visit it. Intersection is done
// directly on the quantized data in exact fixed-point arithmetic, so two
// triangles that share an edge can never both miss a ray.
//
// Blocks: stream_trav_ctrl (traversal state machine), stream_stack (shared
// stack), ray_list_mem (per-child banks of ray index lists), node_box_tester
// (eight dequantizers + slab tests per child), ray_tri_unit (edge-function
// test), oct_decode (ray direction), ray_quantizer (float ray input), three
// sram_1p arrays (nodes, triangles, rays) and traffic_counters (bytes per
// category).
//
// Host interface: while the core is idle the host writes nodes, triangles and
// rays through the *_we/*_addr/*_wdata ports and reads rays back through
// ray_addr/ray_rdata (one cycle latency). Rays can instead be written in
// single-precision floating point (rayf_we, rayf_org, rayf_dir): ray_quantizer
// converts them to the fixed-point origin and octahedral direction on the way
// into the ray memory, and an origin that does not fit sets range_err until
// the next start. Node 0 is the root. A one-cycle
// `start` with `num_rays` traces rays 0..num_rays-1; `done` pulses when the
// stack has emptied; `error` reports a stack or list memory overflow, and
// `range_err` a scene value outside the fixed-point ranges. The memory sizes
// are this design's choices (node and triangle memories hold the smallest
// evaluated scene); the formats, widths and algorithms follow the published
// design.
module rt_core
  import rt_pkg::*;
#(
  parameter int unsigned NODE_DEPTH  = 8192,
  parameter int unsigned TRI_DEPTH   = 16384,
  parameter int unsigned RAY_DEPTH   = 1024,
  parameter int unsigned LIST_DEPTH  = 8192,
  parameter int unsigned STACK_DEPTH = 256,
  parameter int unsigned CNT_W       = 48
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // control
  input  logic                          start,
  input  logic [$clog2(RAY_DEPTH):0]    num_rays,
  output logic                          busy,
  output logic                          done,
  output logic                          error,
  output logic [$clog2(STACK_DEPTH+1)-1:0] stack_depth,
  output logic                          range_err,
  // host access (ignored while busy)
  input  logic                          node_we,
  input  logic [$clog2(NODE_DEPTH)-1:0] node_waddr,
  input  cnode_t                        node_wdata,
  input  logic                          tri_we,
  input  logic [$clog2(TRI_DEPTH)-1:0]  tri_waddr,
  input  qtri_t                         tri_wdata,
  input  logic                          ray_we,
  input  logic [$clog2(RAY_DEPTH)-1:0]  ray_addr,
  input  ray_t                          ray_wdata,
  output ray_t                          ray_rdata,
  // host ray loading in floating point (quantized on the way in, at ray_addr)
  input  logic                          rayf_we,
  input  logic [31:0]                   rayf_org [3],
  input  logic [31:0]                   rayf_dir [3],
  // instrumentation
  input  logic                          cnt_clear,
  output logic [CNT_W-1:0]              node_bytes,
  output logic [CNT_W-1:0]              tri_bytes,
  output logic [CNT_W-1:0]              ray_bytes,
  output logic [CNT_W-1:0]              list_bytes,
  output logic [CNT_W-1:0]              stack_bytes,
  output logic [CNT_W-1:0]              total_bytes,
  output logic [CNT_W-1:0]              box_tests,
  output logic [CNT_W-1:0]              tri_tests,
  output logic                          ev_leaf,
  output logic                          ev_inner
);

  localparam int unsigned RAY_AW  = $clog2(RAY_DEPTH);
  localparam int unsigned NODE_AW = $clog2(NODE_DEPTH);
  localparam int unsigned TRI_AW  = $clog2(TRI_DEPTH);
  localparam int unsigned LIST_AW = $clog2(LIST_DEPTH);
  localparam int unsigned SE_W    = 32 + 3 + 3 * (LIST_AW + 1);

  // controller <-> memories
  logic [NODE_AW-1:0]   c_node_addr;
  cnode_t               node_q;
  logic [TRI_AW-1:0]    c_tri_addr;
  qtri_t                tri_q;
  logic [RAY_AW-1:0]    c_ray_addr;
  logic                 c_ray_we;
  ray_t                 c_ray_wdata;
  ray_t                 ray_q;
  logic [2:0]           l_rd_bank;
  logic [LIST_AW-1:0]   l_rd_addr;
  logic [RAY_AW-1:0]    l_rd_data;
  logic [BVH_WIDTH-1:0] l_wr_en;
  logic [LIST_AW-1:0]   l_wr_addr [BVH_WIDTH];
  logic [RAY_AW-1:0]    l_wr_data;
  logic                 s_push, s_pop, s_clear, s_empty, s_full, s_ovf;
  logic [SE_W-1:0]      s_din, s_top;
  logic [$clog2(STACK_DEPTH+1)-1:0] s_depth;

  // controller <-> units
  cnode_t               cur_node;
  ray_t                 cur_ray;
  qtri_t                cur_tri;
  logic [BVH_WIDTH-1:0] box_hit, box_valid;
  logic                 box_rerr, tri_rerr;
  logic                 tri_hit;
  logic [31:0]          tri_t;
  logic [15:0]          tri_u, tri_v;
  logic signed [DIR_W-1:0] dir [3];
  logic signed [31:0]   org [3];
  logic signed [31:0]   n_org [3];
  logic signed [7:0]    n_e [3];

  ray_t       rayf_q;
  logic       rayf_rerr;
  logic       c_err;
  assign error       = c_err | s_ovf;
  assign stack_depth = s_depth;

  // events
  logic       e_node, e_tri, e_rrd, e_rwr, e_ttest;
  logic [3:0] e_lrd, e_lwr, e_box;

  stream_trav_ctrl #(
    .RAY_AW (RAY_AW),
    .NODE_AW(NODE_AW),
    .TRI_AW (TRI_AW),
    .LIST_AW(LIST_AW)
  ) u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (start),
    .num_rays       (num_rays),
    .busy           (busy),
    .done           (done),
    .error          (c_err),
    .node_addr      (c_node_addr),
    .node_rdata     (node_q),
    .tri_addr       (c_tri_addr),
    .tri_rdata      (tri_q),
    .ray_addr       (c_ray_addr),
    .ray_we         (c_ray_we),
    .ray_wdata      (c_ray_wdata),
    .ray_rdata      (ray_q),
    .list_rd_bank   (l_rd_bank),
    .list_rd_addr   (l_rd_addr),
    .list_rd_data   (l_rd_data),
    .list_wr_en     (l_wr_en),
    .list_wr_addr   (l_wr_addr),
    .list_wr_data   (l_wr_data),
    .stk_push       (s_push),
    .stk_din        (s_din),
    .stk_pop        (s_pop),
    .stk_clear      (s_clear),
    .stk_top        (s_top),
    .stk_empty      (s_empty),
    .stk_full       (s_full),
    .cur_node       (cur_node),
    .cur_ray        (cur_ray),
    .cur_tri        (cur_tri),
    .box_hit_mask   (box_hit),
    .box_valid_mask (box_valid),
    .tri_hit        (tri_hit),
    .tri_t          (tri_t),
    .tri_bary_u     (tri_u),
    .tri_bary_v     (tri_v),
    .ev_node_fetch  (e_node),
    .ev_tri_fetch   (e_tri),
    .ev_ray_rd      (e_rrd),
    .ev_ray_wr      (e_rwr),
    .ev_list_rd     (e_lrd),
    .ev_list_wr     (e_lwr),
    .ev_box_tests   (e_box),
    .ev_tri_test    (e_ttest),
    .ev_leaf        (ev_leaf),
    .ev_inner       (ev_inner)
  );

  // ---------------- memories ----------------
  sram_1p #(.DW($bits(cnode_t)), .DEPTH(NODE_DEPTH)) u_node_mem (
    .clk  (clk),
    .we   (node_we && !busy),
    .addr (busy ? c_node_addr : node_waddr),
    .wdata(node_wdata),
    .rdata(node_q)
  );

  sram_1p #(.DW($bits(qtri_t)), .DEPTH(TRI_DEPTH)) u_tri_mem (
    .clk  (clk),
    .we   (tri_we && !busy),
    .addr (busy ? c_tri_addr : tri_waddr),
    .wdata(tri_wdata),
    .rdata(tri_q)
  );

  sram_1p #(.DW($bits(ray_t)), .DEPTH(RAY_DEPTH)) u_ray_mem (
    .clk  (clk),
    .we   (busy ? c_ray_we : (ray_we | rayf_we)),
    .addr (busy ? c_ray_addr : ray_addr),
    .wdata(busy ? c_ray_wdata : (rayf_we ? rayf_q : ray_wdata)),
    .rdata(ray_q)
  );
  assign ray_rdata = ray_q;

  ray_list_mem #(
    .NB   (BVH_WIDTH),
    .DEPTH(LIST_DEPTH),
    .IW   (RAY_AW)
  ) u_lists (
    .clk    (clk),
    .rd_bank(l_rd_bank),
    .rd_addr(l_rd_addr),
    .rd_data(l_rd_data),
    .wr_en  (l_wr_en),
    .wr_addr(l_wr_addr),
    .wr_data(l_wr_data)
  );

  stream_stack #(.EW(SE_W), .DEPTH(STACK_DEPTH)) u_stack (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (s_clear),
    .push    (s_push),
    .din     (s_din),
    .pop     (s_pop),
    .top     (s_top),
    .empty   (s_empty),
    .full    (s_full),
    .overflow(s_ovf),
    .depth   (s_depth)
  );

  // ---------------- host ray conversion ----------------
  ray_quantizer u_rq (
    .org_f    (rayf_org),
    .dir_f    (rayf_dir),
    .ray      (rayf_q),
    .range_err(rayf_rerr)
  );

  // ---------------- intersection units ----------------
  oct_decode u_oct (
    .oct(cur_ray.oct_dir),
    .dir(dir)
  );

  for (genvar a = 0; a < 3; a++) begin : g_ax
    assign org[a]   = cur_ray.origin[a];
    assign n_org[a] = cur_node.origin[a];
    assign n_e[a]   = cur_node.e[a];
  end

  node_box_tester u_box (
    .node      (cur_node),
    .org       (org),
    .dir       (dir),
    .hit_mask  (box_hit),
    .valid_mask(box_valid),
    .range_err (box_rerr)
  );

  ray_tri_unit u_tri (
    .node_origin(n_org),
    .node_e     (n_e),
    .tri_q      (cur_tri),
    .org        (org),
    .dir        (dir),
    .t_max      (cur_ray.hit.t),
    .hit        (tri_hit),
    .t_hit      (tri_t),
    .bary_u     (tri_u),
    .bary_v     (tri_v),
    .range_err  (tri_rerr)
  );

  // Range errors are only meaningful while the unit's result is used.
  logic rerr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  rerr_q <= 1'b0;
    else if (start && !busy)     rerr_q <= 1'b0;
    else if (rayf_we && !busy && rayf_rerr) rerr_q <= 1'b1;
    else if (e_box != '0 && box_rerr) rerr_q <= 1'b1;
    else if (e_ttest && tri_rerr)     rerr_q <= 1'b1;
  end
  assign range_err = rerr_q;

  // ---------------- instrumentation ----------------
  traffic_counters #(.CW(CNT_W)) u_cnt (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (cnt_clear),
    .node_fetch  (e_node),
    .tri_fetch   (e_tri),
    .ray_rd      (e_rrd),
    .ray_wr      (e_rwr),
    .list_rd     (e_lrd),
    .list_wr     (e_lwr),
    .stack_push  (s_push && !s_full),
    .stack_pop   (s_pop),
    .box_tests   (e_box),
    .tri_tests   (e_ttest),
    .node_bytes  (node_bytes),
    .tri_bytes   (tri_bytes),
    .ray_bytes   (ray_bytes),
    .list_bytes  (list_bytes),
    .stack_bytes (stack_bytes),
    .box_test_cnt(box_tests),
    .tri_test_cnt(tri_tests),
    .total_bytes (total_bytes)
  );

endmodule
