// tb_rt_core: end-to-end test of the ray stream tracing core at its default
// sizes.
//
// A random scene of 240 small triangles in a 16 x 16 x 8 unit box is built into a quantized 8-wide BVH
// (tb_scene_pkg), loaded through the host ports together with 300 rays, and
// traced as one stream. Every ray's result is compared with a brute-force
// search over all triangles using the reference triangle test: hit flag,
// closest t, and a triangle (and barycentrics) that reaches that t.
// Also checked: no error or range flag, the byte counters against the
// number of node visits, triangle tests and ray accesses, and the documented
// cycle count (4 cycles per ray at an inner node, 3 + 3 per triangle (+1
// write-back) per ray at a leaf, 2 per stack entry, 8 push cycles per inner
// node, 1 per ray to set up the first list).
// Mechanisms counted (each must occur): inner-node filtering, leaf
// intersection, a ray dropped by some child box, an empty child slot, a ray
// with a zero direction component at a box test (parallel case), a closer
// hit replacing an earlier one, a triangle rejected by the edge test, a ray
// that hits nothing, a ray write-back, and a ray loaded through the
// floating-point port (every tenth ray; its converted origin and direction
// code are checked against the real-valued octahedral encoding, +-1 step).
module tb_rt_core;
  import rt_pkg::*;
  import tb_ref_pkg::*;
  import tb_scene_pkg::*;

  localparam int NR = 300;
  localparam int SX = 16, SY = 16, SZ = 8, NT = 240;

  logic        clk = 0, rst_n = 0;
  logic        start = 0;
  logic [10:0] num_rays = 0;
  logic        busy, done, error, range_err;
  logic [8:0]  stack_depth;
  logic        node_we = 0, tri_we = 0, ray_we = 0, cnt_clear = 0;
  logic        rayf_we = 0;
  logic [31:0] rayf_org [3], rayf_dir [3];
  logic [31:0] want_oct [NR];
  logic [12:0] node_waddr = 0;
  logic [13:0] tri_waddr = 0;
  logic [9:0]  ray_addr = 0;
  cnode_t      node_wdata = '0;
  qtri_t       tri_wdata = '0;
  ray_t        ray_wdata = '0, ray_rdata;
  logic [47:0] node_bytes, tri_bytes, ray_bytes, list_bytes, stack_bytes, total_bytes, box_tests, tri_tests;
  logic        ev_leaf, ev_inner;

  int checks = 0, failures = 0;

  rt_core dut (
    .clk(clk), .rst_n(rst_n), .start(start), .num_rays(num_rays), .busy(busy), .done(done),
    .error(error), .stack_depth(stack_depth), .range_err(range_err),
    .node_we(node_we), .node_waddr(node_waddr), .node_wdata(node_wdata),
    .tri_we(tri_we), .tri_waddr(tri_waddr), .tri_wdata(tri_wdata),
    .ray_we(ray_we), .ray_addr(ray_addr), .ray_wdata(ray_wdata), .ray_rdata(ray_rdata),
    .rayf_we(rayf_we), .rayf_org(rayf_org), .rayf_dir(rayf_dir),
    .cnt_clear(cnt_clear), .node_bytes(node_bytes), .tri_bytes(tri_bytes), .ray_bytes(ray_bytes),
    .list_bytes(list_bytes), .stack_bytes(stack_bytes), .total_bytes(total_bytes),
    .box_tests(box_tests), .tri_tests(tri_tests), .ev_leaf(ev_leaf), .ev_inner(ev_inner));

  always #5 clk = ~clk;

  // ---------------- event monitors ----------------
  int n_inner, n_leaf, n_box_rays, n_ray_rd, n_ray_wr, n_tri, n_push, n_pop, busy_cycles;
  int m_dropped, m_empty_slot, m_parallel, m_closer, m_edge_reject;

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (ev_inner) n_inner++;
    if (ev_leaf) n_leaf++;
    if (dut.e_box != 0) begin
      n_box_rays++;
      if (dut.box_hit != dut.box_valid) m_dropped++;
      if (dut.box_valid != 8'hFF) m_empty_slot++;
      if ((dut.dir[0] == 0 || dut.dir[1] == 0 || dut.dir[2] == 0) && dut.box_hit != 0) m_parallel++;
    end
    if (dut.e_rrd) n_ray_rd++;
    if (dut.e_rwr) n_ray_wr++;
    if (dut.e_ttest) begin
      n_tri++;
      if (dut.tri_hit && dut.cur_ray.hit.flags[0]) m_closer++;
      if (!dut.tri_hit) m_edge_reject++;
    end
    if (dut.s_push) n_push++;
    if (dut.s_pop) n_pop++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  scene_t sc;
  int     ro [NR][3];
  int     m_miss, m_float;

  function automatic bit near(input logic [15:0] a, input logic [15:0] b);
    int d;
    d = int'($signed(a)) - int'($signed(b));
    return d >= -1 && d <= 1;
  endfunction

  initial begin
    int expected_cycles;
    sc = new();
    sc.gen(NT, 3, SX, SY, SZ, 4);
    sc.build();
    $display("scene: %0d triangles, %0d nodes, leaf scale %0d %0d %0d",
             sc.n_tris, sc.n_nodes, sc.leaf_e[0], sc.leaf_e[1], sc.leaf_e[2]);

    repeat (3) @(posedge clk);
    rst_n = 1;
    // load nodes, triangles, rays
    for (int n = 0; n < sc.n_nodes; n++) begin
      @(negedge clk);
      node_we = 1; node_waddr = 13'(n); node_wdata = sc.node_word(n);
    end
    @(negedge clk); node_we = 0;
    for (int p = 0; p < sc.n_tris; p++) begin
      @(negedge clk);
      tri_we = 1; tri_waddr = 14'(p); tri_wdata = sc.tri_word(p);
    end
    @(negedge clk); tri_we = 0;
    for (int i = 0; i < NR; i++) begin
      ray_t r;
      real tx, ty, tz;
      r = '0;
      r.hit.t = 32'hFFFF_FFFF;
      ro[i][0] = int'($urandom_range(SX * 256));
      ro[i][1] = int'($urandom_range(SY * 256));
      ro[i][2] = (SZ + 6) * 256;
      tx = real'($urandom_range(SX * 256));
      ty = real'($urandom_range(SY * 256));
      tz = real'($urandom_range(SZ * 256));
      if (i % 10 == 0)      r.oct_dir = {16'sd32767, 16'sd32767};          // straight down
      else if (i % 10 == 1) r.oct_dir = oct_encode(tx - ro[i][0], ty - ro[i][1], 1.0); // away
      else                  r.oct_dir = oct_encode(tx - ro[i][0], ty - ro[i][1], tz - ro[i][2]);
      for (int a = 0; a < 3; a++) r.origin[a] = 32'(ro[i][a]);
      want_oct[i] = r.oct_dir;
      @(negedge clk);
      ray_addr = 10'(i);
      if (i % 10 == 2) begin
        // every tenth ray goes in as floats, in world units (1/256 grid)
        ray_we  = 0;
        rayf_we = 1;
        for (int a = 0; a < 3; a++) rayf_org[a] = f32(real'(ro[i][a]) / 256.0);
        rayf_dir[0] = f32((tx - ro[i][0]) / 256.0);
        rayf_dir[1] = f32((ty - ro[i][1]) / 256.0);
        rayf_dir[2] = f32((tz - ro[i][2]) / 256.0);
      end else begin
        rayf_we = 0;
        ray_we = 1; ray_wdata = r;
      end
    end
    @(negedge clk); ray_we = 0; rayf_we = 0;
    cnt_clear = 1;
    @(negedge clk); cnt_clear = 0;

    n_inner = 0; n_leaf = 0; n_box_rays = 0; n_ray_rd = 0; n_ray_wr = 0; n_tri = 0;
    n_push = 0; n_pop = 0; busy_cycles = 0;
    m_dropped = 0; m_empty_slot = 0; m_parallel = 0; m_closer = 0; m_edge_reject = 0;

    start = 1; num_rays = 11'(NR);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);

    check(!error, "error flag");
    check(!range_err, "range flag");
    check(stack_depth == 0, "stack empty at the end");

    // results against brute force
    m_miss = 0; m_float = 0;
    for (int i = 0; i < NR; i++) begin
      int d [3];
      longint bt;
      bit any, tri_ok;
      @(negedge clk);
      ray_addr = 10'(i);
      @(negedge clk);
      if (i % 10 == 2) begin
        m_float++;
        check(ray_rdata.origin[0] == 32'(ro[i][0]) && ray_rdata.origin[1] == 32'(ro[i][1]) &&
              ray_rdata.origin[2] == 32'(ro[i][2]) &&
              near(ray_rdata.oct_dir[15:0], want_oct[i][15:0]) &&
              near(ray_rdata.oct_dir[31:16], want_oct[i][31:16]),
              $sformatf("ray %0d float conversion %h want %h", i, ray_rdata.oct_dir, want_oct[i]));
      end
      oct_decode_ref(ray_rdata.oct_dir, d);
      any = sc.closest(ro[i], d, bt, int'(ray_rdata.hit.tri_index),
                       int'(ray_rdata.hit.bary_u), int'(ray_rdata.hit.bary_v), tri_ok);
      if (!any) m_miss++;
      check(ray_rdata.hit.flags[0] == any, $sformatf("ray %0d hit flag %0b want %0b", i, ray_rdata.hit.flags[0], any));
      if (any) begin
        check(ray_rdata.hit.t == 32'(bt), $sformatf("ray %0d t %0d want %0d", i, ray_rdata.hit.t, bt));
        check(tri_ok, $sformatf("ray %0d triangle %0d", i, ray_rdata.hit.tri_index));
      end else begin
        check(ray_rdata.hit.t == 32'hFFFF_FFFF, $sformatf("ray %0d t changed on miss", i));
      end
    end

    // traffic counters
    check(node_bytes == 48'((n_inner + n_leaf) * 96), "node bytes");
    check(tri_bytes == 48'(n_tri * 9), "triangle bytes");
    check(ray_bytes == 48'((n_ray_rd + n_ray_wr) * 32), "ray bytes");
    check(stack_bytes == 48'((n_push + n_pop) * 16), "stack bytes");
    check(tri_tests == 48'(n_tri), "triangle test count");
    check(total_bytes == node_bytes + tri_bytes + ray_bytes + list_bytes + stack_bytes, "total bytes");

    // cycle count
    expected_cycles = NR + 1 + (n_pop + 1) + n_pop + 4 * n_box_rays + 8 * n_inner
                    + 3 * (n_ray_rd - n_box_rays) + 3 * n_tri + n_ray_wr;
    check(busy_cycles == expected_cycles, $sformatf("cycles %0d want %0d", busy_cycles, expected_cycles));

    $display("inner %0d leaf %0d box-rays %0d tri-tests %0d writes %0d cycles %0d bytes %0d (node %0d tri %0d ray %0d list %0d stack %0d)",
             n_inner, n_leaf, n_box_rays, n_tri, n_ray_wr, busy_cycles, total_bytes,
             node_bytes, tri_bytes, ray_bytes, list_bytes, stack_bytes);
    $display("mechanisms: dropped %0d empty-slot %0d parallel %0d closer %0d edge-reject %0d miss %0d float %0d",
             m_dropped, m_empty_slot, m_parallel, m_closer, m_edge_reject, m_miss, m_float);
    check(n_inner > 0, "inner node filtering happened");
    check(n_leaf > 0, "leaf intersection happened");
    check(m_dropped > 0, "ray dropped by a child box");
    check(m_empty_slot > 0, "empty child slot");
    check(m_parallel > 0, "parallel direction component");
    check(m_closer > 0, "closer hit replaced an earlier one");
    check(m_edge_reject > 0, "edge-test rejection");
    check(m_miss > 0, "ray that hits nothing");
    check(n_ray_wr > 0, "ray write-back");
    check(m_float > 0, "ray loaded in floating point");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
