// tb_rt_core_overflow: the core's overflow handling, at reduced memory sizes.
//
// Two cores share one random scene. The first has list banks of 512 entries:
// a stream of 100 rays fits (each tree level needs at most one region of the
// parent's list length) and its results match brute force; a stream of 300
// rays needs 300 + 300 entries below the root and must stop with `error`.
// The second has a 4-entry stack: the root alone pushes more children than
// that, so traversal must stop with `error` too. In both cases `done` must
// still arrive.
module tb_rt_core_overflow;
  import rt_pkg::*;
  import tb_ref_pkg::*;
  import tb_scene_pkg::*;

  localparam int NR = 300;

  logic        clk = 0, rst_n = 0;
  logic        start = 0;
  logic [10:0] num_rays = 0;
  logic        node_we = 0, tri_we = 0, ray_we = 0;
  logic [12:0] node_waddr = 0;
  logic [13:0] tri_waddr = 0;
  logic [9:0]  ray_addr = 0;
  cnode_t      node_wdata = '0;
  qtri_t       tri_wdata = '0;
  ray_t        ray_wdata = '0;
  ray_t        rd_l, rd_s;
  logic        busy_l, done_l, err_l, rerr_l, busy_s, done_s, err_s, rerr_s;
  logic [8:0]  sd_l;
  logic [2:0]  sd_s;
  logic [47:0] cnt_l [8], cnt_s [8];
  logic        lf_l, in_l, lf_s, in_s;
  logic [31:0] zf [3] = '{default: '0};

  rt_core #(.LIST_DEPTH(512)) dut_l (
    .clk(clk), .rst_n(rst_n), .start(start), .num_rays(num_rays), .busy(busy_l), .done(done_l),
    .error(err_l), .stack_depth(sd_l), .range_err(rerr_l),
    .node_we(node_we), .node_waddr(node_waddr), .node_wdata(node_wdata),
    .tri_we(tri_we), .tri_waddr(tri_waddr), .tri_wdata(tri_wdata),
    .ray_we(ray_we), .ray_addr(ray_addr), .ray_wdata(ray_wdata), .ray_rdata(rd_l),
    .rayf_we(1'b0), .rayf_org(zf), .rayf_dir(zf),
    .cnt_clear(1'b0), .node_bytes(cnt_l[0]), .tri_bytes(cnt_l[1]), .ray_bytes(cnt_l[2]),
    .list_bytes(cnt_l[3]), .stack_bytes(cnt_l[4]), .total_bytes(cnt_l[5]),
    .box_tests(cnt_l[6]), .tri_tests(cnt_l[7]), .ev_leaf(lf_l), .ev_inner(in_l));

  rt_core #(.STACK_DEPTH(4)) dut_s (
    .clk(clk), .rst_n(rst_n), .start(start), .num_rays(num_rays), .busy(busy_s), .done(done_s),
    .error(err_s), .stack_depth(sd_s), .range_err(rerr_s),
    .node_we(node_we), .node_waddr(node_waddr), .node_wdata(node_wdata),
    .tri_we(tri_we), .tri_waddr(tri_waddr), .tri_wdata(tri_wdata),
    .ray_we(ray_we), .ray_addr(ray_addr), .ray_wdata(ray_wdata), .ray_rdata(rd_s),
    .rayf_we(1'b0), .rayf_org(zf), .rayf_dir(zf),
    .cnt_clear(1'b0), .node_bytes(cnt_s[0]), .tri_bytes(cnt_s[1]), .ray_bytes(cnt_s[2]),
    .list_bytes(cnt_s[3]), .stack_bytes(cnt_s[4]), .total_bytes(cnt_s[5]),
    .box_tests(cnt_s[6]), .tri_tests(cnt_s[7]), .ev_leaf(lf_s), .ev_inner(in_s));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  scene_t sc;
  int     ro [NR][3];

  task automatic load_rays();
    for (int i = 0; i < NR; i++) begin
      ray_t r;
      r = '0;
      r.hit.t = 32'hFFFF_FFFF;
      for (int a = 0; a < 2; a++) ro[i][a] = int'($urandom_range(16 * 256));
      ro[i][2] = 14 * 256;
      r.oct_dir = oct_encode(real'($urandom_range(16 * 256)) - ro[i][0],
                             real'($urandom_range(16 * 256)) - ro[i][1],
                             real'($urandom_range(8 * 256)) - ro[i][2]);
      for (int a = 0; a < 3; a++) r.origin[a] = 32'(ro[i][a]);
      @(negedge clk);
      ray_we = 1; ray_addr = 10'(i); ray_wdata = r;
    end
    @(negedge clk); ray_we = 0;
  endtask

  task automatic run(input int n);
    @(negedge clk);
    start = 1; num_rays = 11'(n);
    @(negedge clk);
    start = 0;
    while (!(done_l || !busy_l) || !(done_s || !busy_s)) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    int hits;
    sc = new();
    sc.gen(240, 3, 16, 16, 8, 4);
    sc.build();
    repeat (3) @(posedge clk);
    rst_n = 1;
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

    // 100 rays fit in 512-entry list banks
    load_rays();
    run(100);
    check(!err_l, "100 rays: unexpected list overflow");
    check(err_s, "4-entry stack: overflow not reported");
    hits = 0;
    for (int i = 0; i < 100; i++) begin
      int d [3];
      longint bt;
      bit any, ok;
      @(negedge clk);
      ray_addr = 10'(i);
      @(negedge clk);
      oct_decode_ref(rd_l.oct_dir, d);
      any = sc.closest(ro[i], d, bt, int'(rd_l.hit.tri_index), int'(rd_l.hit.bary_u),
                       int'(rd_l.hit.bary_v), ok);
      hits += any;
      check(rd_l.hit.flags[0] == any && (!any || (rd_l.hit.t == 32'(bt) && ok)),
            $sformatf("100 rays: ray %0d result", i));
    end
    check(hits > 0, "some rays hit");

    // 300 rays do not
    load_rays();
    run(300);
    check(err_l, "300 rays: list overflow not reported");
    check(err_s, "4-entry stack: overflow not reported again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
