// tb_ray_tri_unit: checks the fixed-point edge-function triangle test.
// Hand-worked cases: the triangle (0,0,0),(4,0,0),(0,4,0) in a leaf grid of
// one world unit per step, hit from above by a ray straight down at (1,1)
// gives t = 10 units (5120 in Q9) and barycentrics 1/4, 1/4 (8192); misses
// outside the triangle, beyond tMax, behind the origin, for the opposite
// winding and for a ray in the plane. Then random quantized triangles and
// rays against the reference test.
module tb_ray_tri_unit;
  import rt_pkg::*;
  import tb_ref_pkg::*;

  logic signed [31:0] norg [3];
  logic signed [7:0]  ne [3];
  qtri_t              tq;
  logic signed [31:0] org [3];
  logic signed [11:0] dir [3];
  logic [31:0]        t_max;
  logic               hit, rerr;
  logic [31:0]        t_hit;
  logic [15:0]        bu, bv;
  int checks = 0, failures = 0;

  ray_tri_unit dut (.node_origin(norg), .node_e(ne), .tri_q(tq), .org(org), .dir(dir),
                    .t_max(t_max), .hit(hit), .t_hit(t_hit), .bary_u(bu), .bary_v(bv),
                    .range_err(rerr));

  task automatic set_tri(input int a0, input int a1, input int a2, input int b0, input int b1,
                         input int b2, input int c0, input int c1, input int c2);
    tq.v[0][0] = 8'(a0); tq.v[0][1] = 8'(a1); tq.v[0][2] = 8'(a2);
    tq.v[1][0] = 8'(b0); tq.v[1][1] = 8'(b1); tq.v[1][2] = 8'(b2);
    tq.v[2][0] = 8'(c0); tq.v[2][1] = 8'(c1); tq.v[2][2] = 8'(c2);
  endtask

  task automatic run(input int ox, input int oy, input int oz, input int tm, input bit want,
                     input int want_t, input int want_u, input int want_v, input string what);
    org[0] = ox * 256; org[1] = oy * 256; org[2] = oz * 256;
    t_max  = tm;
    #1;
    checks++;
    if (hit != want || (want && (t_hit != want_t || bu != 16'(want_u) || bv != 16'(want_v))) || rerr) begin
      failures++;
      $display("FAIL %s: hit=%0b t=%0d u=%0d v=%0d err=%0b", what, hit, t_hit, bu, bv, rerr);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t va [3], vb [3], vc [3];
    int o [3], d [3], ru, rv;
    longint rt;
    bit rh;
    for (int a = 0; a < 3; a++) begin
      norg[a] = 0;
      ne[a]   = 0;
    end
    set_tri(0, 0, 0, 4, 0, 0, 0, 4, 0);
    dir[0] = 0; dir[1] = 0; dir[2] = -1024;
    run(1, 1, 10, 32'hFFFF_FFFF, 1, 5120, 8192, 8192, "hit from above");
    run(2, 1, 10, 32'hFFFF_FFFF, 1, 5120, 16384, 8192, "hit at (2,1)");
    run(5, 5, 10, 32'hFFFF_FFFF, 0, 0, 0, 0, "outside");
    run(1, 1, 10, 5119, 0, 0, 0, 0, "beyond tMax");
    run(1, 1, 10, 5120, 1, 5120, 8192, 8192, "exactly at tMax");
    run(1, 1, -10, 32'hFFFF_FFFF, 0, 0, 0, 0, "behind origin");
    run(0, 2, 10, 32'hFFFF_FFFF, 1, 5120, 0, 16384, "on shared edge x = 0");
    // node origin shift moves the triangle
    norg[0] = 100 * 256;
    run(101, 1, 10, 32'hFFFF_FFFF, 1, 5120, 8192, 8192, "shifted origin");
    norg[0] = 0;
    // coarser grid: 2 world units per step -> triangle (0,0)-(8,0)-(0,8)
    ne[0] = 1; ne[1] = 1; ne[2] = 1;
    run(2, 2, 10, 32'hFFFF_FFFF, 1, 5120, 8192, 8192, "scale 2");
    ne[0] = 0; ne[1] = 0; ne[2] = 0;
    set_tri(0, 0, 0, 0, 4, 0, 4, 0, 0);
    run(1, 1, 10, 32'hFFFF_FFFF, 0, 0, 0, 0, "opposite winding");
    set_tri(0, 0, 0, 4, 0, 0, 0, 4, 0);
    dir[0] = 1024; dir[1] = 0; dir[2] = 0;
    run(-5, 1, 0, 32'hFFFF_FFFF, 0, 0, 0, 0, "ray in the plane");

    for (int i = 0; i < 3000; i++) begin
      for (int a = 0; a < 3; a++) begin
        norg[a] = int'($urandom_range(200000)) - 100000;
        ne[a]   = 8'($urandom_range(4) - 8);
        o[a]    = norg[a] + int'($urandom_range(8000)) - 2000;
        d[a]    = int'($urandom_range(2048)) - 1024;
        org[a]  = o[a];
        dir[a]  = 12'(d[a]);
      end
      for (int k = 0; k < 3; k++)
        for (int a = 0; a < 3; a++) tq.v[k][a] = 8'($urandom);
      for (int a = 0; a < 3; a++) begin
        va[a] = world_of(norg[a], ne[a], tq.v[0][a]);
        vb[a] = world_of(norg[a], ne[a], tq.v[1][a]);
        vc[a] = world_of(norg[a], ne[a], tq.v[2][a]);
      end
      // aim half of the rays at the triangle's centroid so hits are common
      if (i % 2 == 0) begin
        real dx, dy, dz, l1;
        dx = real'((va[0] + vb[0] + vc[0]) / 3 - o[0]);
        dy = real'((va[1] + vb[1] + vc[1]) / 3 - o[1]);
        dz = real'((va[2] + vb[2] + vc[2]) / 3 - o[2]);
        l1 = (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy) + (dz < 0 ? -dz : dz) + 1.0;
        d[0] = $rtoi(dx / l1 * 1024.0);
        d[1] = $rtoi(dy / l1 * 1024.0);
        d[2] = $rtoi(dz / l1 * 1024.0);
        for (int a = 0; a < 3; a++) dir[a] = 12'(d[a]);
      end
      t_max = $urandom_range(3) == 0 ? $urandom_range(200000) : 32'hFFFF_FFFF;
      #1;
      rh = tri_ref(va, vb, vc, o, d, longint'(t_max), rt, ru, rv);
      checks++;
      if (hit != rh || (rh && (t_hit != 32'(rt) || bu != 16'(ru) || bv != 16'(rv))) || rerr) begin
        failures++;
        if (failures < 10) $display("FAIL random %0d: hit=%0b/%0b t=%0d/%0d u=%0d/%0d", i, hit, rh, t_hit, rt, bu, ru);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
