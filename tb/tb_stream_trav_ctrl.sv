// tb_stream_trav_ctrl: the traversal controller on its own.
//
// The arithmetic units are replaced by tables: whether ray r enters child
// node k, and whether (and at which t) ray r hits triangle p. The node id is
// carried in origin[0] of each node and the ray id in origin[0] of each ray
// so the tables can be indexed. The tree is
//     0: inner [1, 2, 3, empty...]
//     1: leaf, triangles 0..1       2: inner [4, empty, 5, ...]
//     3: leaf, triangle 2           4: leaf, triangles 3..5
//     5: leaf, no triangles
// For several random tables this checks: the order of node visits (depth
// first, child slot 0 first), the rays streamed at every visit (exactly those
// that reach the node, in ascending order), the closest hit written back for
// every ray (later equal t replaces, as the unit accepts t <= tMax), and the
// cycle count of every visit (inner: 2 + 4 per ray + 8; leaf: 2 + per ray
// 3 + 3 per triangle + 1 if written back).
module tb_stream_trav_ctrl;
  import rt_pkg::*;

  localparam int NR = 6;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [10:0] num_rays = 0;
  logic busy, done, error;

  logic [12:0] node_addr;  cnode_t node_rdata;
  logic [13:0] tri_addr;   qtri_t  tri_rdata;
  logic [9:0]  ray_addr;   logic ray_we; ray_t ray_wdata, ray_rdata;
  logic [2:0]  l_bank; logic [12:0] l_raddr; logic [9:0] l_rdata;
  logic [7:0]  l_wen; logic [12:0] l_waddr [8]; logic [9:0] l_wdata;
  logic s_push, s_pop, s_clear, s_empty, s_full, s_ovf;
  logic [76:0] s_din, s_top;
  logic [8:0]  s_depth;
  cnode_t cur_node; ray_t cur_ray; qtri_t cur_tri;
  logic [7:0] bhit, bvalid;
  logic thit; logic [31:0] tt; logic [15:0] tu, tv;
  logic e_nf, e_tf, e_rr, e_rw, e_tt, e_leaf, e_inner;
  logic [3:0] e_lr, e_lw, e_bt;

  stream_trav_ctrl dut (
    .clk(clk), .rst_n(rst_n), .start(start), .num_rays(num_rays), .busy(busy), .done(done), .error(error),
    .node_addr(node_addr), .node_rdata(node_rdata), .tri_addr(tri_addr), .tri_rdata(tri_rdata),
    .ray_addr(ray_addr), .ray_we(ray_we), .ray_wdata(ray_wdata), .ray_rdata(ray_rdata),
    .list_rd_bank(l_bank), .list_rd_addr(l_raddr), .list_rd_data(l_rdata),
    .list_wr_en(l_wen), .list_wr_addr(l_waddr), .list_wr_data(l_wdata),
    .stk_push(s_push), .stk_din(s_din), .stk_pop(s_pop), .stk_clear(s_clear), .stk_top(s_top),
    .stk_empty(s_empty), .stk_full(s_full), .cur_node(cur_node), .cur_ray(cur_ray), .cur_tri(cur_tri),
    .box_hit_mask(bhit), .box_valid_mask(bvalid), .tri_hit(thit), .tri_t(tt), .tri_bary_u(tu),
    .tri_bary_v(tv), .ev_node_fetch(e_nf), .ev_tri_fetch(e_tf), .ev_ray_rd(e_rr), .ev_ray_wr(e_rw),
    .ev_list_rd(e_lr), .ev_list_wr(e_lw), .ev_box_tests(e_bt), .ev_tri_test(e_tt),
    .ev_leaf(e_leaf), .ev_inner(e_inner));

  ray_list_mem #(.NB(8), .DEPTH(8192), .IW(10)) u_lists (
    .clk(clk), .rd_bank(l_bank), .rd_addr(l_raddr), .rd_data(l_rdata),
    .wr_en(l_wen), .wr_addr(l_waddr), .wr_data(l_wdata));

  stream_stack #(.EW(77), .DEPTH(256)) u_stack (
    .clk(clk), .rst_n(rst_n), .clear(s_clear), .push(s_push), .din(s_din), .pop(s_pop),
    .top(s_top), .empty(s_empty), .full(s_full), .overflow(s_ovf), .depth(s_depth));

  always #5 clk = ~clk;

  // memories of the testbench, one cycle read latency
  cnode_t nodes [6];
  qtri_t  tris [6];
  ray_t   rays [NR];
  always_ff @(posedge clk) begin
    node_rdata <= nodes[node_addr < 6 ? node_addr : 0];
    tri_rdata  <= tris[tri_addr < 6 ? tri_addr : 0];
    ray_rdata  <= rays[ray_addr < NR ? ray_addr : 0];
    if (ray_we) rays[ray_addr] <= ray_wdata;
  end

  // tables replacing the intersection units
  bit          enter [6][NR];
  bit          thits [6][NR];
  int unsigned tval  [6][NR];
  always_comb begin
    int nid, rid;
    nid = int'(cur_node.origin[0]);
    rid = int'(cur_ray.origin[0]);
    bvalid = '0;
    bhit   = '0;
    for (int c = 0; c < 8; c++)
      if (cur_node.node_type == NODE_INNER && !cur_node.child[c][31]) begin
        bvalid[c] = 1'b1;
        bhit[c]   = enter[cur_node.child[c]][rid];
      end
    thit = thits[tri_addr_q][rid] && (tval[tri_addr_q][rid] <= cur_ray.hit.t);
    tt   = tval[tri_addr_q][rid];
    tu   = 16'(tri_addr_q * 3);
    tv   = 16'(rid);
  end
  logic [13:0] tri_addr_q;
  always_ff @(posedge clk) if (e_tf) tri_addr_q <= 14'(cur_node.child[0]) + 14'(dut.tri_i);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // visit log
  int vis_node [$];
  int vis_seq [$];         // ray ids streamed, all visits back to back
  int vis_start [$];       // index into vis_seq of each visit's first ray
  int vis_cycles [$];
  int cyc;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (e_nf) begin
      vis_node.push_back(int'(node_rdata.origin[0]));
      vis_start.push_back(vis_seq.size());
      vis_cycles.push_back(cyc);
    end
    if (e_rr) vis_seq.push_back(int'(ray_rdata.origin[0]));
  end

  function automatic void set_node(int id, bit leaf, int c0, int c1, int c2);
    nodes[id] = '0;
    nodes[id].origin[0] = 32'(id);
    nodes[id].node_type = leaf ? NODE_LEAF : NODE_INNER;
    for (int c = 0; c < 8; c++) nodes[id].child[c] = leaf ? '0 : CHILD_EMPTY;
    if (leaf) begin
      nodes[id].child[0] = 32'(c0);
      nodes[id].child[1] = 32'(c1);
    end else begin
      if (c0 >= 0) nodes[id].child[0] = 32'(c0);
      if (c1 >= 0) nodes[id].child[1] = 32'(c1);
      if (c2 >= 0) nodes[id].child[2] = 32'(c2);
    end
  endfunction

  initial begin
    int parent [6];
    int order [6];
    int first [6], cnt [6];
    bit reach [6][NR];
    set_node(0, 0, 1, 2, 3);
    set_node(1, 1, 0, 2, 0);
    set_node(2, 0, 4, -1, 5);
    nodes[2].child[1] = CHILD_EMPTY;
    nodes[2].child[2] = 32'd5;
    set_node(3, 1, 2, 1, 0);
    set_node(4, 1, 3, 3, 0);
    set_node(5, 1, 0, 0, 0);
    parent = '{-1, 0, 0, 0, 2, 2};
    order  = '{0, 1, 2, 4, 5, 3};
    for (int k = 0; k < 6; k++) begin
      first[k] = int'(nodes[k].child[0]);
      cnt[k]   = int'(nodes[k].child[1]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    for (int trial = 0; trial < 40; trial++) begin
      int exp_i, c_exp, total_exp;
      int unsigned run_t [NR];   // each ray's tMax as the visits proceed
      for (int r = 0; r < NR; r++) begin
        rays[r] = '0;
        rays[r].origin[0] = 32'(r);
        rays[r].hit.t = 32'hFFFF_FFFF;
        for (int k = 0; k < 6; k++) begin
          enter[k][r] = (k == 0) ? 1'b1 : ($urandom_range(3) != 0);
          thits[k][r] = $urandom_range(1);
          tval[k][r]  = $urandom_range(6) * 10;        // ties happen
        end
      end
      for (int r = 0; r < NR; r++)
        for (int k = 0; k < 6; k++)
          reach[k][r] = (k == 0) ? 1'b1 : (enter[k][r] && reach[parent[k]][r]);

      vis_node.delete(); vis_seq.delete(); vis_start.delete(); vis_cycles.delete();
      cyc = 0;
      @(negedge clk);
      start = 1; num_rays = 11'(NR);
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      check(!error, "error flag");

      // expected visits in depth-first order, with the rays reaching each node
      exp_i = 0;
      for (int r = 0; r < NR; r++) run_t[r] = 32'hFFFF_FFFF;
      total_exp = NR + 1;                                // list set-up + root push
      for (int j = 0; j < 6; j++) begin
        int k, nr_k, wr_k;
        int rl [$];
        k = order[j];
        rl = {};
        for (int r = 0; r < NR; r++) if (reach[k][r]) rl.push_back(r);
        if (rl.size() == 0) continue;
        check(exp_i < vis_node.size() && vis_node[exp_i] == k,
              $sformatf("trial %0d visit %0d: node %0d want %0d", trial, exp_i,
                        exp_i < vis_node.size() ? vis_node[exp_i] : -1, k));
        if (exp_i < vis_start.size()) begin
          int seen [$];
          int leaf_mul;
          // a leaf reads each ray once; an inner node reads each ray once too
          leaf_mul = 1;
          seen = {};
          for (int q = vis_start[exp_i];
               q < ((exp_i + 1 < vis_start.size()) ? vis_start[exp_i + 1] : vis_seq.size()); q++)
            seen.push_back(vis_seq[q]);
          if (nodes[k].node_type == NODE_LEAF && cnt[k] == 0) rl.delete();
          check(seen == rl, $sformatf("trial %0d node %0d ray list (%0d rays, want %0d)",
                                      trial, k, seen.size(), rl.size() * leaf_mul));
          if (nodes[k].node_type == NODE_LEAF && cnt[k] == 0)
            for (int r = 0; r < NR; r++) if (reach[k][r]) rl.push_back(r);
        end
        // cycles of this visit
        nr_k = rl.size();
        if (nodes[k].node_type == NODE_INNER) c_exp = 2 + 4 * nr_k + 8;
        else begin
          c_exp = 2;
          if (cnt[k] > 0) begin
            foreach (rl[i]) begin
              wr_k = 0;
              for (int p = first[k]; p < first[k] + cnt[k]; p++)
                if (thits[p][rl[i]] && tval[p][rl[i]] <= run_t[rl[i]]) begin
                  wr_k = 1;
                  run_t[rl[i]] = tval[p][rl[i]];
                end
              c_exp += 3 + 3 * cnt[k] + wr_k;
            end
          end
        end
        if (exp_i + 1 < vis_cycles.size())
          check(vis_cycles[exp_i + 1] - vis_cycles[exp_i] == c_exp,
                $sformatf("trial %0d node %0d cycles %0d want %0d", trial, k,
                          vis_cycles[exp_i + 1] - vis_cycles[exp_i], c_exp));
        total_exp += c_exp;
        exp_i++;
      end
      check(vis_node.size() == exp_i, $sformatf("trial %0d: %0d visits want %0d", trial, vis_node.size(), exp_i));

      // closest hits written back
      for (int r = 0; r < NR; r++) begin
        int unsigned best;
        int best_p;
        best = 32'hFFFF_FFFF;
        best_p = -1;
        for (int j = 0; j < 6; j++) begin
          int k;
          k = order[j];
          if (nodes[k].node_type != NODE_LEAF || !reach[k][r]) continue;
          for (int p = first[k]; p < first[k] + cnt[k]; p++)
            if (thits[p][r] && tval[p][r] <= best) begin
              best = tval[p][r];
              best_p = p;
            end
        end
        check(rays[r].hit.flags[0] == (best_p >= 0), $sformatf("trial %0d ray %0d flag", trial, r));
        if (best_p >= 0)
          check(rays[r].hit.t == best && rays[r].hit.tri_index == 32'(best_p)
                && rays[r].hit.bary_u == 16'(best_p * 3) && rays[r].hit.bary_v == 16'(r),
                $sformatf("trial %0d ray %0d: t %0d tri %0d want %0d %0d", trial, r,
                          rays[r].hit.t, rays[r].hit.tri_index, best, best_p));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
