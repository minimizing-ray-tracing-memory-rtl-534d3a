// tb_node_box_tester: one ray against the eight children of a compressed node.
// A hand-built node (origin (0,0,0), one world unit per grid step) has eight
// unit-spaced boxes along x; a +x ray at the height of child 0..3 hits
// exactly the children it passes, empty slots never hit, and a leaf node
// reports nothing. Then random nodes and rays against the reference.
module tb_node_box_tester;
  import rt_pkg::*;
  import tb_ref_pkg::*;

  cnode_t             node;
  logic signed [31:0] org [3];
  logic signed [11:0] dir [3];
  logic [7:0]         hm, vm;
  logic               rerr;
  int checks = 0, failures = 0;

  node_box_tester dut (.node(node), .org(org), .dir(dir), .hit_mask(hm), .valid_mask(vm), .range_err(rerr));

  task automatic expect_mask(input logic [7:0] want_h, input logic [7:0] want_v, input string what);
    #1;
    checks++;
    if (hm != want_h || vm != want_v) begin
      failures++;
      $display("FAIL %s: hit %b valid %b, want %b %b", what, hm, vm, want_h, want_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int o [3], d [3];
    big_t lo [3], hi [3];
    logic [7:0] want;
    node = '0;
    node.node_type = NODE_INNER;
    for (int c = 0; c < 8; c++) begin
      // child c: x in [10c, 10c+5], y in [c, c+1], z in [0, 1]
      node.lo_x[c] = 8'(10 * c); node.hi_x[c] = 8'(10 * c + 5);
      node.lo_y[c] = 8'(c);      node.hi_y[c] = 8'(c + 1);
      node.lo_z[c] = 0;          node.hi_z[c] = 1;
      node.child[c] = 32'(c + 1);
    end
    dir[0] = 1024; dir[1] = 0; dir[2] = 0;
    org[0] = -256; org[2] = 128;
    org[1] = 128;            // y = 0.5: inside child 0 only
    expect_mask(8'b0000_0001, 8'hFF, "y=0.5");
    org[1] = 256 * 3;        // y = 3: on the boundary of children 2 and 3
    expect_mask(8'b0000_1100, 8'hFF, "y=3 shared plane");
    org[0] = 256 * 36;       // start beyond children 0..3 (child 3 ends at x=35)
    expect_mask(8'b0000_0000, 8'hFF, "start past child 3");
    org[0] = -256;
    node.child[3] = CHILD_EMPTY;
    expect_mask(8'b0000_0100, 8'b1111_0111, "empty slot 3");
    node.node_type = NODE_LEAF;
    expect_mask(8'b0000_0000, 8'b0000_0000, "leaf node");

    for (int i = 0; i < 300; i++) begin
      node = '0;
      node.node_type = NODE_INNER;
      for (int a = 0; a < 3; a++) begin
        node.origin[a] = 32'($urandom_range(100000)) - 32'd50000;
        node.e[a]      = 8'($urandom_range(4) - 6);
        o[a] = int'($signed(node.origin[a])) + int'($urandom_range(6000)) - 1000;
        d[a] = ($urandom_range(6) == 0) ? 0 : int'($urandom_range(2048)) - 1024;
        org[a] = o[a];
        dir[a] = 12'(d[a]);
      end
      want = '0;
      for (int c = 0; c < 8; c++) begin
        logic [7:0] l [3], h [3];
        for (int a = 0; a < 3; a++) begin
          l[a] = 8'($urandom_range(200));
          h[a] = l[a] + 8'($urandom_range(55));
        end
        node.lo_x[c] = l[0]; node.hi_x[c] = h[0];
        node.lo_y[c] = l[1]; node.hi_y[c] = h[1];
        node.lo_z[c] = l[2]; node.hi_z[c] = h[2];
        node.child[c] = ($urandom_range(7) == 0) ? CHILD_EMPTY : 32'($urandom_range(1000));
        for (int a = 0; a < 3; a++) begin
          lo[a] = world_of(node.origin[a], node.e[a], l[a]);
          hi[a] = world_of(node.origin[a], node.e[a], h[a]);
        end
        want[c] = !node.child[c][31] && box_ref(o, d, lo, hi);
      end
      #1;
      checks++;
      if (hm != want) begin
        failures++;
        if (failures < 10) $display("FAIL random %0d: %b want %b", i, hm, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
