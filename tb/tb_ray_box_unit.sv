// tb_ray_box_unit: checks the fixed-point slab test.
// Hand-worked cases against the box [0,10]^3 (world units, Q8 grid): axis
// rays that enter or start behind the box, rays parallel to a slab inside
// and outside it, a diagonal ray that only touches an edge (tmin == tmax
// counts as a hit), and the entry/exit t values in Q9; then random boxes
// and rays against the reference slab test.
module tb_ray_box_unit;
  import tb_ref_pkg::*;

  logic signed [31:0] org [3];
  logic signed [11:0] dir [3];
  logic signed [63:0] bmin [3], bmax [3];
  logic               hit;
  logic signed [75:0] tmin, tmax;
  int checks = 0, failures = 0;

  ray_box_unit dut (.org(org), .dir(dir), .bmin(bmin), .bmax(bmax), .hit(hit), .tmin(tmin), .tmax(tmax));

  // coordinates in world units, direction in Q10
  task automatic run(input int ox, input int oy, input int oz, input int dx, input int dy, input int dz,
                     input bit want, input string what);
    org[0] = ox * 256; org[1] = oy * 256; org[2] = oz * 256;
    dir[0] = 12'(dx); dir[1] = 12'(dy); dir[2] = 12'(dz);
    #1;
    checks++;
    if (hit != want) begin
      failures++;
      $display("FAIL %s: hit=%0b want %0b", what, hit, want);
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
    for (int a = 0; a < 3; a++) begin
      bmin[a] = 0;
      bmax[a] = 10 * 256;
    end
    run(-5, 5, 5, 1024, 0, 0, 1, "+x into box");
    // entry at x=0 after 5 units: t = 5 * 512 (Q9, direction L1 = 1)
    checks++;
    if (tmin != 76'(5 * 512) || tmax != 76'(15 * 512)) begin
      failures++;
      $display("FAIL t interval %0d %0d", tmin, tmax);
    end
    run(15, 5, 5, 1024, 0, 0, 0, "+x, box behind");
    run(15, 5, 5, -1024, 0, 0, 1, "-x into box");
    run(-5, 15, 5, 1024, 0, 0, 0, "parallel to y slab, outside");
    run(-5, 10, 5, 1024, 0, 0, 1, "parallel, on the max plane");
    run(-5, -1, 5, 1024, 0, 0, 0, "parallel, below min plane");
    run(-5, 5, 5, 512, 512, 0, 1, "diagonal touching edge");
    run(-5, 6, 5, 512, 512, 0, 0, "diagonal just past edge");
    run(5, 5, 5, 0, 0, 0, 1, "zero direction inside");
    run(5, 5, 5, 341, 341, -342, 1, "origin inside");
    run(-20, -20, -20, 341, 341, 342, 1, "main diagonal");
    run(-20, -20, -19, 341, 341, -342, 0, "diagonal going away");

    for (int i = 0; i < 3000; i++) begin
      for (int a = 0; a < 3; a++) begin
        int l, h;
        l = $urandom_range(4000) - 2000;
        h = l + $urandom_range(3000);
        bmin[a] = l; bmax[a] = h;
        lo[a] = l; hi[a] = h;
        o[a] = $urandom_range(8000) - 4000;
        // some components exactly zero to exercise the parallel path
        d[a] = ($urandom_range(5) == 0) ? 0 : int'($urandom_range(2048)) - 1024;
        org[a] = o[a];
        dir[a] = 12'(d[a]);
      end
      #1;
      checks++;
      if (hit != box_ref(o, d, lo, hi)) begin
        failures++;
        if (failures < 10) $display("FAIL random %0d: hit=%0b", i, hit);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
