// tb_ray_quantizer: checks the float-to-fixed ray conversion.
//
// Random origins (including values below one grid step, negative values and
// out-of-range values) are compared with floor(x * 256) computed in real
// arithmetic, with saturation and range_err where the value does not fit 32
// bits. Random directions (including zero components and all eight octants)
// are compared with the octahedral encoding computed in real arithmetic; the
// two may differ by one code step where the real value lies on a rounding
// boundary. Special directions (axes, zero vector, infinity) are checked
// exactly. The hit record must come out cleared.
module tb_ray_quantizer;
  import rt_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] org_f [3], dir_f [3];
  ray_t        ray;
  logic        range_err;

  ray_quantizer dut (.org_f(org_f), .dir_f(dir_f), .ray(ray), .range_err(range_err));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd_real(input real lim);
    return (real'($urandom) / 4294967295.0 * 2.0 - 1.0) * lim;
  endfunction

  function automatic int abs_i(input int x);
    return x < 0 ? -x : x;
  endfunction

  // expected origin word and saturation flag
  function automatic void org_ref(input real x, output logic [31:0] w, output bit sat);
    real f;
    f   = $floor(x * 256.0);
    sat = 1'b0;
    if (f > 2147483647.0)       begin w = 32'h7FFF_FFFF; sat = 1'b1; end
    else if (f < -2147483648.0) begin w = 32'h8000_0000; sat = 1'b1; end
    else                        w = 32'(longint'(f));
  endfunction

  task automatic run_dir(input real x, input real y, input real z, input bit exact);
    logic [31:0] want;
    real sx, sy, sz;
    dir_f[0] = f32(x);
    dir_f[1] = f32(y);
    dir_f[2] = f32(z);
    sx = r32(dir_f[0]); sy = r32(dir_f[1]); sz = r32(dir_f[2]);
    for (int a = 0; a < 3; a++) org_f[a] = '0;
    #1;
    want = oct_encode(sx, sy, sz);
    if (exact)
      check(ray.oct_dir == want && !range_err,
            $sformatf("dir %f %f %f: %h want %h", x, y, z, ray.oct_dir, want));
    else
      check(abs_i(int'($signed(ray.oct_dir[15:0])) - int'($signed(want[15:0]))) <= 1 &&
            abs_i(int'($signed(ray.oct_dir[31:16])) - int'($signed(want[31:16]))) <= 1 &&
            !range_err,
            $sformatf("dir %f %f %f: %h want %h", x, y, z, ray.oct_dir, want));
  endtask

  initial begin
    // origins
    for (int i = 0; i < 3000; i++) begin
      real s [3];
      logic [31:0] w [3];
      bit sat [3];
      real lim;
      case (i % 4)
        0: lim = 2.0;
        1: lim = 1000.0;
        2: lim = 8.0e6;
        default: lim = 3.0e7;
      endcase
      for (int a = 0; a < 3; a++) begin
        org_f[a] = f32(rnd_real(lim));
        s[a] = r32(org_f[a]);
        org_ref(s[a], w[a], sat[a]);
      end
      for (int a = 0; a < 3; a++) dir_f[a] = '0;
      dir_f[2] = f32(1.0);
      #1;
      check(ray.origin[0] == w[0] && ray.origin[1] == w[1] && ray.origin[2] == w[2] &&
            range_err == (sat[0] | sat[1] | sat[2]),
            $sformatf("origin %f %f %f -> %h %h %h", s[0], s[1], s[2],
                      ray.origin[0], ray.origin[1], ray.origin[2]));
      check(ray.hit == hit_t'{flags: '0, bary_v: '0, bary_u: '0, tri_index: '0, t: 32'hFFFF_FFFF},
            "cleared hit record");
    end

    // directions
    for (int i = 0; i < 4000; i++) begin
      real c [3];
      for (int a = 0; a < 3; a++) c[a] = rnd_real(($urandom_range(3) == 0) ? 0.001 : 50.0);
      if (i % 7 == 0) c[$urandom_range(2)] = 0.0;
      run_dir(c[0], c[1], c[2], 1'b0);
    end

    // special directions: axes, diagonals of the octahedron, zero
    run_dir( 0.0,  0.0,  1.0, 1'b1);
    run_dir( 0.0,  0.0, -1.0, 1'b1);
    run_dir( 1.0,  0.0,  0.0, 1'b1);
    run_dir(-1.0,  0.0,  0.0, 1'b1);
    run_dir( 0.0,  1.0,  0.0, 1'b1);
    run_dir( 0.0, -1.0,  0.0, 1'b1);
    run_dir( 2.0,  2.0, -4.0, 1'b1);
    run_dir(-3.0,  1.0, -4.0, 1'b1);
    for (int a = 0; a < 3; a++) dir_f[a] = '0;
    #1;
    check(ray.oct_dir == '0 && !range_err, "zero direction");
    dir_f[1] = 32'h7F80_0000;  // +inf
    #1;
    check(range_err, "infinite direction flagged");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
