// tb_dequant: checks the local-grid to world mapping origin + q * 2^e.
// Hand-worked values for positive, zero and negative scales and a negative
// origin, the clamp flag, then random values against the reference.
module tb_dequant;
  import tb_ref_pkg::*;

  logic signed [31:0] origin;
  logic signed [7:0]  e;
  logic [7:0]         q;
  logic signed [63:0] world;
  logic               range_err;
  int checks = 0, failures = 0;

  dequant dut (.origin(origin), .e(e), .q(q), .world(world), .range_err(range_err));

  task automatic check(input int o, input int ee, input int qq, input longint w, input bit err);
    origin = o; e = 8'(ee); q = 8'(qq);
    #1;
    checks++;
    if (world != w || range_err != err) begin
      failures++;
      $display("FAIL o=%0d e=%0d q=%0d: got %0d/%0b want %0d/%0b", o, ee, qq, world, range_err, w, err);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // e = 0: one world unit per step = 256 grid units (Q8)
    check(0, 0, 1, 256, 0);
    check(1000, 0, 255, 1000 + 255 * 256, 0);
    // e = -8: the finest grid, one Q8 unit per step
    check(-5, -8, 7, 2, 0);
    // e = -4: 1/16 world unit = 16 Q8 units
    check(-4096, -4, 10, -4096 + 160, 0);
    // e = 3: 8 world units per step
    check(12, 3, 2, 12 + 2 * 2048, 0);
    // e = -9 is finer than the world grid: clamped, flagged
    check(0, -9, 3, 3, 1);
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] o;
      logic [7:0]  ee, qq;
      o  = $urandom;
      ee = 8'($urandom_range(24) - 8);
      qq = 8'($urandom);
      origin = o; e = ee; q = qq;
      #1;
      checks++;
      if (world != 64'(world_of(o, ee, qq)) || range_err) begin
        failures++;
        if (failures < 10) $display("FAIL random o=%0d e=%0d q=%0d got %0d", $signed(o), $signed(ee), qq, world);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
