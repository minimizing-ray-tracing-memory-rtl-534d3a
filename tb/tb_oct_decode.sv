// tb_oct_decode: checks the octahedral direction decoder.
// Hand-worked codes (axis directions, both hemispheres), the unit L1 norm of
// every decoded vector, and 4000 random codes against the reference decoder.
module tb_oct_decode;
  import tb_ref_pkg::*;

  logic [31:0]        oct;
  logic signed [11:0] dir [3];
  int checks = 0, failures = 0;

  oct_decode dut (.oct(oct), .dir(dir));

  task automatic expect_dir(input logic [31:0] c, input int x, input int y, input int z);
    oct = c;
    #1;
    checks++;
    if (dir[0] != 12'(x) || dir[1] != 12'(y) || dir[2] != 12'(z)) begin
      failures++;
      $display("FAIL code %h: got %0d %0d %0d want %0d %0d %0d", c, dir[0], dir[1], dir[2], x, y, z);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d [3];
    int l1;
    // +z: u = v = 0
    expect_dir(32'h0000_0000, 0, 0, 1024);
    // +x: u = 1
    expect_dir({16'sd0, 16'sd32767}, 1024, 0, 0);
    // -y: v = -1
    expect_dir({-16'sd32767, 16'sd0}, 0, -1024, 0);
    // -z: folded corner u = v = 1
    expect_dir({16'sd32767, 16'sd32767}, 0, 0, -1024);
    // (0.25, 0.25, 0.5): u = v = 0.25
    expect_dir({16'sd8192, 16'sd8192}, 256, 256, 512);
    // folded: u = 0.75, v = 0.5 -> x = 1 - 0.5, y = 1 - 0.75, z = -0.25
    expect_dir({16'sd16384, 16'sd24576}, 512, 256, -256);
    // encoder round trip of a few real directions
    expect_dir(oct_encode(1.0, 1.0, -2.0), 256, 256, -512);
    expect_dir(oct_encode(-3.0, 1.0, 0.0), -768, 256, 0);

    for (int i = 0; i < 4000; i++) begin
      oct = $urandom;
      #1;
      oct_decode_ref(oct, d);
      checks++;
      if (dir[0] != 12'(d[0]) || dir[1] != 12'(d[1]) || dir[2] != 12'(d[2])) begin
        failures++;
        if (failures < 10) $display("FAIL random %h: got %0d %0d %0d want %0d %0d %0d",
                                    oct, dir[0], dir[1], dir[2], d[0], d[1], d[2]);
      end
      l1 = (dir[0] < 0 ? -int'(dir[0]) : int'(dir[0])) + (dir[1] < 0 ? -int'(dir[1]) : int'(dir[1]))
         + (dir[2] < 0 ? -int'(dir[2]) : int'(dir[2]));
      checks++;
      if (l1 != 1024) begin
        failures++;
        if (failures < 10) $display("FAIL L1 norm %0d for %h", l1, oct);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
