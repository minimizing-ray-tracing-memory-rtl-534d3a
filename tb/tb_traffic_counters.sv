// tb_traffic_counters: random event streams; each byte counter must equal the
// events times the bytes per event (96 per node, 9 per triangle, 32 per ray
// access, 4 per list entry, 16 per stack access), and clear must zero them.
module tb_traffic_counters;
  logic        clk = 0, rst_n = 0, clear = 0;
  logic        nf, tf, rr, rw, sp, so, tt;
  logic [3:0]  lr, lw, bt;
  logic [47:0] nb, tbb, rb, lb, sb, bc, tc, tot;
  longint      e_nb, e_tb, e_rb, e_lb, e_sb, e_bc, e_tc;
  int checks = 0, failures = 0;

  traffic_counters dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .node_fetch(nf), .tri_fetch(tf), .ray_rd(rr),
    .ray_wr(rw), .list_rd(lr), .list_wr(lw), .stack_push(sp), .stack_pop(so), .box_tests(bt),
    .tri_tests(tt), .node_bytes(nb), .tri_bytes(tbb), .ray_bytes(rb), .list_bytes(lb),
    .stack_bytes(sb), .box_test_cnt(bc), .tri_test_cnt(tc), .total_bytes(tot));

  always #5 clk = ~clk;

  task automatic compare(input string what);
    checks++;
    if (nb != 48'(e_nb) || tbb != 48'(e_tb) || rb != 48'(e_rb) || lb != 48'(e_lb) || sb != 48'(e_sb)
        || bc != 48'(e_bc) || tc != 48'(e_tc) || tot != 48'(e_nb + e_tb + e_rb + e_lb + e_sb)) begin
      failures++;
      $display("FAIL %s: node %0d/%0d tri %0d/%0d ray %0d/%0d list %0d/%0d stack %0d/%0d",
               what, nb, e_nb, tbb, e_tb, rb, e_rb, lb, e_lb, sb, e_sb);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {nf, tf, rr, rw, sp, so, tt} = '0;
    lr = 0; lw = 0; bt = 0;
    e_nb = 0; e_tb = 0; e_rb = 0; e_lb = 0; e_sb = 0; e_bc = 0; e_tc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("reset");
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      {nf, tf, rr, rw, sp, so, tt} = 7'($urandom);
      lr = 4'($urandom_range(1));
      lw = 4'($urandom_range(8));
      bt = 4'($urandom_range(8));
      @(posedge clk); #1;
      e_nb += nf * 96; e_tb += tf * 9; e_rb += (rr + rw) * 32;
      e_lb += (lr + lw) * 4; e_sb += (sp + so) * 16; e_bc += bt; e_tc += tt;
      compare("stream");
    end
    @(negedge clk);
    {nf, tf, rr, rw, sp, so, tt} = '0; lr = 0; lw = 0; bt = 0;
    clear = 1;
    @(posedge clk); #1;
    clear = 0;
    e_nb = 0; e_tb = 0; e_rb = 0; e_lb = 0; e_sb = 0; e_bc = 0; e_tc = 0;
    compare("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
