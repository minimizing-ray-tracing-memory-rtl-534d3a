// tb_sram_1p: write/read of a small single-port memory: one-cycle read
// latency, read-before-write on the same address, random traffic against a
// model array.
module tb_sram_1p;
  logic        clk = 0;
  logic        we;
  logic [5:0]  addr;
  logic [71:0] wdata, rdata;
  logic [71:0] model [64];
  bit          known [64];
  int checks = 0, failures = 0;

  sram_1p #(.DW(72), .DEPTH(64)) dut (.clk(clk), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; addr = 6'(i); wdata = {8'(i), 64'(i) * 64'h0101_0101_0101_0101};
      model[i] = wdata; known[i] = 1;
    end
    @(negedge clk);
    we = 0; addr = 6'd17;
    @(posedge clk); #1;
    checks++;
    if (rdata != model[17]) begin failures++; $display("FAIL read 17"); end
    // read-before-write
    @(negedge clk);
    we = 1; addr = 6'd17; wdata = 72'hABCDEF;
    @(posedge clk); #1;
    checks++;
    if (rdata != model[17]) begin failures++; $display("FAIL read-before-write"); end
    model[17] = 72'hABCDEF;
    for (int i = 0; i < 2000; i++) begin
      logic [5:0] a;
      @(negedge clk);
      a = 6'($urandom);
      addr = a;
      we = $urandom_range(1);
      wdata = {8'($urandom), 32'($urandom), 32'($urandom)};
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL random read %0d", a);
      end
      if (we) model[a] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
