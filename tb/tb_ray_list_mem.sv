// tb_ray_list_mem: banked list memory. Several banks are written in the same
// cycle at different addresses with the same ray index; reads of any bank
// return what a per-bank model holds, one cycle after the address.
module tb_ray_list_mem;
  logic        clk = 0;
  logic [2:0]  rd_bank;
  logic [6:0]  rd_addr;
  logic [9:0]  rd_data;
  logic [7:0]  wr_en;
  logic [6:0]  wr_addr [8];
  logic [9:0]  wr_data;
  logic [9:0]  model [8][128];
  int checks = 0, failures = 0;

  ray_list_mem #(.NB(8), .DEPTH(128), .IW(10)) dut (
    .clk(clk), .rd_bank(rd_bank), .rd_addr(rd_addr), .rd_data(rd_data),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = '0; rd_bank = 0; rd_addr = 0; wr_data = 0;
    for (int b = 0; b < 8; b++) wr_addr[b] = 0;
    // fill all banks: bank b, address i holds (b * 100 + i) mod 1024
    for (int i = 0; i < 128; i++) begin
      for (int b = 0; b < 8; b++) begin
        @(negedge clk);
        wr_en = 8'(1 << b); wr_addr[b] = 7'(i); wr_data = 10'(b * 100 + i);
        model[b][i] = wr_data;
      end
    end
    // one ray index into five banks at once, each at its own address
    @(negedge clk);
    wr_en = 8'b1011_0101;
    for (int b = 0; b < 8; b++) wr_addr[b] = 7'(b * 3);
    wr_data = 10'd777;
    for (int b = 0; b < 8; b++) if (wr_en[b]) model[b][b * 3] = 10'd777;
    @(negedge clk);
    wr_en = '0;
    for (int i = 0; i < 3000; i++) begin
      logic [2:0] b;
      logic [6:0] a;
      @(negedge clk);
      b = 3'($urandom); a = 7'($urandom);
      rd_bank = b; rd_addr = a;
      wr_en = 8'($urandom);
      wr_data = 10'($urandom);
      for (int k = 0; k < 8; k++) wr_addr[k] = 7'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rd_data != model[b][a]) begin
        failures++;
        if (failures < 10) $display("FAIL bank %0d addr %0d: %0d want %0d", b, a, rd_data, model[b][a]);
      end
      for (int k = 0; k < 8; k++) if (wr_en[k]) model[k][wr_addr[k]] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
