// tb_stream_stack: LIFO order, top-of-stack view, replace (push + pop),
// full/empty flags, the sticky overflow flag and clear, against a queue model.
module tb_stream_stack;
  logic        clk = 0, rst_n = 0;
  logic        clear, push, pop;
  logic [15:0] din, top;
  logic        empty, full, overflow;
  logic [4:0]  depth;
  logic [15:0] model [$];
  int checks = 0, failures = 0;

  stream_stack #(.EW(16), .DEPTH(16)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .push(push), .din(din), .pop(pop),
    .top(top), .empty(empty), .full(full), .overflow(overflow), .depth(depth));

  always #5 clk = ~clk;

  task automatic check_state(input string what);
    checks++;
    if (empty != (model.size() == 0) || full != (model.size() == 16) || depth != 5'(model.size())
        || (model.size() > 0 && top != model[$])) begin
      failures++;
      if (failures < 10) $display("FAIL %s: depth %0d/%0d top %h", what, depth, model.size(), top);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_state("after reset");
    // fill to full
    for (int i = 0; i < 16; i++) begin
      push = 1; din = 16'(16'h100 + i);
      @(posedge clk); #1;
      model.push_back(din);
      push = 0;
      check_state("fill");
    end
    // overflow: push into full stack is dropped and flagged
    @(negedge clk);
    push = 1; din = 16'hDEAD;
    @(posedge clk); #1;
    push = 0;
    checks++;
    if (!overflow || top != 16'h10F) begin failures++; $display("FAIL overflow"); end
    // pops in reverse order
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      checks++;
      if (top != model[$]) begin failures++; $display("FAIL LIFO"); end
      pop = 1;
      @(posedge clk); #1;
      pop = 0;
      void'(model.pop_back());
      check_state("pop");
    end
    // replace the top
    @(negedge clk);
    push = 1; pop = 1; din = 16'hBEEF;
    @(posedge clk); #1;
    push = 0; pop = 0;
    model[$] = 16'hBEEF;
    check_state("replace");
    // clear
    @(negedge clk);
    clear = 1;
    @(posedge clk); #1;
    clear = 0;
    model.delete();
    check_state("clear");
    checks++;
    if (overflow) begin failures++; $display("FAIL overflow not cleared"); end
    // random push/pop
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      push = ($urandom_range(1) == 1) && (model.size() < 16);
      pop  = !push && (model.size() > 0) && ($urandom_range(1) == 1);
      din  = 16'($urandom);
      @(posedge clk); #1;
      if (push) model.push_back(din);
      else if (pop) void'(model.pop_back());
      push = 0; pop = 0;
      check_state("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
