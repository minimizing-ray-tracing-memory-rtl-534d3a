// stream_stack: the shared ray stream traversal stack.
//
// Instead of one stack per ray, all rays of a stream share a single stack
// whose entries pair a BVH node with the list of rays that must visit it.
// The entry format is opaque here (EW bits); the traversal controller packs
// node index, list bank, list base, list length and the end of the list
// region into it.
//
// Interface: `top` always shows the newest entry (combinational read of the
// array at sp - 1); `pop` removes it and `push` adds `din`, at the clock
// edge. Pushing and popping in the same cycle replaces the top entry.
// `empty`/`full` report the fill state and `overflow` is a sticky flag set by
// a push into a full stack (the push is dropped); `clear` empties the stack
// and clears the flag. `depth` is the number of entries held.
module stream_stack #(
  parameter int unsigned EW    = 64,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned SW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [EW-1:0] din,
  input  logic          pop,
  output logic [EW-1:0] top,
  output logic          empty,
  output logic          full,
  output logic          overflow,
  output logic [SW-1:0] depth
);

  logic [EW-1:0] mem [DEPTH];
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [SW-1:0] sp;
  logic [IW-1:0] wr_i, top_i;

  assign top_i = IW'(sp - 1'b1);
  assign wr_i  = IW'(sp);

  assign empty = (sp == '0);
  assign full  = (sp == SW'(DEPTH));
  assign depth = sp;
  assign top   = empty ? '0 : mem[top_i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp       <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      sp       <= '0;
      overflow <= 1'b0;
    end else begin
      if (push && pop && !empty) begin
        // replace top
      end else if (push) begin
        if (full) overflow <= 1'b1;
        else      sp <= sp + 1'b1;
      end else if (pop && !empty) begin
        sp <= sp - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push && pop && !empty)  mem[top_i] <= din;
    else if (push && !full)     mem[wr_i] <= din;
  end

  // A pop must only be issued when there is an entry to pop.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || clear) pop |-> !empty);

endmodule
