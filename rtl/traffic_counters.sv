// traffic_counters: memory traffic and intersection-test instrumentation.
//
// The figure of merit of the core is the number of bytes it moves. This
// block accumulates them per category, the same categories used to evaluate
// the design: node (bounds) fetches, triangle fetches, ray reads and
// write-backs, ray list reads and writes, and traversal stack pushes and
// pops. It also counts ray-box and ray-triangle tests. Each input is a count
// of events in the current cycle; the bytes per event are parameters (96-byte
// node, 9-byte triangle, 32-byte ray as in the published layouts; 4 bytes per
// ray index and the stack entry size are this design's choices).
//
// All counters are CW bits wide, clear synchronously on `clear` and reset
// asynchronously.
module traffic_counters
  import rt_pkg::*;
#(
  parameter int unsigned CW          = 48,
  parameter int unsigned NODE_B      = NODE_BYTES,
  parameter int unsigned TRI_B       = TRI_BYTES,
  parameter int unsigned RAY_B       = RAY_BYTES,
  parameter int unsigned LIST_B      = 4,
  parameter int unsigned STACK_B     = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          node_fetch,
  input  logic          tri_fetch,
  input  logic          ray_rd,
  input  logic          ray_wr,
  input  logic [3:0]    list_rd,
  input  logic [3:0]    list_wr,
  input  logic          stack_push,
  input  logic          stack_pop,
  input  logic [3:0]    box_tests,
  input  logic          tri_tests,
  output logic [CW-1:0] node_bytes,
  output logic [CW-1:0] tri_bytes,
  output logic [CW-1:0] ray_bytes,
  output logic [CW-1:0] list_bytes,
  output logic [CW-1:0] stack_bytes,
  output logic [CW-1:0] box_test_cnt,
  output logic [CW-1:0] tri_test_cnt,
  output logic [CW-1:0] total_bytes
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node_bytes   <= '0;
      tri_bytes    <= '0;
      ray_bytes    <= '0;
      list_bytes   <= '0;
      stack_bytes  <= '0;
      box_test_cnt <= '0;
      tri_test_cnt <= '0;
    end else if (clear) begin
      node_bytes   <= '0;
      tri_bytes    <= '0;
      ray_bytes    <= '0;
      list_bytes   <= '0;
      stack_bytes  <= '0;
      box_test_cnt <= '0;
      tri_test_cnt <= '0;
    end else begin
      if (node_fetch) node_bytes <= node_bytes + CW'(NODE_B);
      if (tri_fetch)  tri_bytes  <= tri_bytes + CW'(TRI_B);
      ray_bytes    <= ray_bytes + (ray_rd ? CW'(RAY_B) : '0) + (ray_wr ? CW'(RAY_B) : '0);
      list_bytes   <= list_bytes + CW'(list_rd) * CW'(LIST_B) + CW'(list_wr) * CW'(LIST_B);
      stack_bytes  <= stack_bytes + (stack_push ? CW'(STACK_B) : '0) + (stack_pop ? CW'(STACK_B) : '0);
      box_test_cnt <= box_test_cnt + CW'(box_tests);
      if (tri_tests) tri_test_cnt <= tri_test_cnt + 1'b1;
    end
  end

  assign total_bytes = node_bytes + tri_bytes + ray_bytes + list_bytes + stack_bytes;

endmodule
