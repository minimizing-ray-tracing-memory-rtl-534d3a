// stream_trav_ctrl: ray stream traversal controller.
//
// All rays of a stream traverse the BVH together. The controller keeps a
// single shared stack whose entries associate a node with a list of ray
// indices. It pops an entry, fetches the node once for all of its rays, and
// then:
//   * inner node: streams the entry's rays through the node box tester
//     (one ray against all BVH_WIDTH children per test) and appends each ray
//     index to the list of every child it enters. Child c's list is written
//     to bank c of the list memory, so one ray costs one cycle of list
//     writes. When all rays are done, every child with a non-empty list is
//     pushed (highest slot first, so slot 0 is visited next).
//   * leaf node: for each ray of the list, fetches the leaf's triangles one by
//     one, tests them with the triangle unit (which reads the ray's current
//     hit distance as tMax) and writes the ray record back if its closest hit
//     changed.
// Traversal ends when the stack is empty. The rays of the first list are
// 0..num_rays-1, written into bank 0 at start.
//
// List memory management (this design's choice): the lists of the children
// of one node share one region of size len (the parent's list length) at the
// same base in every bank. Each entry records where that region ends; popping
// an entry frees everything allocated after it. Because the stack is LIFO
// this is exact, and memory use grows with tree depth times stream size.
// If a region would not fit, or the stack overflows, traversal stops with
// `error` set (the published description gives no overflow policy).
// The published stack entry also carries traversal state marking children
// as processed; here the children are pushed as entries of their own, so the
// stack itself holds that state.
//
// Memory timing: node, triangle, ray and list memories are synchronous with
// one cycle read latency. Inner nodes take 4 cycles per ray plus BVH_WIDTH
// push cycles; leaves take 3 + 3 * triangles (+1 write-back) cycles per ray.
// `start` is a one-cycle pulse; `busy` is high from the next cycle until
// `done` pulses.
module stream_trav_ctrl
  import rt_pkg::*;
#(
  parameter int unsigned RAY_AW   = 10,          // ray index bits
  parameter int unsigned NODE_AW  = 13,
  parameter int unsigned TRI_AW   = 14,
  parameter int unsigned LIST_AW  = 13,          // list bank address bits
  parameter int unsigned STACK_EW = 32 + 3 + 3 * (LIST_AW + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [RAY_AW:0]        num_rays,
  output logic                   busy,
  output logic                   done,
  output logic                   error,
  // node memory
  output logic [NODE_AW-1:0]     node_addr,
  input  cnode_t                 node_rdata,
  // triangle memory
  output logic [TRI_AW-1:0]      tri_addr,
  input  qtri_t                  tri_rdata,
  // ray memory
  output logic [RAY_AW-1:0]      ray_addr,
  output logic                   ray_we,
  output ray_t                   ray_wdata,
  input  ray_t                   ray_rdata,
  // ray list memory
  output logic [2:0]             list_rd_bank,
  output logic [LIST_AW-1:0]     list_rd_addr,
  input  logic [RAY_AW-1:0]      list_rd_data,
  output logic [BVH_WIDTH-1:0]   list_wr_en,
  output logic [LIST_AW-1:0]     list_wr_addr [BVH_WIDTH],
  output logic [RAY_AW-1:0]      list_wr_data,
  // stack
  output logic                   stk_push,
  output logic [STACK_EW-1:0]    stk_din,
  output logic                   stk_pop,
  output logic                   stk_clear,
  input  logic [STACK_EW-1:0]    stk_top,
  input  logic                   stk_empty,
  input  logic                   stk_full,
  // intersection units
  output cnode_t                 cur_node,
  output ray_t                   cur_ray,
  output qtri_t                  cur_tri,
  input  logic [BVH_WIDTH-1:0]   box_hit_mask,
  input  logic [BVH_WIDTH-1:0]   box_valid_mask,
  input  logic                   tri_hit,
  input  logic [31:0]            tri_t,
  input  logic [15:0]            tri_bary_u,
  input  logic [15:0]            tri_bary_v,
  // events for instrumentation
  output logic                   ev_node_fetch,
  output logic                   ev_tri_fetch,
  output logic                   ev_ray_rd,
  output logic                   ev_ray_wr,
  output logic [3:0]             ev_list_rd,
  output logic [3:0]             ev_list_wr,
  output logic [3:0]             ev_box_tests,
  output logic                   ev_tri_test,
  output logic                   ev_leaf,
  output logic                   ev_inner
);

  localparam int unsigned LW = LIST_AW + 1;   // list lengths / region pointers

  typedef struct packed {
    logic [31:0]   node;
    logic [2:0]    bank;
    logic [LW-1:0] base;
    logic [LW-1:0] len;
    logic [LW-1:0] region_end;
  } entry_t;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_ROOT, S_POP, S_NODE, S_LIST_RD, S_RAY_RD, S_RAY_WAIT,
    S_BOX, S_PUSH, S_TRI_RD, S_TRI_WAIT, S_TRI, S_RAY_WR, S_DONE
  } state_t;

  state_t        state;
  entry_t        ent;
  entry_t        top_e;
  logic [LW-1:0] alloc_ptr;     // first free list slot (same in every bank)
  logic [LW-1:0] new_base;      // base of the child lists of the current node
  logic [LW-1:0] idx;           // ray position in the current list
  logic [31:0]   tri_i;         // triangle position in the current leaf
  logic [LW-1:0] cnt [BVH_WIDTH];
  logic [2:0]    pc;            // child slot being pushed
  logic [RAY_AW-1:0] ray_id;
  logic          dirty;
  logic [RAY_AW:0] nrays;
  logic          is_leaf;

  assign top_e    = entry_t'(stk_top);
  assign is_leaf  = (cur_node.node_type == NODE_LEAF);
  assign busy     = (state != S_IDLE) && (state != S_DONE);

  function automatic logic [3:0] popcnt(input logic [BVH_WIDTH-1:0] m);
    logic [3:0] s;
    s = '0;
    for (int i = 0; i < BVH_WIDTH; i++) s = s + 4'(m[i]);
    return s;
  endfunction

  // ---------------------------------------------------------------------
  // Combinational memory requests and events.
  // ---------------------------------------------------------------------
  always_comb begin
    node_addr    = NODE_AW'(top_e.node);
    tri_addr     = TRI_AW'(cur_node.child[0] + tri_i);
    ray_addr     = (state == S_RAY_RD) ? list_rd_data : ray_id;
    ray_we       = (state == S_RAY_WR);
    ray_wdata    = cur_ray;
    list_rd_bank = ent.bank;
    list_rd_addr = LIST_AW'(ent.base + idx);
    list_wr_en   = '0;
    list_wr_data = ray_id;
    for (int c = 0; c < BVH_WIDTH; c++) list_wr_addr[c] = LIST_AW'(new_base + cnt[c]);
    stk_push     = 1'b0;
    stk_pop      = 1'b0;
    stk_clear    = (state == S_IDLE) && start;
    stk_din      = '0;

    ev_node_fetch = (state == S_NODE);
    ev_tri_fetch  = (state == S_TRI_WAIT);
    ev_ray_rd     = (state == S_RAY_WAIT);
    ev_ray_wr     = (state == S_RAY_WR);
    ev_list_rd    = (state == S_RAY_RD) ? 4'd1 : 4'd0;
    ev_list_wr    = '0;
    ev_box_tests  = '0;
    ev_tri_test   = (state == S_TRI);
    ev_leaf       = (state == S_NODE) && (node_rdata.node_type == NODE_LEAF);
    ev_inner      = (state == S_NODE) && (node_rdata.node_type != NODE_LEAF);

    case (state)
      S_INIT: begin
        list_wr_en[0]   = 1'b1;
        list_wr_addr[0] = LIST_AW'(idx);
        list_wr_data    = RAY_AW'(idx);
        ev_list_wr      = 4'd1;
      end
      S_ROOT: begin
        stk_push = 1'b1;
        stk_din  = STACK_EW'(entry_t'{node: '0, bank: '0, base: '0,
                                      len: LW'(nrays), region_end: LW'(nrays)});
      end
      S_POP: stk_pop = !stk_empty;
      S_BOX: begin
        list_wr_en   = box_hit_mask;
        ev_list_wr   = popcnt(box_hit_mask);
        ev_box_tests = popcnt(box_valid_mask);
      end
      S_PUSH: begin
        if (cnt[pc] != '0) begin
          stk_push = 1'b1;
          stk_din  = STACK_EW'(entry_t'{node: cur_node.child[pc], bank: pc, base: new_base,
                                        len: cnt[pc], region_end: new_base + ent.len});
        end
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------------
  // State machine.
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ent       <= '0;
      alloc_ptr <= '0;
      new_base  <= '0;
      idx       <= '0;
      tri_i     <= '0;
      pc        <= '0;
      ray_id    <= '0;
      dirty     <= 1'b0;
      nrays     <= '0;
      done      <= 1'b0;
      error     <= 1'b0;
      cur_node  <= '0;
      cur_ray   <= '0;
      cur_tri   <= '0;
      for (int c = 0; c < BVH_WIDTH; c++) cnt[c] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            nrays <= num_rays;
            idx   <= '0;
            error <= 1'b0;
            state <= (num_rays == '0) ? S_DONE : S_INIT;
            if (num_rays == '0) done <= 1'b1;
          end
        end
        S_INIT: begin
          idx <= idx + 1'b1;
          if (LW'(idx + 1'b1) == LW'(nrays)) state <= S_ROOT;
        end
        S_ROOT: state <= S_POP;
        S_POP: begin
          if (stk_empty) begin
            state <= S_DONE;
            done  <= 1'b1;
          end else begin
            ent       <= top_e;
            alloc_ptr <= top_e.region_end;
            state     <= S_NODE;
          end
        end
        S_NODE: begin
          cur_node <= node_rdata;
          idx      <= '0;
          for (int c = 0; c < BVH_WIDTH; c++) cnt[c] <= '0;
          new_base <= alloc_ptr;
          if (node_rdata.node_type == NODE_LEAF) begin
            state <= (node_rdata.child[1] == '0) ? S_POP : S_LIST_RD;
          end else if ({1'b0, alloc_ptr} + {1'b0, ent.len} > (LW+1)'(2 ** LIST_AW)) begin
            error <= 1'b1;                           // list region overflow
            state <= S_DONE;
            done  <= 1'b1;
          end else begin
            state <= S_LIST_RD;
          end
        end
        S_LIST_RD: state <= S_RAY_RD;
        S_RAY_RD: begin
          ray_id <= list_rd_data;
          state  <= S_RAY_WAIT;
        end
        S_RAY_WAIT: begin
          cur_ray <= ray_rdata;
          dirty   <= 1'b0;
          tri_i   <= '0;
          state   <= is_leaf ? S_TRI_RD : S_BOX;
        end
        S_BOX: begin
          for (int c = 0; c < BVH_WIDTH; c++)
            if (box_hit_mask[c]) cnt[c] <= cnt[c] + 1'b1;
          idx <= idx + 1'b1;
          if (idx + 1'b1 == ent.len) begin
            pc    <= 3'(BVH_WIDTH - 1);
            state <= S_PUSH;
          end else begin
            state <= S_LIST_RD;
          end
        end
        S_PUSH: begin
          if (cnt[pc] != '0 && stk_full) begin
            error <= 1'b1;                           // stack overflow
            state <= S_DONE;
            done  <= 1'b1;
          end else if (pc == '0) begin
            state <= S_POP;
          end else begin
            pc <= pc - 1'b1;
          end
        end
        S_TRI_RD: state <= S_TRI_WAIT;
        S_TRI_WAIT: begin
          cur_tri <= tri_rdata;
          state   <= S_TRI;
        end
        S_TRI: begin
          if (tri_hit) begin
            cur_ray.hit.t         <= tri_t;
            cur_ray.hit.tri_index <= cur_node.child[0] + tri_i;
            cur_ray.hit.bary_u    <= tri_bary_u;
            cur_ray.hit.bary_v    <= tri_bary_v;
            cur_ray.hit.flags[0]  <= 1'b1;
            dirty                 <= 1'b1;
          end
          tri_i <= tri_i + 1'b1;
          if (tri_i + 1 == cur_node.child[1]) begin
            if (tri_hit || dirty) begin
              state <= S_RAY_WR;
            end else begin
              idx   <= idx + 1'b1;
              state <= (idx + 1'b1 == ent.len) ? S_POP : S_LIST_RD;
            end
          end else begin
            state <= S_TRI_RD;
          end
        end
        S_RAY_WR: begin
          idx   <= idx + 1'b1;
          state <= (idx + 1'b1 == ent.len) ? S_POP : S_LIST_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
