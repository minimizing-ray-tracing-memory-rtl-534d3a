// ray_list_mem: banked storage for the ray index lists of the stream stack.
//
// Each traversal stack entry points to a list of ray indices that still have
// to visit its node. When an inner node is processed, every ray of the entry
// is tested against all children at once and its index must be appended to
// the list of every child it hits, up to BVH_WIDTH lists in the same cycle.
// This memory therefore has one bank per child slot: child c's list always
// lives in bank c, and each bank has its own write port (mask bit, address).
// The list being read belongs to one bank, selected by rd_bank. Splitting
// the lists into per-child banks is a choice of this design.
//
// Timing: one read per cycle, data one cycle after the address; up to NB
// writes per cycle, one per bank. No reset.
module ray_list_mem #(
  parameter int unsigned NB    = 8,
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned IW    = 10,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned BW    = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic          clk,
  input  logic [BW-1:0] rd_bank,
  input  logic [AW-1:0] rd_addr,
  output logic [IW-1:0] rd_data,
  input  logic [NB-1:0] wr_en,
  input  logic [AW-1:0] wr_addr [NB],
  input  logic [IW-1:0] wr_data
);

  logic [IW-1:0] q [NB];
  logic [BW-1:0] bank_q;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [IW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[wr_addr[b]] <= wr_data;
      q[b] <= mem[rd_addr];
    end
  end

  always_ff @(posedge clk) bank_q <= rd_bank;

  assign rd_data = q[bank_q];

endmodule
