// sram_1p: single-port synchronous memory (one read or write per cycle).
//
// Holds the scene and the rays of the core: compressed nodes (96-byte
// words), quantized triangles (9-byte words) and ray records (32 bytes). In
// silicon these would be SRAM macros or a cache in front of DRAM; here the
// array is written behaviourally so any synthesis flow can map it.
//
// Timing: the address is sampled at the rising clock edge; rdata shows the
// word one cycle later. A write (we = 1) stores wdata at the edge; rdata then
// shows the old contents (read-before-write). No reset: contents are
// undefined until written.
module sram_1p #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
