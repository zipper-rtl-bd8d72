// tile_hub: the small on-chip SRAM that holds the graph structure of the
// tiles currently being processed.
//
// Two parts:
//  * a dense tile-metadata array (one meta_t per tile: destination partition,
//    source / edge / destination counts, global ids and the off-chip address
//    of the tile's topology), written by the memory controller at the start of
//    a run and read asynchronously by the scheduler;
//  * NSLOTS topology slots, one per s/eStream pair, each SLOT_WORDS 32-bit
//    words: edge entries {dst_local[31:16], src_local[15:0]} sorted by
//    destination from TH_EDGE_OFF, global source-vertex ids from TH_SRC_OFF,
//    and per-destination edge offsets (num_dst+1 entries, CSC style) from
//    TH_DOFF_OFF. Each slot is one bank of a banked_ram, so cores working on
//    different tiles never conflict; ports of the same slot are arbitrated
//    round-robin, read data returns one cycle after the grant.
//
// The paper gives the tile hub's purpose, its 256 KB size and that it is an
// SRAM; the slot layout, entry format and banking are this design's own.
module tile_hub
  import zipper_pkg::*;
#(
  parameter int unsigned NSLOTS     = 4,
  parameter int unsigned SLOT_WORDS = 16384,
  parameter int unsigned NPORTS     = 17,
  parameter int unsigned MAX_TILES  = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // topology slots
  input  logic [NPORTS-1:0]        req_valid,
  input  logic [NPORTS-1:0]        req_we,
  input  logic [TAW-1:0]           req_addr  [NPORTS],
  input  logic [31:0]              req_wdata [NPORTS],
  output logic [NPORTS-1:0]        gnt,
  output logic [NPORTS-1:0]        rvalid,
  output logic [31:0]              rdata     [NPORTS],
  // metadata array
  input  logic                     meta_we,
  input  logic [$clog2(MAX_TILES)-1:0] meta_waddr,
  input  meta_t                    meta_wdata,
  input  logic [$clog2(MAX_TILES)-1:0] meta_raddr,
  output meta_t                    meta_rdata
);
  meta_t meta_mem [MAX_TILES];

  always_ff @(posedge clk)
    if (meta_we) meta_mem[meta_waddr] <= meta_wdata;

  assign meta_rdata = meta_mem[meta_raddr];

  banked_ram #(
    .W(32), .DEPTH(NSLOTS * SLOT_WORDS), .NBANKS(NSLOTS), .NPORTS(NPORTS),
    .AW(TAW), .BANK_HIGH(1'b1)
  ) u_slots (
    .clk, .rst_n, .req_valid, .req_we, .req_addr, .req_wdata,
    .gnt, .rvalid, .rdata
  );

endmodule
