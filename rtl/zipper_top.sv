// zipper_top: the ZIPPER GNN accelerator.
//
// Blocks and connections:
//   scheduler  -> dispatcher   resolved micro-ops (stalls when the queue is full)
//   dispatcher -> matrix_unit  GEMM
//   dispatcher -> vector_unit  ELW and GOP (NVU units of NCORES SIMD32 cores)
//   dispatcher -> memory_controller   LD.SRC / LD.DST / LD.EDGE / ST.DST
//   dispatcher -> scheduler    synchronization micro-ops and completions
//   scheduler  -> memory_controller   tile-metadata load, tile topology loads
//   memory_controller <-> off-chip memory (ports of this module)
//   UEM (banked_ram): one port each for the MU, the memory controller and
//     every SIMD core;  tile hub: one port for the memory controller and
//     one per SIMD core, plus the metadata array (written by the memory
//     controller, read by the scheduler).
//
// Use: load the three SDE functions with prog_we (prog_fn selects
// dFunction / sFunction / eFunction) and set prog_len; place the tile
// metadata, tile topology blocks and embeddings in off-chip memory; pulse
// start with num_tiles and meta_base. done rises when the dStream finds no
// tile left, i.e. after the last partition's results have been stored.
//
// Defaults are the configuration the paper evaluates: one 32x128 MU, two VUs
// of eight 32-lane cores, one dStream with four sStreams and four eStreams,
// a 21 MiB embedding memory and a 256 KB tile hub.
module zipper_top
  import zipper_pkg::*;
#(
  parameter int unsigned NPAIRS         = 4,
  parameter int unsigned NVU            = 2,
  parameter int unsigned NCORES         = 8,
  parameter int unsigned MU_ROWS        = 32,
  parameter int unsigned MU_COLS        = 128,
  parameter int unsigned UEM_DEPTH      = 344064,
  parameter int unsigned UEM_BANKS      = 16,
  parameter int unsigned UEM_SLOT_WORDS = 65536,
  parameter int unsigned TH_SLOT_WORDS  = 16384,
  parameter int unsigned MAX_TILES      = 1024,
  parameter int unsigned PROG_DEPTH     = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  // host: programs and run control
  input  logic            prog_we,
  input  fn_e             prog_fn,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  instr_t          prog_data,
  input  logic [$clog2(PROG_DEPTH):0]   prog_len [3],
  input  logic            start,
  input  logic [15:0]     num_tiles,
  input  logic [OAW-1:0]  meta_base,
  output logic            busy,
  output logic            done,
  // off-chip memory (HBM)
  output logic            o_valid,
  output logic            o_we,
  output logic [OAW-1:0]  o_addr,
  output word_t           o_wdata,
  input  logic            o_ready,
  input  logic            o_rvalid,
  input  word_t           o_rdata
);
  localparam int unsigned NC  = NVU * NCORES;
  localparam int unsigned UNP = 2 + NC;      // UEM ports: MU, MC, cores
  localparam int unsigned TNP = 1 + NC;      // tile hub ports: MC, cores
  localparam int unsigned NS  = 2 * NPAIRS + 1;

  // ---------------------------------------------------------------- memories
  logic [UNP-1:0] u_valid, u_we, u_gnt, u_rvalid;
  logic [UAW-1:0] u_addr  [UNP];
  word_t          u_wdata [UNP];
  word_t          u_rdata [UNP];

  logic [TNP-1:0] t_valid, t_we, t_gnt, t_rvalid;
  logic [TAW-1:0] t_addr  [TNP];
  logic [31:0]    t_wdata [TNP];
  logic [31:0]    t_rdata [TNP];

  logic           meta_we;
  logic [$clog2(MAX_TILES)-1:0] meta_waddr, meta_raddr;
  meta_t          meta_wdata, meta_rdata;

  banked_ram #(
    .W(WORD_W), .DEPTH(UEM_DEPTH), .NBANKS(UEM_BANKS), .NPORTS(UNP), .AW(UAW), .BANK_HIGH(1'b0)
  ) u_uem (
    .clk, .rst_n, .req_valid(u_valid), .req_we(u_we), .req_addr(u_addr), .req_wdata(u_wdata),
    .gnt(u_gnt), .rvalid(u_rvalid), .rdata(u_rdata)
  );

  tile_hub #(
    .NSLOTS(NPAIRS), .SLOT_WORDS(TH_SLOT_WORDS), .NPORTS(TNP), .MAX_TILES(MAX_TILES)
  ) u_th (
    .clk, .rst_n, .req_valid(t_valid), .req_we(t_we), .req_addr(t_addr), .req_wdata(t_wdata),
    .gnt(t_gnt), .rvalid(t_rvalid), .rdata(t_rdata),
    .meta_we, .meta_waddr, .meta_wdata, .meta_raddr, .meta_rdata
  );

  // ---------------------------------------------------------------- control
  logic   s_valid, s_ready, sync_valid, sync_ready;
  uop_t   s_uop, sync_uop, iss_uop;
  logic [NS-1:0] cmpl;
  logic   ml_valid, ml_ready, ml_done, tl_valid, tl_ready, tl_done;
  logic [OAW-1:0] ml_base;
  logic [15:0]    ml_count;
  logic [1:0]     tl_slot, tl_done_slot;
  meta_t          tl_meta;

  scheduler #(
    .NPAIRS(NPAIRS), .PROG_DEPTH(PROG_DEPTH), .UEM_SLOT_WORDS(UEM_SLOT_WORDS), .MAX_TILES(MAX_TILES)
  ) u_sched (
    .clk, .rst_n, .prog_we, .prog_fn, .prog_addr, .prog_data, .prog_len,
    .start, .num_tiles, .meta_base, .busy, .done,
    .out_valid(s_valid), .out_uop(s_uop), .out_ready(s_ready),
    .sync_valid, .sync_uop, .sync_ready, .cmpl,
    .meta_raddr, .meta_rdata,
    .ml_valid, .ml_base, .ml_count, .ml_ready, .ml_done,
    .tl_valid, .tl_slot, .tl_meta, .tl_ready, .tl_done, .tl_done_slot
  );

  logic            mu_start, mu_busy, mu_done, mc_start, mc_busy, mc_done;
  logic [SIDW-1:0] mu_done_sid, mc_done_sid;
  logic [NVU-1:0]  vu_start, vu_busy, vu_done;
  logic [SIDW-1:0] vu_done_sid [NVU];

  dispatcher #(.QDEPTH(NS), .NVU(NVU), .NSTREAMS(NS)) u_disp (
    .clk, .rst_n, .in_valid(s_valid), .in_uop(s_uop), .in_ready(s_ready),
    .iss_uop, .mu_start, .mu_done, .mu_done_sid,
    .vu_start, .vu_done, .vu_done_sid,
    .mc_start, .mc_busy, .mc_done, .mc_done_sid,
    .sync_valid, .sync_uop, .sync_ready, .cmpl
  );

  // ---------------------------------------------------------------- units
  matrix_unit #(.ROWS(MU_ROWS), .COLS(MU_COLS), .KMAX(MU_COLS)) u_mu (
    .clk, .rst_n, .start(mu_start), .uop_in(iss_uop), .busy(mu_busy), .done(mu_done),
    .done_sid(mu_done_sid),
    .u_valid(u_valid[0]), .u_we(u_we[0]), .u_addr(u_addr[0]), .u_wdata(u_wdata[0]),
    .u_gnt(u_gnt[0]), .u_rvalid(u_rvalid[0]), .u_rdata(u_rdata[0])
  );

  memory_controller #(.SLOT_WORDS(TH_SLOT_WORDS), .MAX_TILES(MAX_TILES)) u_mc (
    .clk, .rst_n, .start(mc_start), .uop_in(iss_uop), .busy(mc_busy), .done(mc_done),
    .done_sid(mc_done_sid),
    .tl_valid, .tl_slot, .tl_meta, .tl_ready, .tl_done, .tl_done_slot,
    .ml_valid, .ml_base, .ml_count, .ml_ready, .ml_done,
    .meta_we, .meta_waddr, .meta_wdata,
    .t_valid(t_valid[0]), .t_we(t_we[0]), .t_addr(t_addr[0]), .t_wdata(t_wdata[0]),
    .t_gnt(t_gnt[0]), .t_rvalid(t_rvalid[0]), .t_rdata(t_rdata[0]),
    .u_valid(u_valid[1]), .u_we(u_we[1]), .u_addr(u_addr[1]), .u_wdata(u_wdata[1]),
    .u_gnt(u_gnt[1]), .u_rvalid(u_rvalid[1]), .u_rdata(u_rdata[1]),
    .o_valid, .o_we, .o_addr, .o_wdata, .o_ready, .o_rvalid, .o_rdata
  );

  for (genvar v = 0; v < NVU; v++) begin : g_vu
    logic [NCORES-1:0] cu_valid, cu_we, cu_gnt, cu_rvalid, ct_valid, ct_gnt, ct_rvalid;
    logic [UAW-1:0]    cu_addr  [NCORES];
    word_t             cu_wdata [NCORES];
    word_t             cu_rdata [NCORES];
    logic [TAW-1:0]    ct_addr  [NCORES];
    logic [31:0]       ct_rdata [NCORES];

    vector_unit #(.NCORES(NCORES), .SLOT_WORDS(TH_SLOT_WORDS)) u_vu (
      .clk, .rst_n, .start(vu_start[v]), .uop_in(iss_uop), .busy(vu_busy[v]),
      .done(vu_done[v]), .done_sid(vu_done_sid[v]),
      .u_valid(cu_valid), .u_we(cu_we), .u_addr(cu_addr), .u_wdata(cu_wdata),
      .u_gnt(cu_gnt), .u_rvalid(cu_rvalid), .u_rdata(cu_rdata),
      .t_valid(ct_valid), .t_addr(ct_addr), .t_gnt(ct_gnt), .t_rvalid(ct_rvalid),
      .t_rdata(ct_rdata)
    );

    for (genvar c = 0; c < NCORES; c++) begin : g_c
      localparam int unsigned UP = 2 + v * NCORES + c;
      localparam int unsigned TP = 1 + v * NCORES + c;
      assign u_valid[UP]  = cu_valid[c];
      assign u_we[UP]     = cu_we[c];
      assign u_addr[UP]   = cu_addr[c];
      assign u_wdata[UP]  = cu_wdata[c];
      assign cu_gnt[c]    = u_gnt[UP];
      assign cu_rvalid[c] = u_rvalid[UP];
      assign cu_rdata[c]  = u_rdata[UP];
      assign t_valid[TP]  = ct_valid[c];
      assign t_we[TP]     = 1'b0;
      assign t_addr[TP]   = ct_addr[c];
      assign t_wdata[TP]  = '0;
      assign ct_gnt[c]    = t_gnt[TP];
      assign ct_rvalid[c] = t_rvalid[TP];
      assign ct_rdata[c]  = t_rdata[TP];
    end
  end

  // unit busy outputs are informational; the dispatcher keeps its own flags
  a_mu_busy: assert property (@(posedge clk) disable iff (!rst_n) mu_start |-> !mu_busy);
  a_vu_busy: assert property (@(posedge clk) disable iff (!rst_n) (vu_start & vu_busy) == '0);

endmodule
