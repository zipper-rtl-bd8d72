// tb_memory_controller: the controller against the off-chip memory model
// and single-port models of the UEM and the tile hub (grant at once, read
// data one cycle later). Checks the metadata load, the unpacking of a tile
// topology block into a tile hub slot, LD.SRC through the slot's source-id
// list (sparse gather of vertex embeddings), LD.DST and LD.EDGE by global
// id, ST.DST back to off-chip memory, the off-chip word count of a load,
// and that busy holds micro-ops back while a tile load is pending.
module tb_memory_controller;
  import zipper_pkg::*;
  localparam int SW = 16384, KW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, tl_valid, tl_ready, tl_done, ml_valid, ml_ready, ml_done;
  logic [SIDW-1:0] done_sid;
  uop_t uop_in;
  logic [1:0] tl_slot, tl_done_slot;
  meta_t tl_meta, meta_wdata;
  logic [OAW-1:0] ml_base;
  logic [15:0] ml_count;
  logic meta_we; logic [9:0] meta_waddr;
  logic t_valid, t_we, t_gnt, t_rvalid; logic [TAW-1:0] t_addr; logic [31:0] t_wdata, t_rdata;
  logic u_valid, u_we, u_gnt, u_rvalid; logic [UAW-1:0] u_addr; word_t u_wdata, u_rdata;
  logic o_valid, o_we, o_ready, o_rvalid; logic [OAW-1:0] o_addr; word_t o_wdata, o_rdata;

  memory_controller dut (.*);
  hbm_model #(.DEPTH(8192), .LAT(3)) u_hbm (.clk, .valid(o_valid), .we(o_we), .addr(o_addr),
    .wdata(o_wdata), .ready(o_ready), .rvalid(o_rvalid), .rdata(o_rdata));

  word_t umem [4096];
  logic [31:0] tmem [65536];
  meta_t mmem [1024];
  assign u_gnt = u_valid;
  assign t_gnt = t_valid;
  always_ff @(posedge clk) begin
    u_rvalid <= u_valid && !u_we;
    u_rdata  <= umem[u_addr[11:0]];
    if (u_valid && u_we) umem[u_addr[11:0]] <= u_wdata;
    t_rvalid <= t_valid && !t_we;
    t_rdata  <= tmem[t_addr];
    if (t_valid && t_we) tmem[t_addr] <= t_wdata;
    if (meta_we) mmem[meta_waddr] <= meta_wdata;
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic xfer(opcode_e op, int rows, int a, int d, int imm, int gbase, int slot);
    uop_in = '0; uop_in.op = op; uop_in.sid = 4'd2; uop_in.rows = 16'(rows); uop_in.kw = 4'(KW);
    uop_in.a_addr = UAW'(a); uop_in.d_addr = UAW'(d); uop_in.imm = 32'(imm);
    uop_in.gbase = 32'(gbase); uop_in.slot = 2'(slot);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(done_sid == 4'd2, "done sid");
  endtask

  initial begin
    meta_t m;
    int src_ids [5];
    int r0;
    start = 0; tl_valid = 0; ml_valid = 0; uop_in = '0; tl_slot = 0; tl_meta = '0;
    ml_base = 0; ml_count = 0;
    for (int i = 0; i < 8192; i++) for (int l = 0; l < 16; l++) u_hbm.mem[i][l*32 +: 32] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // metadata load: 3 entries at 100
    @(negedge clk); ml_valid = 1; ml_base = 100; ml_count = 3;
    @(negedge clk); ml_valid = 0;
    while (!ml_done) @(negedge clk);
    for (int t = 0; t < 3; t++) check(mmem[t] == u_hbm.mem[100 + t][META_W-1:0], "metadata entry");
    // tile: 20 edges, 5 sources, 7 destinations, topology at 200
    m = '0; m.topo_addr = 200; m.num_edges = 20; m.num_src = 5; m.num_dst = 7;
    src_ids = '{17, 3, 40, 41, 99};
    for (int i = 0; i < 5; i++) u_hbm.mem[202][i*32 +: 32] = 32'(src_ids[i]);
    @(negedge clk); tl_valid = 1; tl_slot = 2; tl_meta = m;
    #1 check(busy, "busy while a tile load is requested");
    @(negedge clk); tl_valid = 0;
    while (!tl_done) @(negedge clk);
    check(tl_done_slot == 2, "tile done slot");
    for (int i = 0; i < 20; i++) check(tmem[2*SW + TH_EDGE_OFF + i] == u_hbm.mem[200 + i/16][(i%16)*32 +: 32], "edge entry");
    for (int i = 0; i < 5; i++)  check(tmem[2*SW + TH_SRC_OFF + i] == 32'(src_ids[i]), "source id");
    for (int i = 0; i < 8; i++)  check(tmem[2*SW + TH_DOFF_OFF + i] == u_hbm.mem[203][i*32 +: 32], "dst offset");
    // LD.SRC: embeddings (imm 1000) of the listed sources into UEM 0..
    r0 = u_hbm.reads;
    xfer(OP_LD_SRC, 5, 0, 0, 1000, 0, 2);
    check(u_hbm.reads - r0 == 5 * KW, "LD.SRC off-chip reads");
    for (int i = 0; i < 5; i++) for (int w = 0; w < KW; w++)
      check(umem[i*KW + w] == u_hbm.mem[1000 + src_ids[i]*KW + w], "LD.SRC data");
    // LD.DST: vertices 30..33 into UEM 100
    xfer(OP_LD_DST, 4, 0, 100, 1000, 30, 0);
    for (int i = 0; i < 4; i++) for (int w = 0; w < KW; w++)
      check(umem[100 + i*KW + w] == u_hbm.mem[1000 + (30+i)*KW + w], "LD.DST data");
    // LD.EDGE: edges 7..12 from 3000 into UEM 200
    xfer(OP_LD_EDGE, 6, 0, 200, 3000, 7, 0);
    for (int i = 0; i < 6; i++) for (int w = 0; w < KW; w++)
      check(umem[200 + i*KW + w] == u_hbm.mem[3000 + (7+i)*KW + w], "LD.EDGE data");
    // ST.DST: UEM 0.. to vertices 50..54 at 5000
    xfer(OP_ST_DST, 5, 0, 0, 5000, 50, 0);
    @(negedge clk);
    for (int i = 0; i < 5; i++) for (int w = 0; w < KW; w++)
      check(u_hbm.mem[5000 + (50+i)*KW + w] == umem[i*KW + w], "ST.DST data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
