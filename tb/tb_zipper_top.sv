// tb_zipper_top: end-to-end test of the accelerator at its default
// parameters. It builds a random graph of NV vertices with 128-wide Q8.8
// embeddings, cuts it into a grid of tiles (NP destination partitions x NSP
// source ranges, sparse: a tile keeps only sources that have edges in it),
// writes tile metadata, tile topology, input embeddings, weights and bias
// into the off-chip memory model, loads a one-layer GCN (with self term) as
// the three SDE functions, runs it and compares every output embedding with
// a reference computed here:
//   out[v] = relu( h[v] + sum_{e=(u->v)} (h[u] * w_e) >>> 8 + bias ),
//   h[u] = (x[u] W) >>> 8, with a random Q8.8 weight w_e in [0,1] per edge.
// It also counts how often the mechanisms of the design occur (tile claims
// by SIGNAL.S and by FCH.TILE, partition hand-back to the dStream, MU/VU
// overlap, several tiles in flight, both VUs busy, a queued micro-op waiting
// for a unit, UEM bank conflicts, a gather held back) and fails if one never
// happened.
module tb_zipper_top;
  import zipper_pkg::*;

  localparam int NV  = 48;
  localparam int NP  = 3;      // destination partitions
  localparam int NSP = 6;      // source ranges per partition
  localparam int KW  = 4;      // 128-wide embeddings
  localparam int DEG = 12;
  localparam int PV  = NV / NP;
  localparam int SV  = NV / NSP;
  localparam int NE  = NV * DEG;
  localparam int XBASE = 0, OUTBASE = 1024, METABASE = 2048, TOPOBASE = 4096,
                 WBASE = 8192, BBASE = 9000, EWBASE = 10240;
  localparam int UW = 262144, UB = UW + 512, UDX = UW + 1024, UDACC = UW + 8192,
                 UDOUT = UW + 16384;
  localparam int SX = 0, SH = 16384, EM = 32768, EWT = 49152;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we; fn_e prog_fn; logic [4:0] prog_addr; instr_t prog_data;
  logic [5:0] prog_len [3];
  logic start, busy, done;
  logic [15:0] num_tiles;
  logic o_valid, o_we, o_ready, o_rvalid;
  logic [31:0] o_addr;
  word_t o_wdata, o_rdata;

  zipper_top dut (
    .clk, .rst_n, .prog_we, .prog_fn, .prog_addr, .prog_data, .prog_len,
    .start, .num_tiles, .meta_base(32'(METABASE)), .busy, .done,
    .o_valid, .o_we, .o_addr, .o_wdata, .o_ready, .o_rvalid, .o_rdata
  );

  hbm_model #(.DEPTH(16384), .LAT(4)) u_hbm (
    .clk, .valid(o_valid), .we(o_we), .addr(o_addr), .wdata(o_wdata),
    .ready(o_ready), .rvalid(o_rvalid), .rdata(o_rdata)
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ graph
  int esrc [NE], edst [NE];
  logic signed [15:0] x [NV][128];
  logic signed [15:0] wt [128][128];
  logic signed [15:0] bias [128];
  logic signed [15:0] hh [NV][128];
  logic signed [15:0] expv [NV][128];
  int                 refsum [NV][128];

  function automatic instr_t mk(opcode_e op, rows_sel_e rs, int kw, int nw, bmode_e bm,
                                bit ar, int a, bit br, int b, bit dr, int d, int imm);
    instr_t i;
    i = '0;
    i.op = op; i.rows_sel = rs; i.kw = 4'(kw); i.nw = 4'(nw); i.bmode = bm;
    i.a_rel = ar; i.b_rel = br; i.d_rel = dr;
    i.a_addr = UAW'(a); i.b_addr = UAW'(b); i.d_addr = UAW'(d); i.imm = 32'(imm);
    return i;
  endfunction

  task automatic load(fn_e fn, int addr, instr_t ins);
    @(negedge clk);
    prog_we = 1; prog_fn = fn; prog_addr = 5'(addr); prog_data = ins;
    @(negedge clk);
    prog_we = 0;
  endtask

  // mechanism counters
  int n_claim_sig, n_claim_fch, n_dwake, n_overlap, n_multi, n_vu2, n_hold, n_conflict,
      n_gthr_hold, cycles;

  always @(posedge clk) if (rst_n && busy) begin
    int ht;
    cycles++;
    if (dut.u_sched.cl_act && dut.u_sched.claimable) n_claim_sig++;
    if (dut.u_sched.sync_valid && dut.u_sched.sync_ready && dut.u_sched.sync_uop.op == OP_FCH_TILE
        && dut.u_sched.claimable) n_claim_fch++;
    if (dut.u_sched.sync_valid && dut.u_sched.sync_ready && dut.u_sched.sync_uop.op == OP_FCH_TILE
        && !dut.u_sched.claimable && dut.u_sched.outstanding == 1) n_dwake++;
    if (dut.u_mu.busy && (dut.vu_busy != 0)) n_overlap++;
    ht = $countones(dut.u_sched.has_tile);
    if (ht >= 2) n_multi++;
    if (dut.vu_busy == 2'b11) n_vu2++;
    if (dut.u_disp.cnt != 0 && !dut.u_disp.sel_v) n_hold++;
    if ((dut.u_valid & ~dut.u_gnt) != 0) n_conflict++;
    for (int k = 0; k < int'(dut.u_disp.cnt); k++)
      if ((dut.u_disp.q[k].op == OP_GTHR_SUM) && dut.u_disp.gthr_q && (dut.u_disp.vu_busy_q != 2'b11)) n_gthr_hold++;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ntile, topo, cnt_e;
    prog_we = 0; prog_fn = FN_D; prog_addr = 0; prog_data = '0; start = 0; num_tiles = 0;
    prog_len[0] = 9; prog_len[1] = 4; prog_len[2] = 7;
    n_claim_sig = 0; n_claim_fch = 0; n_dwake = 0; n_overlap = 0; n_multi = 0; n_vu2 = 0;
    n_hold = 0; n_conflict = 0; n_gthr_hold = 0; cycles = 0;

    // random graph; edges grouped later per tile
    for (int e = 0; e < NE; e++) begin
      edst[e] = e / DEG;
      esrc[e] = int'($urandom_range(NV - 1));
    end
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < 128; k++) x[v][k] = 16'(int'($urandom_range(96)) - 48);
    for (int k = 0; k < 128; k++)
      for (int n = 0; n < 128; n++) wt[k][n] = 16'(int'($urandom_range(96)) - 48);
    for (int n = 0; n < 128; n++) bias[n] = 16'(int'($urandom_range(512)) - 256);

    // off-chip image: embeddings, weights, bias
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < 128; k++) u_hbm.mem[XBASE + v*KW + k/32][(k%32)*16 +: 16] = x[v][k];
    for (int k = 0; k < 128; k++)
      for (int n = 0; n < 128; n++) u_hbm.mem[WBASE + k*KW + n/32][(n%32)*16 +: 16] = wt[k][n];
    for (int n = 0; n < 128; n++) u_hbm.mem[BBASE + n/32][(n%32)*16 +: 16] = bias[n];

    // tiles: partition p, source range s; edges sorted by destination
    for (int v = 0; v < NV; v++)
      for (int n = 0; n < 128; n++) begin
        int acc; acc = 0;
        for (int k = 0; k < 128; k++) acc += int'(x[v][k]) * int'(wt[k][n]);
        hh[v][n] = 16'(acc >>> 8);
        refsum[v][n] = 0;
      end
    ntile = 0; topo = TOPOBASE; cnt_e = 0;
    for (int p = 0; p < NP; p++)
      for (int s = 0; s < NSP; s++) begin
        int srcs [NV]; int nsrc; int loc [NV]; int ents [NE]; int ne; int doff [PV+1];
        meta_t m;
        nsrc = 0; ne = 0;
        for (int u = s*SV; u < (s+1)*SV; u++) begin
          bit used; used = 0;
          for (int e = 0; e < NE; e++) if (esrc[e] == u && edst[e] / PV == p) used = 1;
          if (used) begin loc[u] = nsrc; srcs[nsrc] = u; nsrc++; end
        end
        if (nsrc == 0) continue;
        for (int d = 0; d < PV; d++) begin
          doff[d] = ne;
          for (int e = 0; e < NE; e++)
            if (edst[e] == p*PV + d && esrc[e] >= s*SV && esrc[e] < (s+1)*SV) begin
              logic signed [15:0] ew;
              ents[ne] = (d << 16) | loc[esrc[e]];
              ew = 16'($urandom_range(256));
              u_hbm.mem[EWBASE + cnt_e + ne][15:0] = ew;
              for (int n = 0; n < 128; n++)
                refsum[edst[e]][n] += (int'(hh[esrc[e]][n]) * int'(ew)) >>> 8;
              ne++;
            end
        end
        doff[PV] = ne;
        m = '0;
        m.topo_addr = 32'(topo); m.edge_off = 32'(cnt_e); m.dst_base = 32'(p*PV);
        m.num_dst = 16'(PV); m.num_edges = 16'(ne); m.num_src = 16'(nsrc); m.ptt = 16'(p);
        u_hbm.mem[METABASE + ntile] = 512'(m);
        cnt_e += ne;
        for (int i = 0; i < ne; i++)    begin u_hbm.mem[topo + i/16][(i%16)*32 +: 32] = 32'(ents[i]); end
        topo += (ne + 15) / 16;
        for (int i = 0; i < nsrc; i++)  begin u_hbm.mem[topo + i/16][(i%16)*32 +: 32] = 32'(srcs[i]); end
        topo += (nsrc + 15) / 16;
        for (int i = 0; i <= PV; i++)   begin u_hbm.mem[topo + i/16][(i%16)*32 +: 32] = 32'(doff[i]); end
        topo += (PV + 16) / 16;
        ntile++;
      end
    num_tiles = 16'(ntile);

    // reference
    for (int v = 0; v < NV; v++)
      for (int n = 0; n < 128; n++) begin
        int a; a = int'(hh[v][n]) + refsum[v][n];
        a += int'(bias[n]);
        if (a > 32767) a = 32767;
        if (a < -32768) a = -32768;
        expv[v][n] = (a < 0) ? 16'sd0 : 16'(a);
      end

    repeat (3) @(negedge clk);
    rst_n = 1;

    // dFunction
    load(FN_D, 0, mk(OP_FCH_PTT, ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    load(FN_D, 1, mk(OP_LD_DST,  ROWS_DST, KW, 0, B_ROW, 0, 0, 0, 0, 0, UDX, XBASE));
    load(FN_D, 2, mk(OP_GEMM,    ROWS_DST, KW, KW, B_ROW, 0, UDX, 0, UW, 0, UDACC, 0));
    load(FN_D, 3, mk(OP_UPD_PTT, ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    load(FN_D, 4, mk(OP_SIGNAL_S,ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    load(FN_D, 5, mk(OP_WAIT,    ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    load(FN_D, 6, mk(OP_ADD,     ROWS_DST, KW, 0, B_SHARED, 0, UDACC, 0, UB, 0, UDACC, 0));
    load(FN_D, 7, mk(OP_RELU,    ROWS_DST, KW, 0, B_ROW, 0, UDACC, 0, 0, 0, UDOUT, 0));
    load(FN_D, 8, mk(OP_ST_DST,  ROWS_DST, KW, 0, B_ROW, 0, UDOUT, 0, 0, 0, 0, OUTBASE));
    // sFunction
    load(FN_S, 0, mk(OP_WAIT,    ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    load(FN_S, 1, mk(OP_LD_SRC,  ROWS_SRC, KW, 0, B_ROW, 0, 0, 0, 0, 1, SX, XBASE));
    load(FN_S, 2, mk(OP_GEMM,    ROWS_SRC, KW, KW, B_ROW, 1, SX, 0, UW, 1, SH, 0));
    load(FN_S, 3, mk(OP_SIGNAL_E,ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    // eFunction
    load(FN_E, 0, mk(OP_WAIT,    ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    load(FN_E, 1, mk(OP_LD_EDGE, ROWS_EDGE, 1, 0, B_ROW, 0, 0, 0, 0, 1, EWT, EWBASE));
    load(FN_E, 2, mk(OP_SCTR_OUTE, ROWS_EDGE, KW, 0, B_ROW, 1, SH, 0, 0, 1, EM, 0));
    load(FN_E, 3, mk(OP_MUL,     ROWS_EDGE, KW, 0, B_SCALAR, 1, EM, 1, EWT, 1, EM, 0));
    load(FN_E, 4, mk(OP_GTHR_SUM,  ROWS_DST, KW, 0, B_ROW, 1, EM, 0, 0, 0, UDACC, 0));
    load(FN_E, 5, mk(OP_FCH_TILE,ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
    load(FN_E, 6, mk(OP_CHK_PTT, ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));

    // The weights and bias are brought on chip by a one-off program that
    // uses the same data-transfer path (rows given literally, gbase = 0).
    begin
      instr_t wl, bl, fp;
      wl = mk(OP_LD_DST, ROWS_LIT, KW, 0, B_ROW, 0, 0, 0, 0, 0, UW, WBASE); wl.rows_lit = 128;
      bl = mk(OP_LD_DST, ROWS_LIT, KW, 0, B_ROW, 0, 0, 0, 0, 0, UB, BBASE); bl.rows_lit = 1;
      fp = mk(OP_FCH_PTT, ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0);
      // temporary dFunction: load W, load bias, then FCH.PTT with no tiles ends the run
      load(FN_D, 0, wl); load(FN_D, 1, bl); load(FN_D, 2, fp);
      prog_len[0] = 3;
      num_tiles = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      wait (done);
      @(negedge clk);
      load(FN_D, 0, mk(OP_FCH_PTT, ROWS_LIT, 0, 0, B_ROW, 0, 0, 0, 0, 0, 0, 0));
      load(FN_D, 1, mk(OP_LD_DST,  ROWS_DST, KW, 0, B_ROW, 0, 0, 0, 0, 0, UDX, XBASE));
      load(FN_D, 2, mk(OP_GEMM,    ROWS_DST, KW, KW, B_ROW, 0, UDX, 0, UW, 0, UDACC, 0));
      prog_len[0] = 9;
      num_tiles = 16'(ntile);
    end

    $display("graph: %0d vertices, %0d edges, %0d tiles", NV, NE, ntile);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    $display("layer done after %0d busy cycles", cycles);

    for (int v = 0; v < NV; v++) begin
      int bad; bad = 0;
      for (int n = 0; n < 128; n++)
        if (u_hbm.mem[OUTBASE + v*KW + n/32][(n%32)*16 +: 16] !== expv[v][n]) bad++;
      checks++;
      if (bad != 0) begin
        failures++;
        if (failures < 5) $display("vertex %0d: %0d lanes wrong (got %h exp %h)", v, bad,
          u_hbm.mem[OUTBASE + v*KW][15:0], expv[v][0]);
      end
    end

    $display("mechanisms: claim_by_signal=%0d claim_by_fch_tile=%0d dstream_wake=%0d mu_vu_overlap=%0d multi_tile=%0d both_vu=%0d queue_hold=%0d bank_conflict=%0d gather_hold=%0d",
             n_claim_sig, n_claim_fch, n_dwake, n_overlap, n_multi, n_vu2, n_hold, n_conflict, n_gthr_hold);
    checks++; if (n_claim_sig == 0) begin failures++; $display("no SIGNAL.S claim"); end
    checks++; if (n_claim_fch == 0) begin failures++; $display("no FCH.TILE claim"); end
    checks++; if (n_dwake != NP) begin failures++; $display("dStream wakes %0d != %0d", n_dwake, NP); end
    checks++; if (n_overlap == 0) begin failures++; $display("no MU/VU overlap"); end
    checks++; if (n_multi == 0) begin failures++; $display("never two tiles in flight"); end
    checks++; if (n_vu2 == 0) begin failures++; $display("never both VUs busy"); end
    checks++; if (n_hold == 0) begin failures++; $display("no queue hold"); end
    checks++; if (n_conflict == 0) begin failures++; $display("no bank conflict"); end
    checks++; if (n_gthr_hold == 0) begin failures++; $display("no gather hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
