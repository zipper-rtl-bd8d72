// tb_scheduler: the scheduler running a GCN-like SDE program (the same shape
// as the full layer) against a behavioural dispatcher (queue of 9, random
// unit latency, synchronisation ops handed back) and a behavioural memory
// controller. 15 tiles in 3 partitions with random sizes. Checks: the run
// ends; every tile is loaded exactly once and only after its partition was
// opened; row counts are resolved from the tile (sources, edges) or the
// partition (destinations); slot-relative operands carry the pair's UEM
// base; a partition is stored only after all its tiles were gathered; every
// stream issues its function in program order; several pairs hold tiles at
// the same time.
module tb_scheduler;
  import zipper_pkg::*;
  localparam int NP = 4, NT = 15, NPART = 3, SLOTW = 65536;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we; fn_e prog_fn; logic [4:0] prog_addr; instr_t prog_data;
  logic [5:0] prog_len [3];
  logic start, busy, done, out_valid, out_ready, sync_valid, sync_ready;
  logic [15:0] num_tiles; logic [OAW-1:0] meta_base;
  uop_t out_uop, sync_uop;
  logic [2*NP:0] cmpl;
  logic [9:0] meta_raddr; meta_t meta_rdata;
  logic ml_valid, ml_ready, ml_done, tl_valid, tl_ready, tl_done;
  logic [OAW-1:0] ml_base; logic [15:0] ml_count;
  logic [1:0] tl_slot, tl_done_slot; meta_t tl_meta;

  scheduler #(.NPAIRS(NP), .PROG_DEPTH(32), .UEM_SLOT_WORDS(SLOTW), .MAX_TILES(1024)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s @%0t", what, $time); end
  endtask

  // ---------------------------------------------------------------- tiles
  meta_t meta [1024];
  assign meta_rdata = meta[meta_raddr];

  // ---------------------------------------------------------------- memory controller model
  int ml_t = 0, tl_t = 0;
  logic [1:0] tl_s;
  assign ml_ready = 1'b1;
  assign tl_ready = tl_t == 0;
  assign ml_done = ml_t == 1;
  assign tl_done = tl_t == 1;
  assign tl_done_slot = tl_s;
  int loaded [NT];
  int slot_tile [NP];
  int part_open = -1, gathered [NPART], stored [NPART], max_hold = 0;
  always @(posedge clk) if (rst_n) begin
    int mln, tln;
    logic [1:0] sn;
    mln = ml_t; tln = tl_t; sn = tl_s;
    if (mln > 0) mln--;
    if (tln > 0) tln--;
    if (ml_valid) mln = 5;
    if (tl_valid && tl_ready) begin
      int t;
      t = int'(tl_meta.topo_addr);
      loaded[t]++;
      check(int'(tl_meta.ptt) == part_open, "tile loaded only in its open partition");
      slot_tile[tl_slot] = t;
      tln = 3 + $urandom % 6; sn = tl_slot;
    end
    ml_t <= mln; tl_t <= tln; tl_s <= sn;
  end

  // ---------------------------------------------------------------- dispatcher model
  uop_t dq [$];
  int   lat [2*NP+1];
  int   pc_seen [2*NP+1];
  int   last_pc [2*NP+1];
  opcode_e progs [3][32];
  assign out_ready = dq.size() < 9;
  assign sync_valid = dq.size() != 0 && op_class(dq[0].op) == UC_SYNC;
  assign sync_uop = dq.size() != 0 ? dq[0] : '0;
  always_comb for (int s = 0; s <= 2*NP; s++) cmpl[s] = lat[s] == 1;
  always @(posedge clk) if (rst_n) begin
    int ln [2*NP+1];
    ln = lat;
    for (int s = 0; s <= 2*NP; s++) if (ln[s] > 0) ln[s]--;
    if (dq.size() != 0) begin
      if (op_class(dq[0].op) != UC_SYNC) begin
        ln[dq[0].sid] = 1 + $urandom % 12;
        void'(dq.pop_front());
      end else if (sync_ready) void'(dq.pop_front());
    end
    if (out_valid && out_ready) begin
      uop_t u;
      int p;
      u = out_uop;
      dq.push_back(u);
      p = int'(u.slot);
      // program order: the tag in imm is the instruction's index; WAIT is
      // handled inside the scheduler and never reaches the dispatcher
      begin
        int f, e;
        f = u.sid == 0 ? 0 : (u.sid <= NP ? 1 : 2);
        e = (last_pc[u.sid] + 1) % int'(prog_len[f]);
        if (progs[f][e] == OP_WAIT) e = (e + 1) % int'(prog_len[f]);
        check(int'(u.imm) == e, $sformatf("program order sid %0d got %0d after %0d", u.sid, u.imm, last_pc[u.sid]));
      end
      last_pc[u.sid] = int'(u.imm);
      if (u.sid != 0) check(p == (int'(u.sid) - 1) % NP, "pair of a stream");
      case (u.op)
        OP_LD_SRC: begin
          check(u.rows == meta[slot_tile[p]].num_src, "source rows from the tile");
          check(u.d_addr == UAW'(p * SLOTW + 16), "slot-relative operand");
        end
        OP_LD_EDGE: begin
          check(u.rows == meta[slot_tile[p]].num_edges, "edge rows from the tile");
          check(u.gbase == meta[slot_tile[p]].edge_off, "edge base from the tile");
        end
        OP_GTHR_SUM: begin
          check(u.rows == meta[slot_tile[p]].num_dst, "destination rows from the partition");
          gathered[meta[slot_tile[p]].ptt]++;
        end
        OP_UPD_PTT: part_open++;
        OP_ST_DST: begin
          int pt;
          pt = part_open;
          check(u.gbase == 32'(pt * 100), "partition base");
          check(u.rows == 16'(10 + pt), "partition rows");
          stored[pt]++;
          check(gathered[pt] == NT / NPART, "store after all tiles of the partition");
        end
        OP_LD_DST: check(u.gbase == 0 || u.rows != 16'(7), "literal rows address from 0");
        default: ;
      endcase
    end
    lat <= ln;
    if ($countones(dut.has_tile) > max_hold) max_hold = $countones(dut.has_tile);
  end

  function automatic instr_t mk(opcode_e op, rows_sel_e rs, bit rel, int d, int tag);
    instr_t i;
    i = '0;
    i.op = op; i.rows_sel = rs; i.kw = 4'd1; i.nw = 4'd1;
    i.d_rel = rel; i.d_addr = UAW'(d); i.imm = 32'(tag);
    return i;
  endfunction
  task automatic load(fn_e fn, int addr, instr_t ins);
    @(negedge clk);
    prog_we = 1; prog_fn = fn; prog_addr = 5'(addr); prog_data = ins;
    progs[int'(fn)][addr] = ins.op;
    @(negedge clk);
    prog_we = 0;
  endtask

  initial begin
    prog_we = 0; prog_fn = FN_D; prog_addr = 0; prog_data = '0; start = 0;
    num_tiles = 16'(NT); meta_base = 0;
    for (int s = 0; s <= 2*NP; s++) begin lat[s] = 0; last_pc[s] = -1; end
    for (int t = 0; t < NT; t++) begin
      meta[t] = '0;
      meta[t].topo_addr = 32'(t);
      meta[t].ptt = 16'(t / (NT / NPART));
      meta[t].dst_base = 32'((t / (NT / NPART)) * 100);
      meta[t].num_dst = 16'(10 + t / (NT / NPART));
      meta[t].num_src = 16'(1 + $urandom % 200);
      meta[t].num_edges = 16'(1 + $urandom % 900);
      meta[t].edge_off = 32'(t * 1000);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(FN_D, 0, mk(OP_FCH_PTT,   ROWS_LIT,  0, 0, 0));
    load(FN_D, 1, mk(OP_LD_DST,    ROWS_DST,  0, 0, 1));
    load(FN_D, 2, mk(OP_GEMM,      ROWS_DST,  0, 0, 2));
    load(FN_D, 3, mk(OP_UPD_PTT,   ROWS_LIT,  0, 0, 3));
    load(FN_D, 4, mk(OP_SIGNAL_S,  ROWS_LIT,  0, 0, 4));
    load(FN_D, 5, mk(OP_WAIT,      ROWS_LIT,  0, 0, 5));
    load(FN_D, 6, mk(OP_ADD,       ROWS_DST,  0, 0, 6));
    load(FN_D, 7, mk(OP_ST_DST,    ROWS_DST,  0, 0, 7));
    load(FN_S, 0, mk(OP_WAIT,      ROWS_LIT,  0, 0, 0));
    load(FN_S, 1, mk(OP_LD_SRC,    ROWS_SRC,  1, 16, 1));
    load(FN_S, 2, mk(OP_GEMM,      ROWS_SRC,  1, 32, 2));
    load(FN_S, 3, mk(OP_SIGNAL_E,  ROWS_LIT,  0, 0, 3));
    load(FN_E, 0, mk(OP_WAIT,      ROWS_LIT,  0, 0, 0));
    load(FN_E, 1, mk(OP_LD_EDGE,   ROWS_EDGE, 1, 0, 1));
    load(FN_E, 2, mk(OP_SCTR_OUTE, ROWS_EDGE, 1, 0, 2));
    load(FN_E, 3, mk(OP_GTHR_SUM,  ROWS_DST,  0, 0, 3));
    load(FN_E, 4, mk(OP_FCH_TILE,  ROWS_LIT,  0, 0, 4));
    load(FN_E, 5, mk(OP_CHK_PTT,   ROWS_LIT,  0, 0, 5));
    prog_len[0] = 8; prog_len[1] = 4; prog_len[2] = 6;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    check(!busy, "idle after the run");
    for (int t = 0; t < NT; t++) check(loaded[t] == 1, "tile loaded once");
    for (int p = 0; p < NPART; p++) check(stored[p] == 1, "partition stored once");
    check(max_hold >= 2, "several pairs hold tiles at once");
    $display("max pairs holding tiles: %0d", max_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
