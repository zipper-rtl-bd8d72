// scheduler: the first scheduling level. It holds the stream state registers
// of one dStream (sid 0), NPAIRS sStreams (sid 1..NPAIRS) and NPAIRS
// eStreams (sid NPAIRS+1..2*NPAIRS); sStream p and eStream p form pair p and
// share tile hub slot p and UEM slot p. The three SDE functions
// (dFunction, sFunction, eFunction) are loaded by the host into three
// program memories; every stream runs its function in a loop.
//
// Issue: each cycle the stream that became ready first (first-ready-first-
// serve, by a ready time stamp, lowest sid on a tie) has its current
// instruction resolved into a micro-op and sent to the dispatcher; the
// stream becomes "issued" until the dispatcher or the scheduler itself
// reports completion, then advances its pc. No issue while the dispatcher
// queue is full. Resolution replaces the row selector by the tile's or
// partition's count and adds the pair's UEM slot base (p * UEM_SLOT_WORDS)
// to operands marked slot-relative (the dStream's base is 0). The global
// id base of a transfer is the partition's first vertex (LD.DST, ST.DST),
// the tile's first edge (LD.EDGE), or 0 when the row count is literal.
//
// Synchronization (this design's reading of the multi-stream execution):
//   WAIT      blocks the stream until it has been woken (an sStream also
//             until its tile's topology is in the tile hub).
//   FCH.PTT   dStream: if every tile has been claimed the run ends (done);
//             otherwise the partition of the next unclaimed tile becomes the
//             current partition.
//   UPD.PTT   dStream: opens the current partition for claiming.
//   SIGNAL.S  dStream: every parked pair asks for a tile; the claim engine
//             gives each, one per cycle, the next tile if it belongs to the
//             current partition (the tile's topology load is started and its
//             sStream woken).
//   SIGNAL.E  sStream p: wakes eStream p.
//   FCH.TILE  eStream p: retires the pair's tile and claims the next one if
//             it is in the current partition; when no tile of the partition
//             is left in flight the dStream is woken.
//   CHK.PTT   eStream p: if the pair holds a new tile its sStream is woken.
// The tile metadata array is read from the tile hub at start by the memory
// controller (num_tiles entries at meta_base).
module scheduler
  import zipper_pkg::*;
#(
  parameter int unsigned NPAIRS         = 4,
  parameter int unsigned PROG_DEPTH     = 32,
  parameter int unsigned UEM_SLOT_WORDS = 65536,
  parameter int unsigned MAX_TILES      = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  // host
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
  // dispatcher
  output logic            out_valid,
  output uop_t            out_uop,
  input  logic            out_ready,
  input  logic            sync_valid,
  input  uop_t            sync_uop,
  output logic            sync_ready,
  input  logic [2*NPAIRS:0] cmpl,
  // tile hub metadata
  output logic [$clog2(MAX_TILES)-1:0] meta_raddr,
  input  meta_t           meta_rdata,
  // memory controller
  output logic            ml_valid,
  output logic [OAW-1:0]  ml_base,
  output logic [15:0]     ml_count,
  input  logic            ml_ready,
  input  logic            ml_done,
  output logic            tl_valid,
  output logic [1:0]      tl_slot,
  output meta_t           tl_meta,
  input  logic            tl_ready,
  input  logic            tl_done,
  input  logic [1:0]      tl_done_slot
);
  localparam int unsigned NS  = 2 * NPAIRS + 1;
  localparam int unsigned PCW = $clog2(PROG_DEPTH);
  localparam int unsigned PW  = (NPAIRS > 1) ? $clog2(NPAIRS) : 1;

  typedef enum logic [2:0] {T_IDLE, T_READY, T_ISSUED, T_WAIT, T_DONE} sstate_e;
  typedef enum logic [1:0] {R_IDLE, R_META, R_RUN} run_e;

  instr_t  prog [3][PROG_DEPTH];
  sstate_e st    [NS];
  logic [PCW-1:0] pc [NS];
  logic [31:0]    ts [NS];
  logic [NS-1:0]  wake;
  logic [31:0]    now;
  run_e           run;

  logic [15:0]    next_tile, outstanding;
  logic [15:0]    cur_ptt, cur_num_dst;
  logic [31:0]    cur_dst_base;
  logic           ptt_open;
  logic [NPAIRS-1:0] has_tile, want, ld_pend, ld_busy;
  meta_t          pmeta [NPAIRS];

  always_ff @(posedge clk)
    if (prog_we) prog[prog_fn][prog_addr] <= prog_data;

  function automatic fn_e fn_of(int s);
    if (s == 0) return FN_D;
    if (s <= int'(NPAIRS)) return FN_S;
    return FN_E;
  endfunction

  function automatic int pair_of(int s);
    if (s == 0) return 0;
    if (s <= int'(NPAIRS)) return s - 1;
    return s - 1 - int'(NPAIRS);
  endfunction

  // ------------------------------------------------------------ issue select
  instr_t cur_ins [NS];
  logic   sel_v;
  logic [SIDW-1:0] sel_s;
  always_comb begin
    sel_v = 1'b0;
    sel_s = '0;
    for (int s = 0; s < NS; s++) begin
      cur_ins[s] = prog[fn_of(s)][pc[s]];
      if (st[s] == T_READY && cur_ins[s].op != OP_WAIT && out_ready &&
          (!sel_v || ts[s] < ts[sel_s])) begin
        sel_v = 1'b1;
        sel_s = SIDW'(s);
      end
    end
  end

  // resolve the selected instruction
  always_comb begin
    instr_t in;
    int p;
    logic [UAW-1:0] base;
    in = cur_ins[sel_s];
    p  = pair_of(int'(sel_s));
    base = (sel_s == 0) ? '0 : UAW'(p * int'(UEM_SLOT_WORDS));
    out_uop        = '0;
    out_uop.op     = in.op;
    out_uop.sid    = sel_s;
    out_uop.slot   = 2'(p);
    case (in.rows_sel)
      ROWS_SRC:  out_uop.rows = pmeta[p].num_src;
      ROWS_EDGE: out_uop.rows = pmeta[p].num_edges;
      ROWS_DST:  out_uop.rows = cur_num_dst;
      default:   out_uop.rows = in.rows_lit;
    endcase
    out_uop.kw     = in.kw;
    out_uop.nw     = in.nw;
    out_uop.bmode  = in.bmode;
    out_uop.a_addr = in.a_addr + (in.a_rel ? base : '0);
    out_uop.b_addr = in.b_addr + (in.b_rel ? base : '0);
    out_uop.d_addr = in.d_addr + (in.d_rel ? base : '0);
    out_uop.imm    = in.imm;
    // global id of the first row; a literal row count addresses from 0
    // (used for weights and other vertex-independent data)
    if (in.rows_sel == ROWS_LIT)
      out_uop.gbase = '0;
    else
      case (in.op)
        OP_LD_DST, OP_ST_DST: out_uop.gbase = cur_dst_base;
        OP_LD_EDGE:           out_uop.gbase = pmeta[p].edge_off;
        default:              out_uop.gbase = '0;
      endcase
  end
  assign out_valid = sel_v;

  // ------------------------------------------------------------ claim engine
  logic            claimable;
  logic            cl_act;
  logic [PW-1:0]   cl_p;
  assign meta_raddr = next_tile[$clog2(MAX_TILES)-1:0];
  assign claimable  = (next_tile < num_tiles) && (meta_rdata.ptt == cur_ptt) && ptt_open;
  always_comb begin
    cl_act = 1'b0;
    cl_p   = '0;
    for (int p = NPAIRS - 1; p >= 0; p--)
      if (want[p] && !has_tile[p] && st[1 + p] == T_WAIT) begin
        cl_act = 1'b1;
        cl_p   = PW'(p);
      end
  end
  assign sync_ready = !cl_act && (run == R_RUN);

  // tile topology loads, lowest pair first
  always_comb begin
    tl_valid = 1'b0;
    tl_slot  = '0;
    for (int p = NPAIRS - 1; p >= 0; p--)
      if (ld_pend[p] && !ld_busy[p]) begin
        tl_valid = 1'b1;
        tl_slot  = 2'(p);
      end
  end
  assign tl_meta = pmeta[tl_slot[PW-1:0]];

  logic busy_meta_q;
  assign ml_valid = (run == R_META) && !busy_meta_q;
  assign ml_base  = meta_base;
  assign ml_count = num_tiles;

  assign busy = (run != R_IDLE);

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= R_IDLE; now <= '0; wake <= '0; done <= 1'b0; busy_meta_q <= 1'b0;
      next_tile <= '0; outstanding <= '0; cur_ptt <= '0; cur_num_dst <= '0;
      cur_dst_base <= '0; ptt_open <= 1'b0;
      has_tile <= '0; want <= '0; ld_pend <= '0; ld_busy <= '0;
      for (int s = 0; s < NS; s++) begin st[s] <= T_IDLE; pc[s] <= '0; ts[s] <= '0; end
      for (int p = 0; p < NPAIRS; p++) pmeta[p] <= '0;
    end else begin
      now <= now + 1'b1;
      case (run)
        R_IDLE: if (start) begin
          run <= R_META; done <= 1'b0; busy_meta_q <= 1'b0;
        end
        R_META: begin
          if (ml_valid && ml_ready) busy_meta_q <= 1'b1;
          if (ml_done) begin
            run <= R_RUN; busy_meta_q <= 1'b0;
            next_tile <= '0; outstanding <= '0; ptt_open <= 1'b0;
            wake <= '0; want <= '0; has_tile <= '0; ld_pend <= '0; ld_busy <= '0;
            for (int s = 0; s < NS; s++) begin st[s] <= T_READY; pc[s] <= '0; ts[s] <= now; end
          end
        end
        default: ;
      endcase

      if (run == R_RUN) begin
        // issue
        if (sel_v) st[sel_s] <= T_ISSUED;
        // streams reaching WAIT park; a woken one passes
        for (int s = 0; s < NS; s++) begin
          if (st[s] == T_READY && cur_ins[s].op == OP_WAIT) st[s] <= T_WAIT;
          if (st[s] == T_WAIT && wake[s] &&
              !(fn_of(s) == FN_S && (ld_pend[pair_of(s)] || ld_busy[pair_of(s)]))) begin
            wake[s] <= 1'b0;
            st[s]   <= T_READY;
            ts[s]   <= now;
            pc[s]   <= (32'(pc[s]) + 1 == 32'(prog_len[fn_of(s)])) ? '0 : pc[s] + 1'b1;
          end
        end
        // completions from the units
        for (int s = 0; s < NS; s++)
          if (cmpl[s] && st[s] == T_ISSUED) begin
            st[s] <= T_READY;
            ts[s] <= now;
            pc[s] <= (32'(pc[s]) + 1 == 32'(prog_len[fn_of(s)])) ? '0 : pc[s] + 1'b1;
          end
        // tile loads
        if (tl_valid && tl_ready) ld_busy[tl_slot[PW-1:0]] <= 1'b1;
        if (tl_done) begin
          ld_busy[tl_done_slot[PW-1:0]] <= 1'b0;
          ld_pend[tl_done_slot[PW-1:0]] <= 1'b0;
        end
        // claim engine (SIGNAL.S)
        if (cl_act) begin
          if (claimable) begin
            has_tile[cl_p] <= 1'b1;
            pmeta[cl_p]    <= meta_rdata;
            ld_pend[cl_p]  <= 1'b1;
            want[cl_p]     <= 1'b0;
            wake[1 + cl_p] <= 1'b1;
            next_tile      <= next_tile + 1'b1;
            outstanding    <= outstanding + 1'b1;
          end else want <= '0;
        end
        // synchronization micro-ops returned by the dispatcher
        if (sync_valid && sync_ready) begin
          int s, p;
          logic fin;
          s   = int'(sync_uop.sid);
          p   = pair_of(s);
          fin = 1'b1;
          case (sync_uop.op)
            OP_FCH_PTT: begin
              if (next_tile >= num_tiles) begin
                fin   = 1'b0;
                st[s] <= T_DONE;
                run   <= R_IDLE;
                done  <= 1'b1;
                for (int k = 1; k < NS; k++) st[k] <= T_IDLE;
              end else begin
                cur_ptt      <= meta_rdata.ptt;
                cur_num_dst  <= meta_rdata.num_dst;
                cur_dst_base <= meta_rdata.dst_base;
                ptt_open     <= 1'b0;
              end
            end
            OP_UPD_PTT:  ptt_open <= 1'b1;
            OP_SIGNAL_S: want <= '1;
            OP_SIGNAL_E: wake[s + int'(NPAIRS)] <= 1'b1;
            OP_FCH_TILE: begin
              if (claimable) begin
                has_tile[p] <= 1'b1;
                pmeta[p]    <= meta_rdata;
                ld_pend[p]  <= 1'b1;
                next_tile   <= next_tile + 1'b1;
              end else begin
                has_tile[p] <= 1'b0;
                outstanding <= outstanding - 1'b1;
                if (outstanding == 16'd1) wake[0] <= 1'b1;
              end
            end
            OP_CHK_PTT: if (has_tile[p]) wake[1 + p] <= 1'b1;
            default: ;
          endcase
          if (fin) begin
            st[s] <= T_READY;
            ts[s] <= now;
            pc[s] <= (32'(pc[s]) + 1 == 32'(prog_len[fn_of(s)])) ? '0 : pc[s] + 1'b1;
          end
        end
      end
    end
  end

  a_one_claimer: assert property (@(posedge clk) disable iff (!rst_n)
    !(cl_act && sync_valid && sync_ready));

endmodule
