// memory_controller: moves data between the off-chip memory (HBM) and the
// on-chip memories.
//
// Jobs, one at a time, in priority order:
//   * metadata load (at the start of a run): ml_count off-chip words from
//     ml_base, the low 160 bits of each being one tile's meta_t, written to
//     the tile hub's metadata array;
//   * tile load (when a stream pair claims a tile): the tile's topology block
//     at meta.topo_addr is read word by word and unpacked, sixteen 32-bit
//     entries per 512-bit word, into the pair's tile hub slot: first
//     ceil(num_edges/16) words of edge entries, then ceil(num_src/16) words
//     of global source ids, then ceil((num_dst+1)/16) words of destination
//     edge offsets;
//   * data-transfer micro-ops. A vertex or edge with global id g has its
//     embedding at off-chip word imm + g*kw. LD.SRC takes g from the slot's
//     source-id list (sparse tiling: only sources with edges in the tile are
//     loaded), LD.DST and ST.DST use g = gbase + i over the partition's
//     destinations, LD.EDGE uses g = gbase + i over the tile's edges. Row i
//     goes to / comes from UEM word d_addr (or a_addr for ST.DST) + i*kw.
//
// Off-chip port: valid/ready request (we, addr, 512-bit wdata); read
// responses return in order on rvalid/rdata. This controller keeps one read
// outstanding. The paper says the controller turns vertex and tile requests
// into off-chip transactions from the vertex id and embedding size; the
// layout, job priority and the single outstanding read are this design's.
module memory_controller
  import zipper_pkg::*;
#(
  parameter int unsigned SLOT_WORDS = 16384,
  parameter int unsigned MAX_TILES  = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  // data-transfer micro-ops
  input  logic            start,
  input  uop_t            uop_in,
  output logic            busy,
  output logic            done,
  output logic [SIDW-1:0] done_sid,
  // tile loads
  input  logic            tl_valid,
  input  logic [1:0]      tl_slot,
  input  meta_t           tl_meta,
  output logic            tl_ready,
  output logic            tl_done,
  output logic [1:0]      tl_done_slot,
  // metadata load
  input  logic            ml_valid,
  input  logic [OAW-1:0]  ml_base,
  input  logic [15:0]     ml_count,
  output logic            ml_ready,
  output logic            ml_done,
  // tile hub
  output logic            meta_we,
  output logic [$clog2(MAX_TILES)-1:0] meta_waddr,
  output meta_t           meta_wdata,
  output logic            t_valid,
  output logic            t_we,
  output logic [TAW-1:0]  t_addr,
  output logic [31:0]     t_wdata,
  input  logic            t_gnt,
  input  logic            t_rvalid,
  input  logic [31:0]     t_rdata,
  // UEM
  output logic            u_valid,
  output logic            u_we,
  output logic [UAW-1:0]  u_addr,
  output word_t           u_wdata,
  input  logic            u_gnt,
  input  logic            u_rvalid,
  input  word_t           u_rdata,
  // off-chip memory
  output logic            o_valid,
  output logic            o_we,
  output logic [OAW-1:0]  o_addr,
  output word_t           o_wdata,
  input  logic            o_ready,
  input  logic            o_rvalid,
  input  word_t           o_rdata
);
  typedef enum logic [3:0] {
    C_IDLE, C_META_RD, C_META_WT, C_TILE_RD, C_TILE_WT, C_TILE_WR,
    C_GID, C_ORD, C_OWT, C_UWR, C_URD, C_OWR, C_DONE
  } cstate_e;
  typedef enum logic [1:0] {J_META, J_TILE, J_UOP} job_e;

  cstate_e state;
  job_e    job;
  uop_t    uop;
  meta_t   tmeta;
  logic [1:0]  tslot;
  logic [OAW-1:0] mbase;
  logic [15:0] mcount;
  logic        pend;
  logic [15:0] i_cnt;
  logic [3:0]  w_cnt;
  logic [15:0] j_cnt;      // topology word
  logic [4:0]  m_cnt;      // entry within topology word
  logic [31:0] gid;
  word_t       buf_q;

  // topology block geometry
  logic [15:0] n_e, n_s, n_d, n_all;
  assign n_e   = (tmeta.num_edges + 16'd15) >> 4;
  assign n_s   = (tmeta.num_src + 16'd15) >> 4;
  assign n_d   = (tmeta.num_dst + 16'd16) >> 4;
  assign n_all = n_e + n_s + n_d;

  logic [TAW-1:0] slot_base, th_dst;
  assign slot_base = TAW'(32'(tslot) * SLOT_WORDS);
  always_comb begin
    if (j_cnt < n_e)              th_dst = slot_base + TAW'(TH_EDGE_OFF) + TAW'({j_cnt, 4'd0}) + TAW'(m_cnt);
    else if (j_cnt < n_e + n_s)   th_dst = slot_base + TAW'(TH_SRC_OFF) + TAW'({j_cnt - n_e, 4'd0}) + TAW'(m_cnt);
    else                          th_dst = slot_base + TAW'(TH_DOFF_OFF) + TAW'({j_cnt - n_e - n_s, 4'd0}) + TAW'(m_cnt);
  end

  logic [TAW-1:0] uop_slot_base;
  assign uop_slot_base = TAW'(32'(uop.slot) * SLOT_WORDS);

  logic [OAW-1:0] v_addr;   // off-chip word of (gid, w)
  assign v_addr = uop.imm + gid * OAW'(uop.kw) + OAW'(w_cnt);

  always_comb begin
    o_valid = 1'b0; o_we = 1'b0; o_addr = '0; o_wdata = '0;
    t_valid = 1'b0; t_we = 1'b0; t_addr = '0; t_wdata = '0;
    u_valid = 1'b0; u_we = 1'b0; u_addr = '0; u_wdata = '0;
    meta_we = 1'b0; meta_waddr = '0; meta_wdata = '0;
    case (state)
      C_META_RD: begin o_valid = 1'b1; o_addr = mbase + OAW'(i_cnt); end
      C_META_WT: begin
        meta_we    = o_rvalid;
        meta_waddr = i_cnt[$clog2(MAX_TILES)-1:0];
        meta_wdata = o_rdata[META_W-1:0];
      end
      C_TILE_RD: begin o_valid = 1'b1; o_addr = tmeta.topo_addr + OAW'(j_cnt); end
      C_TILE_WR: begin
        t_valid = 1'b1; t_we = 1'b1; t_addr = th_dst;
        t_wdata = buf_q[32*m_cnt[3:0] +: 32];
      end
      C_GID: begin
        t_valid = !pend;
        t_addr  = uop_slot_base + TAW'(TH_SRC_OFF) + TAW'(i_cnt);
      end
      C_ORD: begin o_valid = 1'b1; o_addr = v_addr; end
      C_UWR: begin
        u_valid = 1'b1; u_we = 1'b1;
        u_addr  = uop.d_addr + UAW'(i_cnt) * UAW'(uop.kw) + UAW'(w_cnt);
        u_wdata = buf_q;
      end
      C_URD: begin
        u_valid = !pend;
        u_addr  = uop.a_addr + UAW'(i_cnt) * UAW'(uop.kw) + UAW'(w_cnt);
      end
      C_OWR: begin o_valid = 1'b1; o_we = 1'b1; o_addr = v_addr; o_wdata = buf_q; end
      default: ;
    endcase
  end

  assign busy     = (state != C_IDLE) || ml_valid || tl_valid;   // micro-op start accepted only when 0
  assign ml_ready = (state == C_IDLE);
  assign tl_ready = (state == C_IDLE) && !ml_valid;

  // next (row, word) step of a data-transfer micro-op
  logic last_w, last_i;
  assign last_w = (w_cnt == uop.kw - 1'b1);
  assign last_i = (i_cnt == uop.rows - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; job <= J_UOP; uop <= '0; tmeta <= '0; tslot <= '0;
      mbase <= '0; mcount <= '0; pend <= 1'b0; i_cnt <= '0; w_cnt <= '0;
      j_cnt <= '0; m_cnt <= '0; gid <= '0; buf_q <= '0;
      done <= 1'b0; done_sid <= '0; tl_done <= 1'b0; tl_done_slot <= '0; ml_done <= 1'b0;
    end else begin
      done <= 1'b0; tl_done <= 1'b0; ml_done <= 1'b0;
      case (state)
        C_IDLE: begin
          i_cnt <= '0; w_cnt <= '0; j_cnt <= '0; m_cnt <= '0; pend <= 1'b0;
          if (ml_valid) begin
            job <= J_META; mbase <= ml_base; mcount <= ml_count;
            state <= (ml_count == 0) ? C_DONE : C_META_RD;
          end else if (tl_valid) begin
            job <= J_TILE; tmeta <= tl_meta; tslot <= tl_slot;
            state <= C_TILE_RD;
          end else if (start) begin
            job <= J_UOP; uop <= uop_in;
            if (uop_in.rows == 0 || uop_in.kw == 0) state <= C_DONE;
            else if (uop_in.op == OP_LD_SRC) state <= C_GID;
            else if (uop_in.op == OP_ST_DST) begin
              gid <= uop_in.gbase; state <= C_URD;
            end else begin
              gid <= uop_in.gbase; state <= C_ORD;
            end
          end
        end
        // ---------------- metadata load
        C_META_RD: if (o_ready) state <= C_META_WT;
        C_META_WT: if (o_rvalid) begin
          if (i_cnt == mcount - 1'b1) state <= C_DONE;
          else begin
            i_cnt <= i_cnt + 1'b1;
            state <= C_META_RD;
          end
        end
        // ---------------- tile load
        C_TILE_RD: if (o_ready) state <= C_TILE_WT;
        C_TILE_WT: if (o_rvalid) begin
          buf_q <= o_rdata;
          m_cnt <= '0;
          state <= C_TILE_WR;
        end
        C_TILE_WR: if (t_gnt) begin
          if (m_cnt == 5'd15) begin
            if (j_cnt == n_all - 1'b1) state <= C_DONE;
            else begin
              j_cnt <= j_cnt + 1'b1;
              state <= C_TILE_RD;
            end
          end else m_cnt <= m_cnt + 1'b1;
        end
        // ---------------- loads into the UEM
        C_GID: begin
          if (t_valid && t_gnt) pend <= 1'b1;
          if (t_rvalid) begin
            pend  <= 1'b0;
            gid   <= t_rdata;
            state <= C_ORD;
          end
        end
        C_ORD: if (o_ready) state <= C_OWT;
        C_OWT: if (o_rvalid) begin
          buf_q <= o_rdata;
          state <= C_UWR;
        end
        C_UWR: if (u_gnt) begin
          if (!last_w) begin
            w_cnt <= w_cnt + 1'b1;
            state <= C_ORD;
          end else if (last_i) state <= C_DONE;
          else begin
            w_cnt <= '0;
            i_cnt <= i_cnt + 1'b1;
            if (uop.op == OP_LD_SRC) state <= C_GID;
            else begin
              gid   <= gid + 1'b1;
              state <= C_ORD;
            end
          end
        end
        // ---------------- store from the UEM
        C_URD: begin
          if (u_valid && u_gnt) pend <= 1'b1;
          if (u_rvalid) begin
            pend  <= 1'b0;
            buf_q <= u_rdata;
            state <= C_OWR;
          end
        end
        C_OWR: if (o_ready) begin
          if (!last_w) begin
            w_cnt <= w_cnt + 1'b1;
            state <= C_URD;
          end else if (last_i) state <= C_DONE;
          else begin
            w_cnt <= '0;
            i_cnt <= i_cnt + 1'b1;
            gid   <= gid + 1'b1;
            state <= C_URD;
          end
        end
        C_DONE: begin
          case (job)
            J_META: ml_done <= 1'b1;
            J_TILE: begin tl_done <= 1'b1; tl_done_slot <= tslot; end
            default: begin done <= 1'b1; done_sid <= uop.sid; end
          endcase
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
