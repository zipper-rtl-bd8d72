// simd_core: one 32-lane SIMD core of a Vector Unit.
//
// The core takes one row task at a time (a row index handed out by its
// vector_unit) and runs the current micro-op on that row, word by word
// (one word = 32 Q8.8 lanes):
//   ELW  ADD SUB MUL DIV : D[r] = A[r] op B   (B per row, shared, or a
//                           per-row scalar in lane 0, selected by bmode)
//   ELW  EXP RELU        : D[r] = f(A[r])
//   ELW  GEMV            : D[r] (one word, all lanes) = dot(A[r], B)
//   GOP  SCTR.OUTE / INE : row = edge e; D[e] = A[src_local(e)] or
//                           A[dst_local(e)], from the tile hub edge entry
//   GOP  GTHR.DST.SUM/MAX: row = destination vertex v; D[v] = D[v] reduced
//                           with A[e] for the edges e of v (edge offsets from
//                           the tile hub), so the tiles of a partition
//                           accumulate into the same destination embedding.
// Row r of an operand lives at base + r*kw words (GEMV output and scalar B
// operands: base + r).
//
// Timing: every access is a single-word request to the UEM or tile hub that
// is held until granted; a read returns one cycle after its grant. An ELW
// row costs about 2-3 accesses per word plus the write; there is no
// pipelining inside a core, parallelism comes from the 8 cores of a VU.
//
// From the paper: SIMD cores run ELW and GOP, one vertex (or edge) of the
// tile per core at a time, using the tile edge list. This design's choices:
// Q8.8 arithmetic with saturation, EXP as 2^(1.4427x) with a linear
// fraction, DIV by zero saturating, scatter iterating per edge.
module simd_core
  import zipper_pkg::*;
#(
  parameter int unsigned SLOT_WORDS = 16384
) (
  input  logic              clk,
  input  logic              rst_n,
  input  uop_t              uop,
  input  logic              task_valid,
  input  logic [15:0]       task_row,
  output logic              task_ready,
  // UEM port
  output logic              u_valid,
  output logic              u_we,
  output logic [UAW-1:0]    u_addr,
  output word_t             u_wdata,
  input  logic              u_gnt,
  input  logic              u_rvalid,
  input  word_t             u_rdata,
  // tile hub port (read only)
  output logic              t_valid,
  output logic [TAW-1:0]    t_addr,
  input  logic              t_gnt,
  input  logic              t_rvalid,
  input  logic [31:0]       t_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_TH_LO, S_TH_HI, S_RDD, S_RDA, S_RDB, S_WR} state_e;
  state_e state;
  logic        pend;
  logic [15:0] row, idx, e, hi;
  logic [3:0]  w;
  word_t       ra, res, accv;
  logic signed [47:0] gacc;
  logic [15:0] idx_lo_q;   // first edge of the destination being gathered

  // ---------------------------------------------------------------- lanes
  function automatic logic signed [EW-1:0] exp_q88(logic signed [EW-1:0] x);
    logic signed [31:0] t;
    logic signed [31:0] ip;
    logic [31:0] v;
    t  = (32'(x) * 32'sd369) >>> 8;          // x * log2(e) in Q8.8
    ip = t >>> 8;
    v  = 32'd256 + 32'(t[7:0]);              // 1.frac in Q8.8
    if (ip >= 32'sd7)  return 16'sh7fff;
    if (ip <= -32'sd9) return 16'sh0000;
    if (ip >= 0) return EW'(v << ip);
    return EW'(v >> (-ip));
  endfunction

  function automatic logic signed [EW-1:0] lane_op(opcode_e op, logic signed [EW-1:0] a,
                                                   logic signed [EW-1:0] b);
    logic signed [47:0] q;
    case (op)
      OP_ADD:  return sat16(48'(a) + 48'(b));
      OP_SUB:  return sat16(48'(a) - 48'(b));
      OP_MUL:  return sat16((48'(a) * 48'(b)) >>> 8);
      OP_DIV: begin
        if (b == 0) return (a < 0) ? 16'sh8000 : 16'sh7fff;
        q = (48'(a) <<< 8) / 48'(b);
        return sat16(q);
      end
      OP_EXP:  return exp_q88(a);
      OP_RELU: return (a < 0) ? 16'sh0000 : a;
      OP_GTHR_MAX: return (a > b) ? a : b;
      default: return sat16(48'(a) + 48'(b));   // GTHR.DST.SUM
    endcase
  endfunction

  function automatic word_t word_op(opcode_e op, word_t a, word_t b);
    word_t r;
    for (int l = 0; l < LANES; l++)
      r[l*EW +: EW] = lane_op(op, a[l*EW +: EW], b[l*EW +: EW]);
    return r;
  endfunction

  function automatic logic signed [47:0] dot(word_t a, word_t b);
    logic signed [47:0] s;
    s = '0;
    for (int l = 0; l < LANES; l++)
      s = s + 48'($signed(a[l*EW +: EW]) * $signed(b[l*EW +: EW]));
    return s;
  endfunction

  // ---------------------------------------------------------------- decode
  logic is_sctr, is_gthr, is_gemv, needs_b;
  assign is_sctr = (uop.op == OP_SCTR_OUTE) || (uop.op == OP_SCTR_INE);
  assign is_gthr = (uop.op == OP_GTHR_SUM) || (uop.op == OP_GTHR_MAX);
  assign is_gemv = (uop.op == OP_GEMV);
  assign needs_b = (uop.op == OP_ADD) || (uop.op == OP_SUB) || (uop.op == OP_MUL) ||
                   (uop.op == OP_DIV) || is_gemv;

  logic [TAW-1:0] slot_base;
  assign slot_base = TAW'(32'(uop.slot) * SLOT_WORDS);

  word_t b_bcast;      // scalar B broadcast to all lanes
  always_comb
    for (int l = 0; l < LANES; l++) b_bcast[l*EW +: EW] = u_rdata[EW-1:0];

  logic [15:0] a_row;
  assign a_row = is_sctr ? idx : (is_gthr ? e : row);

  always_comb begin
    u_valid = 1'b0; u_we = 1'b0; u_addr = '0; u_wdata = '0;
    t_valid = 1'b0; t_addr = '0;
    case (state)
      S_TH_LO: begin
        t_valid = !pend;
        t_addr  = is_sctr ? slot_base + TAW'(TH_EDGE_OFF) + TAW'(row)
                          : slot_base + TAW'(TH_DOFF_OFF) + TAW'(row);
      end
      S_TH_HI: begin
        t_valid = !pend;
        t_addr  = slot_base + TAW'(TH_DOFF_OFF) + TAW'(row) + 1'b1;
      end
      S_RDD: begin
        u_valid = !pend;
        u_addr  = uop.d_addr + UAW'(row) * UAW'(uop.kw) + UAW'(w);
      end
      S_RDA: begin
        u_valid = !pend;
        u_addr  = uop.a_addr + UAW'(a_row) * UAW'(uop.kw) + UAW'(w);
      end
      S_RDB: begin
        u_valid = !pend;
        case (uop.bmode)
          B_SHARED: u_addr = uop.b_addr + UAW'(w);
          B_SCALAR: u_addr = uop.b_addr + UAW'(row);
          default:  u_addr = is_gemv ? uop.b_addr + UAW'(w)
                                     : uop.b_addr + UAW'(row) * UAW'(uop.kw) + UAW'(w);
        endcase
      end
      S_WR: begin
        u_valid = 1'b1;
        u_we    = 1'b1;
        if (is_gemv) begin
          u_addr = uop.d_addr + UAW'(row);
          for (int l = 0; l < LANES; l++) u_wdata[l*EW +: EW] = sat16(gacc >>> 8);
        end else begin
          u_addr  = uop.d_addr + UAW'(row) * UAW'(uop.kw) + UAW'(w);
          u_wdata = is_gthr ? accv : res;
        end
      end
      default: ;
    endcase
  end

  assign task_ready = (state == S_IDLE);

  logic last_w;
  assign last_w = (w == uop.kw - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pend <= 1'b0; row <= '0; idx <= '0; e <= '0; hi <= '0;
      w <= '0; ra <= '0; res <= '0; accv <= '0; gacc <= '0; idx_lo_q <= '0;
    end else begin
      // request accepted -> wait for read data
      if ((t_valid && t_gnt) || (u_valid && u_gnt && !u_we)) pend <= 1'b1;
      case (state)
        S_IDLE: if (task_valid) begin
          row  <= task_row;
          w    <= '0;
          gacc <= '0;
          state <= (is_sctr || is_gthr) ? S_TH_LO : S_RDA;
        end
        S_TH_LO: if (t_rvalid) begin
          pend <= 1'b0;
          if (is_sctr) begin
            idx   <= (uop.op == OP_SCTR_OUTE) ? t_rdata[15:0] : t_rdata[31:16];
            state <= S_RDA;
          end else begin
            e        <= t_rdata[15:0];
            idx_lo_q <= t_rdata[15:0];
            state    <= S_TH_HI;
          end
        end
        S_TH_HI: if (t_rvalid) begin
          pend  <= 1'b0;
          hi    <= t_rdata[15:0];
          state <= S_RDD;
        end
        S_RDD: if (u_rvalid) begin
          pend  <= 1'b0;
          accv  <= u_rdata;
          state <= (e < hi) ? S_RDA : S_WR;
        end
        S_RDA: if (u_rvalid) begin
          pend <= 1'b0;
          if (is_gthr) begin
            accv  <= word_op(uop.op, u_rdata, accv);
            e     <= e + 1'b1;
            state <= (e + 1'b1 < hi) ? S_RDA : S_WR;
          end else if (is_sctr) begin
            res   <= u_rdata;
            state <= S_WR;
          end else if (needs_b) begin
            ra    <= u_rdata;
            state <= S_RDB;
          end else begin
            res   <= word_op(uop.op, u_rdata, '0);
            state <= S_WR;
          end
        end
        S_RDB: if (u_rvalid) begin
          pend <= 1'b0;
          if (is_gemv) begin
            gacc <= gacc + dot(ra, u_rdata);
            if (last_w) state <= S_WR;
            else begin
              w     <= w + 1'b1;
              state <= S_RDA;
            end
          end else begin
            res   <= word_op(uop.op, ra, (uop.bmode == B_SCALAR) ? b_bcast : u_rdata);
            state <= S_WR;
          end
        end
        S_WR: if (u_gnt) begin
          if (is_gemv || last_w) state <= S_IDLE;
          else begin
            w <= w + 1'b1;
            if (is_gthr) begin
              e     <= idx_lo_q;
              state <= S_RDD;
            end else state <= S_RDA;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end


endmodule
