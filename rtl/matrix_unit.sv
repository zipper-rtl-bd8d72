// matrix_unit: the Matrix Unit (MU), a ROWS x COLS output-stationary
// systolic array with a weight buffer, executing GEMM micro-ops.
//
// A GEMM micro-op computes D[r][n] = sum_k A[r][k] * W[k][n] for r < rows,
// k < 32*kw, n < 32*nw (nw <= COLS/32), in Q8.8: the 32-bit accumulators are
// shifted right by 8 and saturated to 16 bits on write-back. Operand rows
// live in the UEM at a_addr + r*kw, weight row k at b_addr + k*nw, and
// result rows are written to d_addr + r*nw.
//
// How it works, per micro-op:
//   1. the weights are read from the UEM into the weight buffer, unless the
//      buffer already holds the same weight block (same b_addr, kw, nw) from
//      the previous GEMM: software must not overwrite weights in the UEM
//      between two GEMMs that use them without a different GEMM between;
//   2. for each block of ROWS rows: the block of A is read into the input
//      buffer, the accumulators are cleared, and for K + ROWS + COLS - 2
//      cycles row i of the array is fed A[i][t-i] from the left while column
//      j is fed W[t-j][j] from the top, so PE (i,j) sees the pair
//      (A[i][k], W[k][j]) at cycle k+i+j and keeps the sum in place (output
//      stationary); 3. the block's results are written back word by word.
// Memory access uses one UEM port, one word outstanding at a time (two
// cycles per word read without contention, one per word written).
//
// From the paper: one 32x128 systolic array with a weight buffer, output
// stationary, inputs and weights fed at the same time. This design's
// choices: the staging buffers, number format and the block sequence. The
// index-guided batched multiplication (BMM) is not implemented.
module matrix_unit
  import zipper_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 128,
  parameter int unsigned KMAX = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  uop_t            uop_in,
  output logic            busy,
  output logic            done,
  output logic [SIDW-1:0] done_sid,
  output logic            u_valid,
  output logic            u_we,
  output logic [UAW-1:0]  u_addr,
  output word_t           u_wdata,
  input  logic            u_gnt,
  input  logic            u_rvalid,
  input  word_t           u_rdata
);
  localparam int unsigned NWMAX = COLS / LANES;

  typedef enum logic [2:0] {M_IDLE, M_LDW, M_LDA, M_RUN, M_WR, M_DONE} mstate_e;
  mstate_e state;

  uop_t        uop;
  logic        pend;
  logic [15:0] r0;         // first row of the current block
  logic [15:0] i_cnt;      // row within block / weight row
  logic [3:0]  j_cnt;      // word within row
  logic [15:0] t;          // run cycle
  logic        w_valid;    // weight buffer holds the weights at w_addr
  logic [UAW-1:0] w_addr;
  logic [3:0]  w_kw, w_nw;

  logic signed [EW-1:0] wbuf [KMAX][COLS];
  logic signed [EW-1:0] abuf [ROWS][KMAX];

  logic [15:0] kdim;
  assign kdim = 16'(uop.kw) * 16'(LANES);

  logic [15:0] blk_rows;   // rows in the current block
  always_comb begin
    blk_rows = uop.rows - r0;
    if (blk_rows > 16'(ROWS)) blk_rows = 16'(ROWS);
  end

  // ---------------------------------------------------------------- array
  logic signed [EW-1:0] a_h [ROWS][COLS+1];
  logic signed [EW-1:0] b_v [ROWS+1][COLS];
  logic signed [31:0]   acc [ROWS][COLS];
  logic run_en, clr;

  assign run_en = (state == M_RUN);
  assign clr    = (state == M_LDA) && (i_cnt == 0) && (j_cnt == 0) && !pend;

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      logic [15:0] k;
      k = t - 16'(i);
      a_h[i][0] = (t >= 16'(i) && k < kdim) ? abuf[i][k[$clog2(KMAX)-1:0]] : '0;
    end
    for (int j = 0; j < COLS; j++) begin
      logic [15:0] k;
      k = t - 16'(j);
      b_v[0][j] = (t >= 16'(j) && k < kdim) ? wbuf[k[$clog2(KMAX)-1:0]][j] : '0;
    end
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_r
    for (genvar j = 0; j < COLS; j++) begin : g_c
      systolic_pe u_pe (
        .clk, .rst_n, .en(run_en), .clr,
        .a_in(a_h[i][j]), .b_in(b_v[i][j]),
        .a_out(a_h[i][j+1]), .b_out(b_v[i+1][j]), .acc(acc[i][j])
      );
    end
  end

  // ---------------------------------------------------------------- memory
  always_comb begin
    u_valid = 1'b0; u_we = 1'b0; u_addr = '0; u_wdata = '0;
    case (state)
      M_LDW: begin
        u_valid = !pend;
        u_addr  = uop.b_addr + UAW'(i_cnt) * UAW'(uop.nw) + UAW'(j_cnt);
      end
      M_LDA: begin
        u_valid = !pend;
        u_addr  = uop.a_addr + UAW'(r0 + i_cnt) * UAW'(uop.kw) + UAW'(j_cnt);
      end
      M_WR: begin
        u_valid = 1'b1;
        u_we    = 1'b1;
        u_addr  = uop.d_addr + UAW'(r0 + i_cnt) * UAW'(uop.nw) + UAW'(j_cnt);
        for (int l = 0; l < LANES; l++)
          u_wdata[l*EW +: EW] = sat16(48'(acc[i_cnt[$clog2(ROWS)-1:0]]
                                            [32'(j_cnt) * LANES + 32'(l)]) >>> 8);
      end
      default: ;
    endcase
  end

  assign busy = (state != M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE; pend <= 1'b0; r0 <= '0; i_cnt <= '0; j_cnt <= '0; t <= '0;
      uop <= '0; done <= 1'b0; done_sid <= '0;
      w_valid <= 1'b0; w_addr <= '0; w_kw <= '0; w_nw <= '0;
    end else begin
      done <= 1'b0;
      if (u_valid && u_gnt && !u_we) pend <= 1'b1;
      case (state)
        M_IDLE: if (start) begin
          uop   <= uop_in;
          r0    <= '0;
          i_cnt <= '0;
          j_cnt <= '0;
          if (uop_in.rows == 0) state <= M_DONE;
          else if (w_valid && w_addr == uop_in.b_addr && w_kw == uop_in.kw && w_nw == uop_in.nw)
            state <= M_LDA;          // weight buffer reuse
          else begin
            w_valid <= 1'b0;
            state   <= M_LDW;
          end
        end
        M_LDW: if (u_rvalid) begin
          pend <= 1'b0;
          for (int l = 0; l < LANES; l++)
            wbuf[i_cnt[$clog2(KMAX)-1:0]][32'(j_cnt) * LANES + 32'(l)] <= u_rdata[l*EW +: EW];
          if (j_cnt == uop.nw - 1'b1) begin
            j_cnt <= '0;
            if (i_cnt == kdim - 1'b1) begin
              i_cnt   <= '0;
              w_valid <= 1'b1;
              w_addr  <= uop.b_addr;
              w_kw    <= uop.kw;
              w_nw    <= uop.nw;
              state   <= M_LDA;
            end else i_cnt <= i_cnt + 1'b1;
          end else j_cnt <= j_cnt + 1'b1;
        end
        M_LDA: if (u_rvalid) begin
          pend <= 1'b0;
          for (int l = 0; l < LANES; l++)
            abuf[i_cnt[$clog2(ROWS)-1:0]][32'(j_cnt) * LANES + 32'(l)] <= u_rdata[l*EW +: EW];
          if (j_cnt == uop.kw - 1'b1) begin
            j_cnt <= '0;
            if (i_cnt == blk_rows - 1'b1) begin
              i_cnt <= '0;
              t     <= '0;
              state <= M_RUN;
            end else i_cnt <= i_cnt + 1'b1;
          end else j_cnt <= j_cnt + 1'b1;
        end
        M_RUN: begin
          t <= t + 1'b1;
          if (t == kdim + 16'(ROWS) + 16'(COLS) - 16'd2) state <= M_WR;
        end
        M_WR: if (u_gnt) begin
          if (j_cnt == uop.nw - 1'b1) begin
            j_cnt <= '0;
            if (i_cnt == blk_rows - 1'b1) begin
              i_cnt <= '0;
              if (r0 + 16'(ROWS) >= uop.rows) state <= M_DONE;
              else begin
                r0    <= r0 + 16'(ROWS);
                state <= M_LDA;
              end
            end else i_cnt <= i_cnt + 1'b1;
          end else j_cnt <= j_cnt + 1'b1;
        end
        M_DONE: begin
          done     <= 1'b1;
          done_sid <= uop.sid;
          state    <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // rows of A beyond the block's last row must not contribute: the input
  // buffer rows of a short block still hold old data, but their results are
  // never written back, and each output row depends only on its own A row.
  initial assert (NWMAX * LANES == COLS);

endmodule
