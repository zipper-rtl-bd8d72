// vector_unit: a Vector Unit (VU) of NCORES 32-lane SIMD cores that execute
// one ELW or GOP micro-op together.
//
// On start the micro-op is latched and its rows (vertices or edges of the
// tile, or destination vertices of the partition) are handed out in order:
// every cycle each idle core takes the next row index. When all rows have
// been handed out and every core is idle again the unit pulses done for one
// cycle and drops busy. Each core has its own port into the UEM and the
// tile hub, so the cores only wait for each other on bank conflicts.
//
// Interface: start/uop (accepted when busy = 0), busy, done; per-core
// memory ports as arrays. Timing: one cycle from start to the first row
// hand-out; done one cycle after the last core goes idle.
//
// From the paper: a VU is a group of SIMD cores for ELW and GOP; 8 cores of
// 32 lanes. Row hand-out is this design's choice.
module vector_unit
  import zipper_pkg::*;
#(
  parameter int unsigned NCORES     = 8,
  parameter int unsigned SLOT_WORDS = 16384
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  uop_t              uop_in,
  output logic              busy,
  output logic              done,
  output logic [SIDW-1:0]   done_sid,
  output logic [NCORES-1:0] u_valid,
  output logic [NCORES-1:0] u_we,
  output logic [UAW-1:0]    u_addr  [NCORES],
  output word_t             u_wdata [NCORES],
  input  logic [NCORES-1:0] u_gnt,
  input  logic [NCORES-1:0] u_rvalid,
  input  word_t             u_rdata [NCORES],
  output logic [NCORES-1:0] t_valid,
  output logic [TAW-1:0]    t_addr  [NCORES],
  input  logic [NCORES-1:0] t_gnt,
  input  logic [NCORES-1:0] t_rvalid,
  input  logic [31:0]       t_rdata [NCORES]
);
  uop_t        uop;
  logic [15:0] next_row;
  logic [NCORES-1:0] c_ready, c_task;
  logic [15:0] c_row [NCORES];
  logic [15:0] handed;

  // give the next rows to the idle cores, lowest core first
  always_comb begin
    handed = '0;
    for (int c = 0; c < NCORES; c++) begin
      c_task[c] = 1'b0;
      c_row[c]  = next_row + handed;
      if (busy && c_ready[c] && (next_row + handed < uop.rows)) begin
        c_task[c] = 1'b1;
        handed    = handed + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; done_sid <= '0; next_row <= '0; uop <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          uop      <= uop_in;
          next_row <= '0;
          busy     <= 1'b1;
        end
      end else begin
        next_row <= next_row + handed;
        if (next_row >= uop.rows && &c_ready) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          done_sid <= uop.sid;
        end
      end
    end
  end

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    simd_core #(.SLOT_WORDS(SLOT_WORDS)) u_core (
      .clk, .rst_n, .uop,
      .task_valid(c_task[c]), .task_row(c_row[c]), .task_ready(c_ready[c]),
      .u_valid(u_valid[c]), .u_we(u_we[c]), .u_addr(u_addr[c]), .u_wdata(u_wdata[c]),
      .u_gnt(u_gnt[c]), .u_rvalid(u_rvalid[c]), .u_rdata(u_rdata[c]),
      .t_valid(t_valid[c]), .t_addr(t_addr[c]),
      .t_gnt(t_gnt[c]), .t_rvalid(t_rvalid[c]), .t_rdata(t_rdata[c])
    );
  end

endmodule
