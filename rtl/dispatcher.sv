// dispatcher: the second scheduling level. It receives resolved micro-ops
// from the scheduler into an instruction queue of QDEPTH entries (the
// maximum number of streams, so the queue never blocks a stream that has an
// instruction to issue), keeps its own busy flag for every execution unit,
// and each cycle issues at most one queued micro-op:
//   * computational ones (GEMM -> matrix unit; ELW/GOP -> a free vector
//     unit, lowest index first) once a target unit is free,
//   * data-transfer ones to the memory controller,
//   * synchronization ones back to the scheduler (sync_valid/sync_uop).
// The oldest queued micro-op that can go is chosen. A unit's done pulse
// clears its busy flag and is forwarded to the scheduler as a per-stream
// completion bit (cmpl). Only one gather (GTHR.*) is in flight at a time, so
// two vector units never read-modify-write the same destination embedding.
//
// Timing: a micro-op accepted in cycle n can be issued in cycle n+1; a unit
// can take a new micro-op in the cycle after its done pulse.
//
// From the paper: decode and issue, unit bookkeeping, a queue sized to the
// stream count, waiting while all target units are busy. This design's
// choices: oldest-ready selection and the single in-flight gather.
module dispatcher
  import zipper_pkg::*;
#(
  parameter int unsigned QDEPTH   = 9,
  parameter int unsigned NVU      = 2,
  parameter int unsigned NSTREAMS = 9
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  uop_t                in_uop,
  output logic                in_ready,
  // units
  output uop_t                iss_uop,
  output logic                mu_start,
  input  logic                mu_done,
  input  logic [SIDW-1:0]     mu_done_sid,
  output logic [NVU-1:0]      vu_start,
  input  logic [NVU-1:0]      vu_done,
  input  logic [SIDW-1:0]     vu_done_sid [NVU],
  output logic                mc_start,
  input  logic                mc_busy,
  input  logic                mc_done,
  input  logic [SIDW-1:0]     mc_done_sid,
  // scheduler
  output logic                sync_valid,
  output uop_t                sync_uop,
  input  logic                sync_ready,
  output logic [NSTREAMS-1:0] cmpl
);
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  uop_t          q   [QDEPTH];
  logic [CW-1:0] cnt;
  logic          mu_busy_q, mc_busy_q, gthr_q;
  logic [NVU-1:0] vu_busy_q;
  logic [$clog2(NVU > 1 ? NVU : 2)-1:0] gthr_vu_q;

  // ------------------------------------------------------------ selection
  logic          sel_v;
  logic [CW-1:0] sel_k;
  logic [$clog2(NVU > 1 ? NVU : 2)-1:0] sel_vu;
  logic          vu_free;
  logic [$clog2(NVU > 1 ? NVU : 2)-1:0] free_vu;

  always_comb begin
    vu_free = 1'b0;
    free_vu = '0;
    for (int v = NVU - 1; v >= 0; v--)
      if (!vu_busy_q[v]) begin
        vu_free = 1'b1;
        free_vu = $bits(free_vu)'(v);
      end
  end

  function automatic logic is_gthr(opcode_e op);
    return (op == OP_GTHR_SUM) || (op == OP_GTHR_MAX);
  endfunction

  always_comb begin
    sel_v  = 1'b0;
    sel_k  = '0;
    sel_vu = free_vu;
    for (int k = 0; k < QDEPTH; k++) begin
      if (!sel_v && CW'(k) < cnt) begin
        logic ok;
        case (op_class(q[k].op))
          UC_MU:   ok = !mu_busy_q;
          UC_VU:   ok = vu_free && !(is_gthr(q[k].op) && gthr_q);
          UC_MC:   ok = !mc_busy_q && !mc_busy;
          default: ok = sync_ready;
        endcase
        if (ok) begin
          sel_v = 1'b1;
          sel_k = CW'(k);
        end
      end
    end
  end

  uclass_e sel_class;
  assign sel_class = op_class(q[sel_k[$clog2(QDEPTH)-1:0]].op);
  assign iss_uop   = q[sel_k[$clog2(QDEPTH)-1:0]];

  assign mu_start   = sel_v && (sel_class == UC_MU);
  assign mc_start   = sel_v && (sel_class == UC_MC);
  assign sync_valid = sel_v && (sel_class == UC_SYNC);
  assign sync_uop   = iss_uop;
  always_comb begin
    vu_start = '0;
    if (sel_v && sel_class == UC_VU) vu_start[sel_vu] = 1'b1;
  end

  assign in_ready = (cnt < CW'(QDEPTH)) || sel_v;

  // ------------------------------------------------------------ completions
  always_comb begin
    cmpl = '0;
    if (mu_done) cmpl[mu_done_sid] = 1'b1;
    if (mc_done) cmpl[mc_done_sid] = 1'b1;
    for (int v = 0; v < NVU; v++)
      if (vu_done[v]) cmpl[vu_done_sid[v]] = 1'b1;
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; mu_busy_q <= 1'b0; mc_busy_q <= 1'b0; vu_busy_q <= '0;
      gthr_q <= 1'b0; gthr_vu_q <= '0;
      for (int k = 0; k < QDEPTH; k++) q[k] <= '0;
    end else begin
      // queue: remove the issued entry (compacting), then append
      begin
        logic [CW-1:0] n;
        n = cnt;
        if (sel_v) begin
          for (int k = 0; k < QDEPTH - 1; k++)
            if (CW'(k) >= sel_k) q[k] <= q[k+1];
          n = n - 1'b1;
        end
        if (in_valid && in_ready) begin
          q[n[$clog2(QDEPTH)-1:0]] <= in_uop;
          n = n + 1'b1;
        end
        cnt <= n;
      end
      // unit bookkeeping
      if (mu_done)  mu_busy_q <= 1'b0;
      if (mu_start) mu_busy_q <= 1'b1;
      if (mc_done)  mc_busy_q <= 1'b0;
      if (mc_start) mc_busy_q <= 1'b1;
      for (int v = 0; v < NVU; v++) begin
        if (vu_done[v]) begin
          vu_busy_q[v] <= 1'b0;
          if (gthr_q && gthr_vu_q == $bits(gthr_vu_q)'(v)) gthr_q <= 1'b0;
        end
        if (vu_start[v]) begin
          vu_busy_q[v] <= 1'b1;
          if (is_gthr(iss_uop.op)) begin
            gthr_q    <= 1'b1;
            gthr_vu_q <= $bits(gthr_vu_q)'(v);
          end
        end
      end
    end
  end

  // a unit never reports done while the dispatcher thinks it is idle
  a_mu_done_busy: assert property (@(posedge clk) disable iff (!rst_n) mu_done |-> mu_busy_q)
    else $error("MU done while idle");
  a_issue_one: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({mu_start, mc_start, sync_valid, vu_start}));

endmodule
