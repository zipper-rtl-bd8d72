// tb_dispatcher: the dispatcher with behavioural units of random latency.
// Checks: every micro-op is issued exactly once; a unit never gets a second
// job before it finished the first; at most one gather is in flight; ops of
// one class (matrix, memory, synchronisation) leave in arrival order; a later op overtakes an op whose unit is
// busy; the queue refuses input when it is full and nothing can issue; and
// unit completions reach the right stream bit of cmpl.
module tb_dispatcher;
  import zipper_pkg::*;
  localparam int Q = 9, NVU = 2, NS = 9, N = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, mu_start, mu_done, mc_start, mc_busy, mc_done, sync_valid, sync_ready;
  uop_t in_uop, iss_uop, sync_uop;
  logic [NVU-1:0] vu_start, vu_done;
  logic [SIDW-1:0] mu_done_sid, mc_done_sid, vu_done_sid [NVU];
  logic [NS-1:0] cmpl;

  dispatcher #(.QDEPTH(Q), .NVU(NVU), .NSTREAMS(NS)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s @%0t", what, $time); end
  endtask

  // ---------------------------------------------------------------- units
  int mu_t = 0, mc_t = 0, vu_t [NVU] = '{0, 0};
  logic [SIDW-1:0] mu_s, mc_s, vu_s [NVU];
  logic vu_g [NVU];
  bit hold_mu = 0;
  int issued [N];
  int last_tag [4] = '{-1, -1, -1, -1};
  int n_iss = 0, gthr_inflight = 0, max_gthr = 0, overtakes = 0;
  int sync_seen = 0;
  always_comb begin
    mu_done = mu_t == 1; mu_done_sid = mu_s;
    mc_done = mc_t == 1; mc_done_sid = mc_s; mc_busy = 1'b0;
    for (int v = 0; v < NVU; v++) begin vu_done[v] = vu_t[v] == 1; vu_done_sid[v] = vu_s[v]; end
  end
  always @(posedge clk) if (rst_n) begin
    int tag, mu_n, mc_n, vu_n [NVU];
    logic [SIDW-1:0] mu_sn, mc_sn, vu_sn [NVU];
    tag = int'(iss_uop.imm);
    mu_n = mu_t; mc_n = mc_t; vu_n = vu_t; mu_sn = mu_s; mc_sn = mc_s; vu_sn = vu_s;
    // completions
    if (mu_n > 0 && !(hold_mu && mu_n == 2)) mu_n--;
    if (mc_n > 0) mc_n--;
    for (int v = 0; v < NVU; v++) if (vu_n[v] > 0) begin
      if (vu_n[v] == 1 && vu_g[v]) gthr_inflight--;
      vu_n[v]--;
    end
    if (mu_start || mc_start || sync_valid || |vu_start) begin
      uclass_e c;
      c = op_class(iss_uop.op);
      n_iss++;
      if (tag >= 0 && tag < N) issued[tag]++;
      if (c != UC_VU && last_tag[c] > tag) begin failures++; $display("FAIL: class order"); end
      checks++;
      last_tag[c] = tag;
      if (mu_start) begin check(mu_n == 0, "MU double issue"); mu_n = 2 + $urandom % 20; mu_sn = iss_uop.sid; end
      if (mc_start) begin check(mc_n == 0, "MC double issue"); mc_n = 2 + $urandom % 12; mc_sn = iss_uop.sid; end
      if (sync_valid) begin check(sync_ready, "sync without ready"); sync_seen++; end
      for (int v = 0; v < NVU; v++) if (vu_start[v]) begin
        check(vu_n[v] == 0, "VU double issue");
        vu_n[v] = 2 + $urandom % 16; vu_sn[v] = iss_uop.sid;
        vu_g[v] = iss_uop.op inside {OP_GTHR_SUM, OP_GTHR_MAX};
        if (vu_g[v]) gthr_inflight++;
        if (gthr_inflight > max_gthr) max_gthr = gthr_inflight;
      end
    end
    mu_t <= mu_n; mc_t <= mc_n; vu_t <= vu_n; mu_s <= mu_sn; mc_s <= mc_sn; vu_s <= vu_sn;
  end
  always @(negedge clk) sync_ready <= ($urandom % 4) != 0;

  // completion bits follow the done signals
  always @(negedge clk) if (rst_n) begin
    logic [NS-1:0] exp_c;
    exp_c = '0;
    if (mu_done) exp_c[mu_done_sid] = 1;
    if (mc_done) exp_c[mc_done_sid] = 1;
    for (int v = 0; v < NVU; v++) if (vu_done[v]) exp_c[vu_done_sid[v]] = 1;
    check(cmpl == exp_c, "completion vector");
  end

  function automatic uop_t mk(int tag);
    uop_t u;
    opcode_e ops [10] = '{OP_GEMM, OP_ADD, OP_MUL, OP_GTHR_SUM, OP_GTHR_MAX, OP_SCTR_OUTE,
                          OP_LD_SRC, OP_ST_DST, OP_SIGNAL_E, OP_FCH_TILE};
    u = '0;
    u.op = ops[$urandom % 10];
    u.sid = SIDW'($urandom % NS);
    u.imm = 32'(tag);
    return u;
  endfunction

  initial begin
    int tag;
    in_valid = 0; in_uop = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // directed: a GEMM holds the MU, a second GEMM waits, an ADD overtakes it
    hold_mu = 1;
    @(negedge clk); in_valid = 1; in_uop = '0; in_uop.op = OP_GEMM; in_uop.imm = 32'(N); in_uop.sid = 1;
    @(negedge clk); in_uop.imm = 32'(N + 1);
    @(negedge clk); in_uop.op = OP_ADD; in_uop.imm = 32'(N + 2); in_uop.sid = 3;
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    check(dut.cnt == 1, "second GEMM waits in the queue");
    check(dut.q[0].imm == 32'(N + 1), "waiting entry is the second GEMM");
    // fill the queue with GEMMs while the MU is held
    in_valid = 1; in_uop.op = OP_GEMM;
    for (int i = 0; i < Q - 1; i++) begin in_uop.imm = 32'(N + 3 + i); @(negedge clk); end
    #1 check(!in_ready, "full queue refuses input");
    in_valid = 0;
    hold_mu = 0;
    while (dut.cnt != 0) @(negedge clk);
    repeat (40) @(negedge clk);
    for (int k = 0; k < 4; k++) last_tag[k] = -1;
    // random stress
    tag = 0;
    while (tag < N) begin
      in_valid = ($urandom % 3) != 0;
      in_uop = mk(tag);
      #1;
      if (in_valid && in_ready) tag++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (400) @(negedge clk);
    for (int i = 0; i < N; i++) check(issued[i] == 1, "issued exactly once");
    check(max_gthr == 1, "gathers were serialised and happened");
    check(sync_seen > 0, "synchronisation ops returned to the scheduler");
    $display("issued %0d ops, sync %0d", n_iss, sync_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
