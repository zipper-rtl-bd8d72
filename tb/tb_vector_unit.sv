// tb_vector_unit: one vector unit (8 SIMD32 cores) against multi-ported
// memory models of the UEM and the tile hub (every request granted at once,
// read data one cycle later). Every ELW and GOP opcode is run once and every
// result word compared with a reference computed here in Q8.8:
// ADD/SUB/MUL/DIV with per-row, shared and scalar B operands, EXP (against
// the 2^(1.4427x) formula and, loosely, against real exp), RELU, GEMV,
// SCTR.OUTE / SCTR.INE through a tile-hub edge list and GTHR.DST.SUM / MAX
// accumulating into existing destination rows. It also checks that the 8
// cores run in parallel: 64 ADD rows must finish in under 1/4 of the time
// one core would need.
module tb_vector_unit;
  import zipper_pkg::*;
  localparam int NC = 8, SW = 16384;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [SIDW-1:0] done_sid;
  uop_t uop_in;
  logic [NC-1:0] u_valid, u_we, u_gnt, u_rvalid, t_valid, t_gnt, t_rvalid;
  logic [UAW-1:0] u_addr [NC];
  word_t u_wdata [NC], u_rdata [NC];
  logic [TAW-1:0] t_addr [NC];
  logic [31:0] t_rdata [NC];

  vector_unit dut (.*);

  word_t       umem [8192];
  logic [31:0] tmem [65536];
  assign u_gnt = u_valid;
  assign t_gnt = t_valid;
  always_ff @(posedge clk)
    for (int c = 0; c < NC; c++) begin
      u_rvalid[c] <= u_valid[c] && !u_we[c];
      u_rdata[c]  <= umem[u_addr[c][12:0]];
      if (u_valid[c] && u_we[c]) umem[u_addr[c][12:0]] <= u_wdata[c];
      t_rvalid[c] <= t_valid[c];
      t_rdata[c]  <= tmem[t_addr[c]];
    end

  int checks = 0, failures = 0;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] ge(int addr, int lane);
    return umem[addr][lane*16 +: 16];
  endfunction
  function automatic logic signed [15:0] sat(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction
  function automatic logic signed [15:0] ref_exp(logic signed [15:0] x);
    int t, ip, v;
    t = (int'(x) * 369) >>> 8;
    ip = t >>> 8;
    v = 256 + (t & 255);
    if (ip >= 7) return 16'sh7fff;
    if (ip <= -9) return 0;
    return (ip >= 0) ? 16'(v << ip) : 16'(v >> (-ip));
  endfunction

  int cyc;
  task automatic run(opcode_e op, int rows, int kw, bmode_e bm, int a, int b, int d, int slot);
    uop_in = '0;
    uop_in.op = op; uop_in.sid = 4'd6; uop_in.rows = 16'(rows); uop_in.kw = 4'(kw);
    uop_in.bmode = bm; uop_in.a_addr = UAW'(a); uop_in.b_addr = UAW'(b); uop_in.d_addr = UAW'(d);
    uop_in.slot = 2'(slot);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (done_sid != 4'd6) failures++;
  endtask

  task automatic cmp(string what, int addr, int lane, logic signed [15:0] expv);
    checks++;
    if (ge(addr, lane) !== expv) begin
      failures++;
      if (failures < 10) $display("%s: word %0d lane %0d got %0d exp %0d", what, addr, lane, ge(addr, lane), expv);
    end
  endtask

  initial begin
    word_t snap [8192];
    start = 0; uop_in = '0;
    for (int i = 0; i < 8192; i++)
      for (int l = 0; l < 32; l++) umem[i][l*16 +: 16] = 16'(int'($urandom_range(2048)) - 1024);
    for (int i = 0; i < 65536; i++) tmem[i] = 0;
    for (int l = 0; l < 32; l += 5) umem[101][l*16 +: 16] = 0;     // DIV by zero lanes
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- ELW, rows = 10, kw = 2; A at 0, B at 100 (per row) / 200 (shared / scalar)
    snap = umem;
    run(OP_ADD, 10, 2, B_ROW, 0, 100, 1000, 0);
    for (int r = 0; r < 10; r++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++)
      cmp("ADD", 1000 + r*2 + w, l, sat(longint'($signed(snap[r*2+w][l*16 +: 16])) + $signed(snap[100+r*2+w][l*16 +: 16])));
    run(OP_SUB, 10, 2, B_SHARED, 0, 200, 1100, 0);
    for (int r = 0; r < 10; r++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++)
      cmp("SUB", 1100 + r*2 + w, l, sat(longint'($signed(snap[r*2+w][l*16 +: 16])) - $signed(snap[200+w][l*16 +: 16])));
    run(OP_MUL, 10, 2, B_SCALAR, 0, 200, 1200, 0);
    for (int r = 0; r < 10; r++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++)
      cmp("MUL", 1200 + r*2 + w, l, sat((longint'($signed(snap[r*2+w][l*16 +: 16])) * $signed(snap[200+r][15:0])) >>> 8));
    run(OP_DIV, 10, 2, B_ROW, 0, 100, 1300, 0);
    for (int r = 0; r < 10; r++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++) begin
      longint a, b; a = $signed(snap[r*2+w][l*16 +: 16]); b = $signed(snap[100+r*2+w][l*16 +: 16]);
      cmp("DIV", 1300 + r*2 + w, l, (b == 0) ? ((a < 0) ? 16'sh8000 : 16'sh7fff) : sat((a * 256) / b));
    end
    run(OP_EXP, 10, 2, B_ROW, 0, 0, 1400, 0);
    for (int r = 0; r < 10; r++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++) begin
      logic signed [15:0] xa; real ex, got;
      xa = snap[r*2+w][l*16 +: 16];
      cmp("EXP", 1400 + r*2 + w, l, ref_exp(xa));
      ex = $exp(real'(xa) / 256.0); got = real'(ge(1400 + r*2 + w, l)) / 256.0;
      checks++;
      if (got - ex > 0.07 * ex + 0.01 || ex - got > 0.07 * ex + 0.01) begin
        failures++; $display("EXP(%f) = %f, real %f", real'(xa)/256.0, got, ex);
      end
    end
    run(OP_RELU, 10, 2, B_ROW, 0, 0, 1500, 0);
    for (int r = 0; r < 10; r++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++) begin
      logic signed [15:0] xa; xa = snap[r*2+w][l*16 +: 16];
      cmp("RELU", 1500 + r*2 + w, l, (xa < 0) ? 16'sd0 : xa);
    end
    run(OP_GEMV, 10, 2, B_ROW, 0, 200, 1600, 0);
    for (int r = 0; r < 10; r++) begin
      longint s; s = 0;
      for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++)
        s += longint'($signed(snap[r*2+w][l*16 +: 16])) * $signed(snap[200+w][l*16 +: 16]);
      for (int l = 0; l < 32; l++) cmp("GEMV", 1600 + r, l, sat(s >>> 8));
    end

    // ---- GOP on tile-hub slot 1: 6 sources, 5 destinations, 14 edges sorted by destination
    begin
      int esrc [14], edst [14], doff [6], e;
      e = 0;
      for (int d = 0; d < 5; d++) begin
        doff[d] = e;
        for (int k = 0; k < ((d == 2) ? 0 : ((d == 4) ? 5 : 3)); k++) begin
          edst[e] = d; esrc[e] = int'($urandom_range(5)); e++;
        end
      end
      doff[5] = e;
      for (int i = 0; i < 14; i++) tmem[SW + TH_EDGE_OFF + i] = (32'(edst[i]) << 16) | 32'(esrc[i]);
      for (int i = 0; i < 6; i++)  tmem[SW + TH_DOFF_OFF + i] = 32'(doff[i]);
      snap = umem;
      // sources at 2000 (6 rows), destinations at 2100 (5 rows), edges to 2200
      run(OP_SCTR_OUTE, 14, 2, B_ROW, 2000, 0, 2200, 1);
      for (int i = 0; i < 14; i++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++)
        cmp("SCTR.OUTE", 2200 + i*2 + w, l, snap[2000 + esrc[i]*2 + w][l*16 +: 16]);
      run(OP_SCTR_INE, 14, 2, B_ROW, 2100, 0, 2300, 1);
      for (int i = 0; i < 14; i++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++)
        cmp("SCTR.INE", 2300 + i*2 + w, l, snap[2100 + edst[i]*2 + w][l*16 +: 16]);
      snap = umem;
      run(OP_GTHR_SUM, 5, 2, B_ROW, 2200, 0, 2100, 1);
      for (int d = 0; d < 5; d++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++) begin
        logic signed [15:0] acc; acc = snap[2100 + d*2 + w][l*16 +: 16];
        for (int i = doff[d]; i < doff[d+1]; i++) acc = sat(longint'(acc) + $signed(snap[2200 + i*2 + w][l*16 +: 16]));
        cmp("GTHR.SUM", 2100 + d*2 + w, l, acc);
      end
      snap = umem;
      run(OP_GTHR_MAX, 5, 2, B_ROW, 2300, 0, 2400, 1);
      for (int d = 0; d < 5; d++) for (int w = 0; w < 2; w++) for (int l = 0; l < 32; l++) begin
        logic signed [15:0] acc; acc = snap[2400 + d*2 + w][l*16 +: 16];
        for (int i = doff[d]; i < doff[d+1]; i++)
          if ($signed(snap[2300 + i*2 + w][l*16 +: 16]) > acc) acc = snap[2300 + i*2 + w][l*16 +: 16];
        cmp("GTHR.MAX", 2400 + d*2 + w, l, acc);
      end
    end

    // ---- parallelism: 64 rows of ADD with kw = 1; one core needs >= 5 cycles per row
    run(OP_ADD, 64, 1, B_ROW, 3000, 3100, 3200, 0);
    checks++;
    if (cyc * 4 > 64 * 5) begin failures++; $display("64-row ADD took %0d cycles", cyc); end
    else $display("64-row ADD: %0d cycles", cyc);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
