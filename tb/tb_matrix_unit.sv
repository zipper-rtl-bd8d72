// tb_matrix_unit: runs GEMMs on the full 32x128 array against a simple
// one-port memory model (grant at once, data one cycle later) and checks
// every output element against D = (A W) >>> 8 computed here, plus the
// cycle count: 2 cycles per weight word read, then per block of up to 32
// rows 2 cycles per input word, K+32+128-1 array cycles and 1 cycle per
// output word. A second GEMM with the same weights must skip the weight
// load (weight buffer reuse); a third uses a different weight block.
module tb_matrix_unit;
  import zipper_pkg::*;
  localparam int ROWS = 32, COLS = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, u_valid, u_we, u_gnt, u_rvalid;
  logic [SIDW-1:0] done_sid;
  logic [UAW-1:0] u_addr;
  word_t u_wdata, u_rdata;
  uop_t uop_in;

  matrix_unit dut (.*);

  word_t mem [8192];
  assign u_gnt = u_valid;
  always_ff @(posedge clk) begin
    u_rvalid <= u_valid && !u_we;
    u_rdata  <= mem[u_addr[12:0]];
    if (u_valid && u_we) mem[u_addr[12:0]] <= u_wdata;
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] el(int addr, int k);
    return mem[addr + k / 32][(k % 32) * 16 +: 16];
  endfunction

  task automatic gemm(int rows, int kw, int nw, int a, int b, int d, bit reuse);
    int K, cyc, expc, blocks;
    logic signed [15:0] expd [][];
    K = kw * 32;
    expd = new[rows];
    for (int r = 0; r < rows; r++) begin
      expd[r] = new[nw * 32];
      for (int n = 0; n < nw * 32; n++) begin
        int acc; acc = 0;
        for (int k = 0; k < K; k++) acc += int'(el(a + r * kw, k)) * int'(el(b + k * nw, n));
        acc = acc >>> 8;
        if (acc > 32767) acc = 32767;
        if (acc < -32768) acc = -32768;
        expd[r][n] = 16'(acc);
      end
    end
    uop_in = '0;
    uop_in.op = OP_GEMM; uop_in.sid = 4'd3; uop_in.rows = 16'(rows);
    uop_in.kw = 4'(kw); uop_in.nw = 4'(nw);
    uop_in.a_addr = UAW'(a); uop_in.b_addr = UAW'(b); uop_in.d_addr = UAW'(d);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (done_sid != 4'd3) begin failures++; $display("done_sid %0d", done_sid); end
    expc = reuse ? 0 : 2 * K * nw;
    blocks = (rows + ROWS - 1) / ROWS;
    for (int bk = 0; bk < blocks; bk++) begin
      int rb; rb = (rows - bk * ROWS > ROWS) ? ROWS : rows - bk * ROWS;
      expc += 2 * rb * kw + (K + ROWS + COLS - 1) + rb * nw;
    end
    expc += 2;
    checks++;
    if (cyc != expc) begin failures++; $display("GEMM %0dx%0dx%0d: %0d cycles, expected %0d", rows, K, nw*32, cyc, expc); end
    else $display("GEMM %0dx%0dx%0d: %0d cycles", rows, K, nw*32, cyc);
    for (int r = 0; r < rows; r++) begin
      int bad; bad = 0;
      for (int n = 0; n < nw * 32; n++)
        if ($signed(mem[d + r * nw + n / 32][(n % 32) * 16 +: 16]) != expd[r][n]) bad++;
      checks++;
      if (bad) begin failures++; if (failures < 6) $display("row %0d: %0d wrong", r, bad); end
    end
  endtask

  initial begin
    start = 0; uop_in = '0;
    for (int i = 0; i < 8192; i++)
      for (int l = 0; l < 32; l++) mem[i][l*16 +: 16] = 16'(int'($urandom_range(160)) - 80);
    // a few large values to exercise saturation
    mem[10][15:0] = 16'sh7fff; mem[2048][15:0] = 16'sh7fff;
    repeat (2) @(negedge clk);
    rst_n = 1;
    gemm(40, 4, 4, 0, 2048, 4096, 0);     // two blocks, 128x128 weights
    gemm(7, 4, 4, 512, 2048, 4400, 1);    // same weights: reused
    gemm(33, 2, 3, 1024, 3072, 5000, 0);  // K=64, N=96, new weights
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
