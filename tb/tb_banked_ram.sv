// tb_banked_ram: random multi-port traffic against a reference array.
// Checks: read data one cycle after the grant equals the reference, at most
// one grant per bank per cycle, a request to a bank nobody else wants is
// granted at once, and a held request is granted within NPORTS cycles
// (round-robin). Runs a reduced memory (4096 words, 4 banks, 3 ports).
module tb_banked_ram;
  localparam int W = 64, DEPTH = 4096, NB = 4, NP = 3, AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NP-1:0] req_valid, req_we, gnt, rvalid;
  logic [AW-1:0] req_addr [NP];
  logic [W-1:0]  req_wdata [NP], rdata [NP];

  banked_ram #(.W(W), .DEPTH(DEPTH), .NBANKS(NB), .NPORTS(NP), .AW(AW)) dut (.*);

  logic [W-1:0] ref_mem [DEPTH];
  logic [W-1:0] exp_d [NP];
  logic         exp_v [NP];
  int wait_cnt [NP];
  logic g [NP];
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = '0;
    for (int p = 0; p < NP; p++) begin
      req_valid[p] = 0; req_we[p] = 0; req_addr[p] = '0; req_wdata[p] = '0;
      exp_v[p] = 0; exp_d[p] = '0; wait_cnt[p] = 0; g[p] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise the memory through port 0
    for (int i = 0; i < DEPTH; i++) begin
      req_valid[0] = 1; req_we[0] = 1; req_addr[0] = AW'(i); req_wdata[0] = {$urandom, $urandom};
      ref_mem[i] = req_wdata[0];
      @(negedge clk);
      checks++; if (!gnt[0]) failures++;    // sole requester: always granted
    end
    req_valid[0] = 0;
    // random traffic; a port keeps its request until granted
    for (int cyc = 0; cyc < 6000; cyc++) begin
      for (int p = 0; p < NP; p++)
        if (!req_valid[p] || g[p]) begin
          req_valid[p] = ($urandom_range(3) != 0);
          req_we[p]    = ($urandom_range(1) == 0);
          req_addr[p]  = AW'($urandom_range(cyc < 3000 ? 63 : DEPTH - 1));
          req_wdata[p] = {$urandom, $urandom};
        end
      #1;
      for (int p = 0; p < NP; p++) g[p] = gnt[p];
      // one grant per bank; every bank with requests grants one
      for (int b = 0; b < NB; b++) begin
        int ng, nr;
        ng = 0; nr = 0;
        for (int p = 0; p < NP; p++)
          if (req_valid[p] && int'(req_addr[p] % NB) == b) begin
            nr++;
            if (g[p]) ng++;
          end
        checks++;
        if (ng > 1 || (nr > 0 && ng != 1)) begin
          failures++;
          $display("bank %0d: %0d requests, %0d grants", b, nr, ng);
        end
      end
      for (int p = 0; p < NP; p++)
        if (req_valid[p] && g[p]) begin
          wait_cnt[p] = 0;
          if (!req_we[p]) begin exp_v[p] = 1; exp_d[p] = ref_mem[req_addr[p]]; end
        end else if (req_valid[p]) begin
          wait_cnt[p]++;
          checks++;
          if (wait_cnt[p] >= NP) begin failures++; $display("port %0d starved", p); end
        end
      for (int p = 0; p < NP; p++)
        if (req_valid[p] && g[p] && req_we[p]) ref_mem[req_addr[p]] = req_wdata[p];
      @(posedge clk);
      #1;
      for (int p = 0; p < NP; p++) begin
        if (exp_v[p]) begin
          checks++;
          if (!rvalid[p] || rdata[p] !== exp_d[p]) begin
            failures++;
            if (failures < 5) $display("port %0d read %h exp %h", p, rdata[p], exp_d[p]);
          end
        end else if (rvalid[p]) begin
          checks++; failures++;
          $display("port %0d: unexpected rvalid", p);
        end
        exp_v[p] = 0;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
