// banked_ram: multi-port, multi-bank on-chip memory with a round-robin
// arbiter per bank. Its defaults are the Unified Embedding Memory (UEM):
// 21 MiB as 344,064 words of 512 bits (32 Q8.8 elements) in 16 banks.
// The tile hub reuses it with 32-bit words and one bank per tile slot.
//
// How it works: every port may present one request per cycle (valid, we,
// addr, wdata). The bank is taken from the low address bits (word
// interleaving, BANK_HIGH = 0) or the high ones (BANK_HIGH = 1). Each bank
// serves one request per cycle; when several ports want the same bank a
// rotating-priority arbiter picks one and the others see gnt = 0 and must
// hold their request. A granted read returns rdata with rvalid exactly one
// cycle later. Writes complete on the grant cycle. With BANK_HIGH the
// per-bank depth DEPTH/NBANKS must be a power of two.
//
// Follows the paper: a large multi-bank memory directly connected to every
// compute unit. This design's choices: bank count, interleaving, the
// arbitration policy and the one-cycle read latency. eDRAM refresh is not
// modelled; the array is plain synthesizable memory.
module banked_ram #(
  parameter int unsigned W         = 512,
  parameter int unsigned DEPTH     = 344064,
  parameter int unsigned NBANKS    = 16,
  parameter int unsigned NPORTS    = 18,
  parameter int unsigned AW        = 20,
  parameter bit          BANK_HIGH = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NPORTS-1:0]     req_valid,
  input  logic [NPORTS-1:0]     req_we,
  input  logic [AW-1:0]         req_addr  [NPORTS],
  input  logic [W-1:0]          req_wdata [NPORTS],
  output logic [NPORTS-1:0]     gnt,
  output logic [NPORTS-1:0]     rvalid,
  output logic [W-1:0]          rdata     [NPORTS]
);
  localparam int unsigned BB     = (NBANKS > 1) ? $clog2(NBANKS) : 1;
  localparam int unsigned BDEPTH = DEPTH / NBANKS;
  localparam int unsigned RAW    = $clog2(BDEPTH);
  localparam int unsigned PW     = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  function automatic logic [BB-1:0] bank_of(logic [AW-1:0] a);
    if (NBANKS == 1) return '0;
    if (BANK_HIGH) return BB'(a >> RAW);
    return a[BB-1:0];
  endfunction

  function automatic logic [RAW-1:0] row_of(logic [AW-1:0] a);
    if (NBANKS == 1) return RAW'(a);
    if (BANK_HIGH) return RAW'(a);          // low RAW bits
    return RAW'(a >> BB);
  endfunction

  logic [PW-1:0]     rr_ptr  [NBANKS];
  logic              bk_en   [NBANKS];
  logic              bk_we   [NBANKS];
  logic [RAW-1:0]    bk_row  [NBANKS];
  logic [W-1:0]      bk_wd   [NBANKS];
  logic [PW-1:0]     bk_win  [NBANKS];
  logic [W-1:0]      bk_rd   [NBANKS];
  logic [BB-1:0]     p_bank_q [NPORTS];

  // Per-bank arbitration: first requesting port at or after rr_ptr.
  always_comb begin
    gnt = '0;
    for (int b = 0; b < NBANKS; b++) begin
      bk_en[b]  = 1'b0;
      bk_we[b]  = 1'b0;
      bk_row[b] = '0;
      bk_wd[b]  = '0;
      bk_win[b] = '0;
      for (int k = 0; k < NPORTS; k++) begin
        int unsigned p;
        p = (int'(rr_ptr[b]) + k) % NPORTS;
        if (!bk_en[b] && req_valid[p] && bank_of(req_addr[p]) == BB'(b)) begin
          bk_en[b]  = 1'b1;
          bk_we[b]  = req_we[p];
          bk_row[b] = row_of(req_addr[p]);
          bk_wd[b]  = req_wdata[p];
          bk_win[b] = PW'(p);
          gnt[p]    = 1'b1;
        end
      end
    end
  end

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic [W-1:0] mem [BDEPTH];
    always_ff @(posedge clk) begin
      if (bk_en[b]) begin
        if (bk_we[b]) mem[bk_row[b]] <= bk_wd[b];
        else          bk_rd[b] <= mem[bk_row[b]];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         rr_ptr[b] <= '0;
      else if (bk_en[b])  rr_ptr[b] <= (int'(bk_win[b]) == NPORTS-1) ? '0 : bk_win[b] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= '0;
      for (int p = 0; p < NPORTS; p++) p_bank_q[p] <= '0;
    end else begin
      rvalid <= gnt & ~req_we;
      for (int p = 0; p < NPORTS; p++) p_bank_q[p] <= bank_of(req_addr[p]);
    end
  end

  always_comb
    for (int p = 0; p < NPORTS; p++) rdata[p] = bk_rd[p_bank_q[p]];

endmodule
