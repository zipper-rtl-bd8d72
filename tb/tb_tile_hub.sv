// tb_tile_hub: writes tile metadata entries and topology words of every
// slot, reads them back, and checks that readers of different slots are
// all served in the same cycle (one bank per slot) while two readers of
// one slot are served one after the other. Reduced slot size.
module tb_tile_hub;
  import zipper_pkg::*;
  localparam int NS = 4, SW = 1024, NP = 5, MT = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NP-1:0] req_valid, req_we, gnt, rvalid;
  logic [TAW-1:0] req_addr [NP];
  logic [31:0] req_wdata [NP], rdata [NP];
  logic meta_we; logic [5:0] meta_waddr, meta_raddr; meta_t meta_wdata, meta_rdata;

  tile_hub #(.NSLOTS(NS), .SLOT_WORDS(SW), .NPORTS(NP), .MAX_TILES(MT)) dut (.*);

  int checks = 0, failures = 0;
  meta_t mref [MT];
  logic [31:0] tref [NS*SW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    req_valid = '0; req_we = '0; meta_we = 0; meta_waddr = '0; meta_raddr = '0; meta_wdata = '0;
    for (int p = 0; p < NP; p++) begin req_addr[p] = '0; req_wdata[p] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // metadata
    for (int t = 0; t < MT; t++) begin
      mref[t] = {$urandom, $urandom, $urandom, $urandom, $urandom};
      meta_we = 1; meta_waddr = 6'(t); meta_wdata = mref[t];
      @(negedge clk);
    end
    meta_we = 0;
    for (int t = 0; t < MT; t++) begin
      meta_raddr = 6'(t); #1;
      check(meta_rdata == mref[t], "metadata read back");
    end
    // topology words through port 0 (every 7th word of every slot)
    for (int a = 0; a < NS*SW; a += 7) begin
      tref[a] = $urandom;
      req_valid[0] = 1; req_we[0] = 1; req_addr[0] = TAW'(a); req_wdata[0] = tref[a];
      #1 check(gnt[0], "lone write granted");
      @(negedge clk);
    end
    req_valid[0] = 0; req_we[0] = 0;
    // ports 1..4 read slots 0..3 in the same cycle
    for (int k = 0; k < 50; k++) begin
      int a [NP];
      for (int p = 1; p < NP; p++) begin
        a[p] = 7 * int'($urandom_range(((p - 1) * SW + 6) / 7, (p * SW - 1) / 7));
        req_valid[p] = 1; req_addr[p] = TAW'(a[p]);
      end
      #1;
      for (int p = 1; p < NP; p++) check(gnt[p], "different slots served together");
      @(posedge clk); #1;
      for (int p = 1; p < NP; p++) check(rvalid[p] && rdata[p] == tref[a[p]], "slot read data");
      @(negedge clk);
    end
    // two readers of slot 2
    req_valid = '0;
    req_valid[1] = 1; req_addr[1] = TAW'(2*SW + 7);
    req_valid[2] = 1; req_addr[2] = TAW'(2*SW + 14);
    #1 check(gnt[1] ^ gnt[2], "same slot: one reader at a time");
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
