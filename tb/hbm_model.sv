// hbm_model: behavioural model of the off-chip memory used by the
// testbenches. Word-addressed (512-bit words), accepts one request per cycle
// (ready is always 1), returns read data in order LAT cycles after the
// request. Bandwidth and bank timing of a real HBM stack are not modelled.
module hbm_model #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned LAT   = 4
) (
  input  logic         clk,
  input  logic         valid,
  input  logic         we,
  input  logic [31:0]  addr,
  input  logic [511:0] wdata,
  output logic         ready,
  output logic         rvalid,
  output logic [511:0] rdata
);
  logic [511:0] mem [DEPTH];
  logic         pv [LAT];
  logic [511:0] pd [LAT];
  int unsigned  reads, writes;

  assign ready  = 1'b1;
  assign rvalid = pv[LAT-1];
  assign rdata  = pd[LAT-1];

  initial begin
    reads = 0; writes = 0;
    for (int i = 0; i < int'(LAT); i++) begin pv[i] = 1'b0; pd[i] = '0; end
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    pv[0] <= valid && !we;
    pd[0] <= mem[addr % DEPTH];
    for (int i = 1; i < int'(LAT); i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    if (valid && we) begin
      mem[addr % DEPTH] <= wdata;
      writes <= writes + 1;
    end
    if (valid && !we) reads <= reads + 1;
  end
endmodule
