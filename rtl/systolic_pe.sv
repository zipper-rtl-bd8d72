// systolic_pe: one processing element of the output-stationary systolic
// array in the matrix unit. Each cycle with en = 1 it multiplies the Q8.8
// operands arriving from the left (a) and from the top (b), adds the product
// to its local 32-bit accumulator, and forwards both operands, registered, to
// its right and lower neighbours. clr zeroes the accumulator (and the
// forwarded operands) at the start of a block. Accumulator width and the
// clear input are this design's choices.
module systolic_pe
  import zipper_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clr,
  input  logic signed [EW-1:0] a_in,
  input  logic signed [EW-1:0] b_in,
  output logic signed [EW-1:0] a_out,
  output logic signed [EW-1:0] b_out,
  output logic signed [31:0]   acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; b_out <= '0; acc <= '0;
    end else if (clr) begin
      a_out <= '0; b_out <= '0; acc <= '0;
    end else if (en) begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= acc + 32'(a_in * b_in);
    end
  end
endmodule
