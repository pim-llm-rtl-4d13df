// tpu_pe: one processing element of the output-stationary systolic array.
// Each cycle it multiplies the 8-bit activation arriving from the left with the
// 8-bit operand arriving from the top (an 8x8 signed multiplier) and adds the
// product into a stationary partial sum (the accumulator), as the paper
// describes. Both operands are registered and forwarded to the right and
// downward neighbours, one cycle later. Idle slots carry zeros, so no valid
// bit is needed. `clear` zeroes the partial sum in the same cycle a new
// product may be loaded (acc <= a*b). Accumulator width (32 bits) and the
// synchronous clear are this design's choices.
module tpu_pe
  import pim_llm_pkg::*;
#(
  parameter int unsigned DW = ACT_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic signed [DW-1:0] a_in,
  input  logic signed [DW-1:0] b_in,
  output logic signed [DW-1:0] a_out,
  output logic signed [DW-1:0] b_out,
  output logic signed [AW-1:0] acc
);
  logic signed [2*DW-1:0] prod;
  assign prod = a_in * b_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= (clear ? AW'(0) : acc) + AW'(prod);
    end
  end
endmodule
