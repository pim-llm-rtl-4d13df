// systolic_array: ROWS x COLS grid of tpu_pe in the output-stationary (OS)
// dataflow, 32 x 32 by default as in the paper. It computes C = A * B where A
// is ROWS x K and B is K x COLS. On each cycle with in_valid the caller
// presents one column of A (a_col[i] = A[i][k]) and one row of B
// (b_row[j] = B[k][j]). Skew registers at the edges delay row i of A by i
// cycles and column j of B by j cycles, so A[i][k] and B[k][j] meet in
// PE(i,j). Operands travel right (A) and down (B); the partial sum stays in
// the PE. After the last of K input cycles the result C[i][j] is complete
// i+j+1 cycles later, i.e. all of C is ready ROWS+COLS-1 cycles after the
// last input. `clear` is applied together with the first input and travels
// with it through the skew, so PE(i,j) restarts exactly when its first
// product arrives. The edge skew registers are this design's choice of
// where the OS skew is produced.
module systolic_array
  import pim_llm_pkg::*;
#(
  parameter int unsigned ROWS = SA_DIM,
  parameter int unsigned COLS = SA_DIM,
  parameter int unsigned DW   = ACT_W,
  parameter int unsigned AW   = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 clear,       // with the first input of a new product
  input  logic signed [DW-1:0] a_col [ROWS],
  input  logic signed [DW-1:0] b_row [COLS],
  output logic signed [AW-1:0] acc   [ROWS][COLS]
);
  // skewed operands at the array edges
  logic signed [DW-1:0] a_skew [ROWS];
  logic signed [DW-1:0] b_skew [COLS];
  // clear marker travels with the operands, through a diagonal wavefront
  logic                 clr_skew [ROWS+COLS-1];

  // delay lines: row i has i registers, column j has j registers
  for (genvar i = 0; i < ROWS; i++) begin : g_askew
    if (i == 0) begin : g_direct
      assign a_skew[i] = in_valid ? a_col[i] : '0;
    end else begin : g_delay
      logic signed [DW-1:0] dly [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) dly[s] <= '0;
        end else begin
          dly[0] <= in_valid ? a_col[i] : '0;
          for (int s = 1; s < i; s++) dly[s] <= dly[s-1];
        end
      end
      assign a_skew[i] = dly[i-1];
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_bskew
    if (j == 0) begin : g_direct
      assign b_skew[j] = in_valid ? b_row[j] : '0;
    end else begin : g_delay
      logic signed [DW-1:0] dly [j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < j; s++) dly[s] <= '0;
        end else begin
          dly[0] <= in_valid ? b_row[j] : '0;
          for (int s = 1; s < j; s++) dly[s] <= dly[s-1];
        end
      end
      assign b_skew[j] = dly[j-1];
    end
  end

  // clr_skew[t] is the clear marker delayed by t cycles; PE(i,j) uses t=i+j
  assign clr_skew[0] = clear;
  for (genvar t = 1; t < ROWS+COLS-1; t++) begin : g_cskew
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) clr_skew[t] <= 1'b0;
      else        clr_skew[t] <= clr_skew[t-1];
    end
  end

  // PE grid
  logic signed [DW-1:0] a_h [ROWS][COLS+1];
  logic signed [DW-1:0] b_v [ROWS+1][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_row_in
    assign a_h[i][0] = a_skew[i];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_col_in
    assign b_v[0][j] = b_skew[j];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_r
    for (genvar j = 0; j < COLS; j++) begin : g_c
      tpu_pe #(.DW(DW), .AW(AW)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clear (clr_skew[i+j]),
        .a_in  (a_h[i][j]),
        .b_in  (b_v[i][j]),
        .a_out (a_h[i][j+1]),
        .b_out (b_v[i+1][j]),
        .acc   (acc[i][j])
      );
    end
  end
endmodule
