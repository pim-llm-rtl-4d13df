// tb_systolic_array: multiplies random int8 matrices A (32 x K) and B (K x 32)
// on the default 32 x 32 output-stationary array, twice in a row (the second
// product starts with `clear`), and checks every C[i][j] against a reference
// product. It also checks the latency: C[31][31] is complete exactly
// ROWS+COLS-1 cycles after the last input, and not one cycle earlier.
module tb_systolic_array;
  localparam int R = 32, C = 32, K = 24;
  logic clk = 0, rst_n = 0, in_valid = 0, clear = 0;
  logic signed [7:0] a_col [R];
  logic signed [7:0] b_row [C];
  logic signed [31:0] acc [R][C];
  logic signed [7:0] A [R][K];
  logic signed [7:0] B [K][C];
  int checks = 0, failures = 0;
  systolic_array dut (.clk, .rst_n, .in_valid, .clear, .a_col, .b_row, .acc);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run_product();
    longint ref_c;
    foreach (A[i, k]) A[i][k] = 8'($urandom);
    foreach (B[k, j]) B[k][j] = 8'($urandom);
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      in_valid = 1; clear = (k == 0);
      for (int i = 0; i < R; i++) a_col[i] = A[i][k];
      for (int j = 0; j < C; j++) b_row[j] = B[k][j];
    end
    @(negedge clk); in_valid = 0; clear = 0;
    // last input was sampled at the previous posedge; corner PE finishes R+C-2 edges later
    repeat (R + C - 3) @(posedge clk);
    #1;
    ref_c = 0;
    for (int k = 0; k < K; k++) ref_c += longint'(A[R-1][k]) * longint'(B[k][C-1]);
    checks++;
    if (acc[R-1][C-1] == 32'(ref_c)) begin failures++; $display("corner ready too early"); end
    @(posedge clk); #1;
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        ref_c = 0;
        for (int k = 0; k < K; k++) ref_c += longint'(A[i][k]) * longint'(B[k][j]);
        checks++;
        if (acc[i][j] != 32'(ref_c)) begin
          failures++;
          if (failures < 5) $display("C[%0d][%0d]=%0d exp %0d", i, j, acc[i][j], ref_c);
        end
      end
  endtask

  initial begin
    foreach (a_col[i]) a_col[i] = 0;
    foreach (b_row[j]) b_row[j] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_product();
    run_product();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
