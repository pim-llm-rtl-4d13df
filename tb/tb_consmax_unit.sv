// tb_consmax_unit: sweeps attention scores and compares the unit's Q0.8
// output with exp(s - beta)/gamma computed in floating point (tolerance:
// 5 % of the value plus 2 LSB, covering the 16-entry table). Also checks the
// one-cycle latency and saturation at 255.
module tb_consmax_unit;
  localparam int IN_FRAC = 10, BETA_Q8 = -128, INV_GAMMA_Q8 = 8;   // beta=-0.5, gamma=32
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [31:0] score;
  logic [7:0] prob;
  int checks = 0, failures = 0;
  consmax_unit #(.IN_FRAC(IN_FRAC), .BETA_Q8(BETA_Q8), .INV_GAMMA_Q8(INV_GAMMA_Q8)) dut (
    .clk, .rst_n, .in_valid, .score, .out_valid, .prob);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    score = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      real s, e;
      int expd;
      score = (n < 300) ? 32'(int'($urandom_range(12000)) - 8000) : 32'(int'($urandom_range(30000)));
      s = real'(score) / real'(1 << IN_FRAC);
      e = $exp(s - real'(BETA_Q8) / 256.0) * real'(INV_GAMMA_Q8) / 256.0 * 256.0;
      expd = (e > 255.0) ? 255 : int'(e);
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks += 2;
      if (!out_valid) failures++;
      if (real'(prob) > real'(expd) + 0.05 * real'(expd) + 2.0 ||
          real'(prob) < real'(expd) - 0.05 * real'(expd) - 2.0) begin
        failures++;
        $display("score %0d prob %0d exp %0d", score, prob, expd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
