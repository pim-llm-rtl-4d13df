// tb_post_processing_unit: applies random Q4 vectors and checks
//   bypass    : y = x, done after 1 cycle;
//   GELU      : against the tanh form of GELU in floating point, +-1 LSB;
//   LayerNorm : against (x-mean)/std in floating point, +-2 LSB, done after
//               39 cycles.
module tb_post_processing_unit;
  import pim_llm_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 0, start = 0, done;
  pp_mode_t mode;
  logic signed [N-1:0][7:0] x, y;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  post_processing_unit dut (.clk, .rst_n, .start, .mode, .x, .done, .y);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(pp_mode_t m, int exp_lat);
    int lat;
    @(negedge clk); mode = m; start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != exp_lat) begin failures++; $display("mode %0d latency %0d", m, lat); end
  endtask

  initial begin
    mode = PP_BYPASS; x = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      real mean, var_, sd;
      for (int i = 0; i < N; i++) x[i] = 8'(int'($urandom_range(160)) - 80);
      run(PP_BYPASS, 1);
      for (int i = 0; i < N; i++) begin checks++; if (y[i] != x[i]) failures++; end
      run(PP_GELU, 1);
      for (int i = 0; i < N; i++) begin
        real xr, g;
        xr = real'($signed(x[i])) / 16.0;
        g = 0.5 * xr * (1.0 + $tanh(0.7978845608 * (xr + 0.044715 * xr * xr * xr)));
        checks++;
        if (fabs(real'($signed(y[i])) - g * 16.0) > 1.0) begin
          failures++; $display("gelu x=%0d y=%0d exp %f", x[i], y[i], g * 16.0);
        end
      end
      run(PP_LAYERNORM, 39);
      mean = 0; var_ = 0;
      for (int i = 0; i < N; i++) mean += real'($signed(x[i]));
      mean /= N;
      for (int i = 0; i < N; i++) var_ += (real'($signed(x[i])) - mean) ** 2;
      sd = $sqrt(var_ / N);
      for (int i = 0; i < N; i++) begin
        real e;
        e = (real'($signed(x[i])) - mean) / sd * 16.0;
        if (e > 127) e = 127; if (e < -128) e = -128;
        checks++;
        if (fabs(real'($signed(y[i])) - e) > 2.0) begin
          failures++; if (failures < 5) $display("ln x=%0d y=%0d exp %f", x[i], y[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
