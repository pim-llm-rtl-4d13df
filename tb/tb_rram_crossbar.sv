// tb_rram_crossbar: programs random ternary weights into the default
// 256 x 256 crossbar model, applies random row voltages and compares each
// amplifier output with (G_ON - G_OFF) * R_F * sum(+-v) computed in floating
// point (tolerance 0.1 % + 2 uV for the Q16 gain). Checks the latency
// (out_valid ROWS+1 cycles after eval) and that reprogramming a row changes
// the result.
module tb_rram_crossbar;
  import pim_llm_pkg::*;
  localparam int R = 256, C = 256;
  logic clk = 0, rst_n = 0, prog_en = 0, eval = 0, busy, out_valid;
  logic [R-1:0] wl;
  logic [2*C-1:0] prog_data;
  logic signed [R-1:0][31:0] v_in;
  logic signed [C-1:0][31:0] v_out;
  logic [1:0] W [R][C];
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  rram_crossbar dut (.clk, .rst_n, .prog_en, .wl, .prog_data, .eval, .v_in, .busy, .out_valid, .v_out);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic program_row(int r);
    @(negedge clk);
    prog_en = 1; wl = R'(1) << r;
    for (int c = 0; c < C; c++) begin
      int t; t = $urandom_range(2);
      W[r][c] = (t == 0) ? W_ZERO : (t == 1) ? W_POS : W_NEG;
      prog_data[2*c +: 2] = W[r][c];
    end
    @(negedge clk); prog_en = 0; wl = '0;
  endtask

  task automatic run_and_check();
    int lat;
    for (int r = 0; r < R; r++) v_in[r] = 32'(int'($urandom_range(2000000)) - 1000000);
    @(negedge clk); eval = 1; @(negedge clk); eval = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    // eval is sampled one edge after it is raised; out_valid follows ROWS+1 edges later
    if (lat != R + 2) begin failures++; $display("latency %0d", lat); end
    for (int c = 0; c < C; c++) begin
      real s, e;
      s = 0.0;
      for (int r = 0; r < R; r++)
        if (W[r][c] == W_POS) s += real'($signed(v_in[r]));
        else if (W[r][c] == W_NEG) s -= real'($signed(v_in[r]));
      e = s * 99.0 * 1000.0 / 1.0e6;
      checks++;
      if (fabs(real'($signed(v_out[c])) - e) > 2.0 + 0.001 * fabs(e)) begin
        failures++;
        if (failures < 5) $display("col %0d got %0d exp %f", c, v_out[c], e);
      end
    end
  endtask

  initial begin
    wl = '0; prog_data = '0; v_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) program_row(r);
    run_and_check();
    program_row(7);
    program_row(200);
    run_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
