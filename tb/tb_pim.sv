// tb_pim: end-to-end test of the PIM architecture (controller, global buffer,
// one bank of two tiles with two PEs each) against the LPDDR model. It
// programs random ternary weights into the two PEs of tile 1 with PROGRAM
// commands, then runs
//   - a row-split MVM (reduce = 1): a 512-element input, the two PE partial
//     results added in the tile;
//   - a broadcast MVM with GELU (reduce = 0): a 256-element input, 512
//     outputs.
// Results read back from the LPDDR model are compared with the ideal analog
// chain (DAC -> crossbar -> amplifier -> ADC) and the tile arithmetic
// computed in floating point, within 2 LSB.
module tb_pim;
  import pim_llm_pkg::*;
  localparam int PES = 2, R = 256, C = 256;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  pim_cmd_t cmd;
  logic [15:0] cmds_done;
  mem_req_t req; logic ready; mem_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [1:0] W [PES][R][C];
  logic signed [7:0] X [PES*R];

  pim #(.BANKS(1), .TILES(2), .PES(PES)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .cmds_done,
    .mem_req(req), .mem_req_ready(ready), .mem_rsp(rsp));
  lpddr_model mem (.clk, .rst_n, .req, .ready, .rsp);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  // one PE output code of the ideal analog chain
  function automatic int pe_code(int p, int c, int xoff);
    real s; int e;
    s = 0;
    for (int r = 0; r < R; r++)
      if (W[p][r][c] == W_POS) s += real'(X[xoff + r]);
      else if (W[p][r][c] == W_NEG) s -= real'(X[xoff + r]);
    s = s * 7812.0 * 0.099 / 12375.0;
    e = (s >= 0) ? int'($floor(s + 0.5)) : -int'($floor(-s + 0.5));
    return (e > 127) ? 127 : (e < -128) ? -128 : e;
  endfunction
  function automatic int gelu_q4(int q);
    real x, g;
    x = real'(q) / 16.0;
    g = 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
    return int'(g * 16.0);
  endfunction

  task automatic issue(pim_cmd_t c_);
    @(negedge clk); cmd = c_; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  function automatic logic signed [7:0] out_byte(mem_addr_t base, int idx);
    mem_word_t w; w = mem.peek(base + mem_addr_t'(idx / 32));
    return w[(idx % 32) * 8 +: 8];
  endfunction

  initial begin
    pim_cmd_t c_;
    cmd = '0;
    // weights: PE p at LPDDR 'h1000 + p*512, two words per row
    for (int p = 0; p < PES; p++)
      for (int r = 0; r < R; r++) begin
        mem_word_t w0, w1;
        for (int c = 0; c < C; c++) begin
          int t; t = $urandom_range(2);
          W[p][r][c] = (t == 0) ? W_ZERO : (t == 1) ? W_POS : W_NEG;
          if (c < 128) w0[2*c +: 2] = W[p][r][c]; else w1[2*(c-128) +: 2] = W[p][r][c];
        end
        mem.poke(mem_addr_t'('h1000 + p*512 + 2*r), w0);
        mem.poke(mem_addr_t'('h1000 + p*512 + 2*r + 1), w1);
      end
    // input vector at 'h100 (512 int8 = 16 words)
    for (int w = 0; w < 16; w++) begin
      mem_word_t d;
      for (int b = 0; b < 32; b++) begin X[w*32+b] = 8'(int'($urandom_range(40)) - 20); d[b*8 +: 8] = X[w*32+b]; end
      mem.poke(mem_addr_t'('h100 + w), d);
    end
    repeat (3) @(posedge clk); rst_n = 1;

    for (int p = 0; p < PES; p++) begin
      c_ = '0; c_.op = PIM_PROGRAM; c_.bank = 0; c_.tile = 1; c_.pe = 5'(p);
      c_.src = mem_addr_t'('h1000 + p*512); c_.rows = 9'(R);
      issue(c_);
    end
    // row-split MVM
    c_ = '0; c_.op = PIM_MVM; c_.tile = 1; c_.src = 'h100; c_.dst = 'h200; c_.reduce = 1; c_.pp_mode = PP_BYPASS;
    issue(c_);
    for (int c = 0; c < C; c++) begin
      int e;
      e = (pe_code(0, c, 0) + pe_code(1, c, R)) >>> 2;
      checks++;
      if (int'(out_byte('h200, c)) > e + 2 || int'(out_byte('h200, c)) < e - 2) begin
        failures++; if (failures < 5) $display("reduce c=%0d got %0d exp %0d", c, out_byte('h200, c), e);
      end
    end
    // broadcast MVM with GELU
    c_ = '0; c_.op = PIM_MVM; c_.tile = 1; c_.src = 'h100; c_.dst = 'h300; c_.reduce = 0; c_.pp_mode = PP_GELU;
    issue(c_);
    for (int p = 0; p < PES; p++)
      for (int c = 0; c < C; c++) begin
        int e, g;
        e = gelu_q4(pe_code(p, c, 0));
        g = int'(out_byte('h300, p*C + c));
        checks++;
        if (g > e + 2 || g < e - 2) begin
          failures++; if (failures < 5) $display("bcast p=%0d c=%0d got %0d exp %0d", p, c, g, e);
        end
      end
    checks++;
    if (cmds_done != 16'(PES + 2)) failures++;
    $display("LPDDR stalls seen: %0d", mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
