// tb_pim_llm_top: end-to-end test of the hybrid accelerator at its default
// (paper) size: a 32x32 TPU with 8 MB of SRAM and a PIM of 2 banks x 4 tiles
// x 4 PEs of 256x256 crossbars, sharing one LPDDR model through the arbiter.
// While the TPU runs an attention-style pair of layers (a requantised MatMul
// and a ConSmax MatMul), the PIM concurrently
//   - programs the four PEs of bank 1 / tile 3 with random ternary weights,
//   - runs a row-split MVM (1024 inputs, reduce = 1),
//   - runs a broadcast MVM with GELU and one with LayerNorm (256 inputs,
//     1024 outputs).
// Every result is compared with a reference computed here (exact integer for
// the TPU requantiser, floating point for the analog chain, GELU, LayerNorm
// and ConSmax, with the tolerances given below). Each mechanism is counted
// when it is seen; a mechanism that never happens is a failure. The total
// cycle count is checked against a lower bound set by the PIM's serial
// crossbar evaluation.
module tb_pim_llm_top;
  import pim_llm_pkg::*;
  localparam int PES = 4, R = 256, C = 256, N = 32, BANK = 1, TILE = 3;
  logic clk = 0, rst_n = 0;
  logic tpu_cmd_valid = 0, tpu_cmd_ready, tpu_busy;
  tpu_desc_t tpu_cmd;
  logic [15:0] tpu_layers_done;
  logic pim_cmd_valid = 0, pim_cmd_ready, pim_busy;
  pim_cmd_t pim_cmd;
  logic [15:0] pim_cmds_done;
  mem_req_t req; logic ready; mem_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [1:0] W [PES][R][C];
  logic signed [7:0] X [PES*R];
  int A [2][N][64], B [2][64][N];
  int klen [2] = '{40, 24};
  int n_requant = 0, n_softmax = 0, n_reduce = 0, n_bcast = 0, n_gelu = 0, n_ln = 0;
  int n_contend = 0, n_program = 0;

  pim_llm_top dut (
    .clk, .rst_n,
    .tpu_cmd_valid, .tpu_cmd_ready, .tpu_cmd, .tpu_busy, .tpu_layers_done,
    .pim_cmd_valid, .pim_cmd_ready, .pim_cmd, .pim_busy, .pim_cmds_done,
    .mem_req(req), .mem_req_ready(ready), .mem_rsp(rsp));
  lpddr_model mem (.clk, .rst_n, .req, .ready, .rsp);
  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.tpu_req.valid && dut.pim_req.valid) n_contend++;
  end

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
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
    real x;
    x = real'(q) / 16.0;
    return int'(0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x))) * 16.0);
  endfunction
  function automatic logic [7:0] out_byte(mem_addr_t base, int idx);
    mem_word_t w; w = mem.peek(base + mem_addr_t'(idx / 32));
    return w[(idx % 32) * 8 +: 8];
  endfunction

  task automatic pim_issue(pim_cmd_t c_);
    @(negedge clk); pim_cmd = c_; pim_cmd_valid = 1;
    do @(posedge clk); while (!pim_cmd_ready);
    @(negedge clk); pim_cmd_valid = 0;
    @(negedge clk);
    while (pim_busy) @(negedge clk);
  endtask
  task automatic tpu_push(tpu_desc_t d);
    @(negedge clk); tpu_cmd = d; tpu_cmd_valid = 1;
    do @(posedge clk); while (!tpu_cmd_ready);
    @(negedge clk); tpu_cmd_valid = 0;
  endtask

  // ---------------- checks ----------------
  task automatic check_tpu();
    for (int l = 0; l < 2; l++)
      for (int i = 0; i < N; i++) begin
        mem_word_t w;
        w = mem.peek(mem_addr_t'((l == 0 ? 'h5000 : 'h6000) + i));
        for (int j = 0; j < N; j++) begin
          longint s; int e, g;
          s = 0;
          for (int k = 0; k < klen[l]; k++) s += longint'(A[l][i][k] * B[l][k][j]);
          checks++;
          if (l == 0) begin
            e = int'(s >>> 6); e = (e > 127) ? 127 : (e < -128) ? -128 : e;
            g = int'($signed(w[j*8 +: 8]));
            if (g != e) begin failures++; if (failures < 5) $display("rq %0d %0d got %0d exp %0d", i, j, g, e); end
            else n_requant++;
          end else begin
            real p;
            p = $exp(real'(s) / 1024.0) / 32.0 * 256.0;
            if (p > 255.0) p = 255.0;
            g = int'(w[j*8 +: 8]);
            if (fabs(real'(g) - p) > 0.1 * p + 2.0) begin
              failures++; if (failures < 5) $display("sm %0d %0d got %0d exp %f", i, j, g, p);
            end else n_softmax++;
          end
        end
      end
  endtask

  initial begin
    tpu_desc_t d;
    pim_cmd_t c_;
    int t0;
    tpu_cmd = '0; pim_cmd = '0;
    // PIM weights at 'h10000 + p*512, inputs at 'h100 (1024 int8)
    for (int p = 0; p < PES; p++)
      for (int r = 0; r < R; r++) begin
        mem_word_t w0, w1;
        for (int c = 0; c < C; c++) begin
          int t; t = $urandom_range(2);
          W[p][r][c] = (t == 0) ? W_ZERO : (t == 1) ? W_POS : W_NEG;
          if (c < 128) w0[2*c +: 2] = W[p][r][c]; else w1[2*(c-128) +: 2] = W[p][r][c];
        end
        mem.poke(mem_addr_t'('h10000 + p*512 + 2*r), w0);
        mem.poke(mem_addr_t'('h10000 + p*512 + 2*r + 1), w1);
      end
    for (int w = 0; w < PES*R/32; w++) begin
      mem_word_t dw;
      for (int b = 0; b < 32; b++) begin X[w*32+b] = 8'(int'($urandom_range(40)) - 20); dw[b*8 +: 8] = X[w*32+b]; end
      mem.poke(mem_addr_t'('h100 + w), dw);
    end
    // TPU operands
    for (int l = 0; l < 2; l++)
      for (int k = 0; k < klen[l]; k++) begin
        mem_word_t wa, wb;
        wa = '0; wb = '0;
        for (int i = 0; i < N; i++) begin
          A[l][i][k] = (l == 0) ? int'($urandom_range(255)) - 128 : int'($urandom_range(16)) - 8;
          B[l][k][i] = (l == 0) ? int'($urandom_range(255)) - 128 : int'($urandom_range(16)) - 8;
          wa[i*8 +: 8] = 8'(A[l][i][k]);
          wb[i*8 +: 8] = 8'(B[l][k][i]);
        end
        mem.poke(mem_addr_t'('h1000 * (l + 1) + k), wa);
        mem.poke(mem_addr_t'('h1000 * (l + 1) + 'h400 + k), wb);
      end
    repeat (3) @(posedge clk); rst_n = 1;
    t0 = cyc;

    fork
      begin
        d = '0; d.a_base = 'h1000; d.b_base = 'h1400; d.out_base = 'h5000; d.k_len = 24'(klen[0]);
        d.m_rows = 6'(N); d.out_shift = 6;
        tpu_push(d);
        d = '0; d.a_base = 'h2000; d.b_base = 'h2400; d.out_base = 'h6000; d.k_len = 24'(klen[1]);
        d.m_rows = 6'(N); d.softmax = 1;
        tpu_push(d);
        while (tpu_layers_done != 2) @(negedge clk);
      end
      begin
        for (int p = 0; p < PES; p++) begin
          c_ = '0; c_.op = PIM_PROGRAM; c_.bank = BANK; c_.tile = TILE; c_.pe = 5'(p);
          c_.src = mem_addr_t'('h10000 + p*512); c_.rows = 9'(R);
          pim_issue(c_);
          n_program++;
        end
        c_ = '0; c_.op = PIM_MVM; c_.bank = BANK; c_.tile = TILE; c_.src = 'h100; c_.dst = 'h200;
        c_.reduce = 1; c_.pp_mode = PP_BYPASS;
        pim_issue(c_);
        c_.dst = 'h300; c_.reduce = 0; c_.pp_mode = PP_GELU;
        pim_issue(c_);
        c_.dst = 'h400; c_.reduce = 0; c_.pp_mode = PP_LAYERNORM;
        pim_issue(c_);
      end
    join
    repeat (8) @(negedge clk);
    $display("total cycles %0d", cyc - t0);
    check_tpu();

    // row-split MVM: sum of 4 PE partial results >>> 2
    for (int c = 0; c < C; c++) begin
      int e, g;
      e = 0;
      for (int p = 0; p < PES; p++) e += pe_code(p, c, p * R);
      e = e >>> 2;
      g = int'($signed(out_byte('h200, c)));
      checks++;
      if (g > e + 2 || g < e - 2) begin failures++; if (failures < 5) $display("reduce c=%0d got %0d exp %0d", c, g, e); end
      else n_reduce++;
    end
    // broadcast GELU and LayerNorm
    for (int p = 0; p < PES; p++) begin
      int q [C];
      real mean, var_, sd;
      mean = 0; var_ = 0;
      for (int c = 0; c < C; c++) begin q[c] = pe_code(p, c, 0); mean += real'(q[c]); end
      mean /= C;
      for (int c = 0; c < C; c++) var_ += (real'(q[c]) - mean) ** 2;
      sd = $sqrt(var_ / C);
      for (int c = 0; c < C; c++) begin
        int e, g;
        real el;
        e = gelu_q4(q[c]);
        g = int'($signed(out_byte('h300, p*C + c)));
        checks++;
        if (g > e + 2 || g < e - 2) begin failures++; if (failures < 8) $display("gelu p=%0d c=%0d got %0d exp %0d", p, c, g, e); end
        else begin n_gelu++; n_bcast++; end
        el = (real'(q[c]) - mean) / sd * 16.0;
        if (el > 127.0) el = 127.0; if (el < -128.0) el = -128.0;
        g = int'($signed(out_byte('h400, p*C + c)));
        checks++;
        if (fabs(real'(g) - el) > 2.0 + 32.0 / sd) begin
          failures++; if (failures < 8) $display("ln p=%0d c=%0d got %0d exp %f", p, c, g, el);
        end else n_ln++;
      end
    end
    checks += 3;
    if (pim_cmds_done != 16'(PES + 3)) begin failures++; $display("pim_cmds_done %0d", pim_cmds_done); end
    if (tpu_layers_done != 16'd2) failures++;
    // a row-serial crossbar needs at least R cycles per MVM, and programming R cycles per PE
    if (cyc - t0 < 3 * R + PES * R) failures++;

    // every mechanism must have been exercised
    $display("mechanisms: requant=%0d softmax=%0d program=%0d reduce=%0d bcast=%0d gelu=%0d layernorm=%0d contention=%0d lpddr_stalls=%0d",
             n_requant, n_softmax, n_program, n_reduce, n_bcast, n_gelu, n_ln, n_contend, mem.stalls);
    checks += 9;
    if (n_requant == 0) failures++;
    if (n_softmax == 0) failures++;
    if (n_program == 0) failures++;
    if (n_reduce == 0) failures++;
    if (n_bcast == 0) failures++;
    if (n_gelu == 0) failures++;
    if (n_ln == 0) failures++;
    if (n_contend == 0) failures++;
    if (mem.stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
