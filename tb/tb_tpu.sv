// tb_tpu: self-checking test of the TPU (scheduler, main controller, dataflow
// generator, the three on-chip memories, the 32x32 systolic array, the
// ConSmax lanes and the requantiser) against the LPDDR model. Two descriptors
// are queued back to back:
//   1. requantised MatMul  C = sat8((A x B) >>> 6), K = 40;
//   2. softmax MatMul      P = ConSmax(A x B),       K = 24.
// A is stored column-wise (word k = A[0..31][k]) and B row-wise (word k =
// B[k][0..31]); result row i is written to out_base + i. The reference is
// computed here: exact for the requantised case, exp(s/1024)/32 in floating
// point with a 10 % + 2 LSB band for the table-based ConSmax. The cycle count
// of each layer must lie between the pure streaming bound (2K loads + K
// compute + array flush + 32 drain + 32 stores) and four times that.
// The memories are shrunk to 256 words to keep the simulation small.
module tb_tpu;
  import pim_llm_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  tpu_desc_t cmd;
  logic [15:0] layers_done;
  mem_req_t req; logic ready; mem_rsp_t rsp;
  int checks = 0, failures = 0;
  int A [2][N][64], B [2][64][N];
  int klen [2] = '{40, 24};

  tpu #(.IN_DEPTH(256), .W_DEPTH(256), .ACT_DEPTH(256)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .layers_done,
    .mem_req(req), .mem_req_ready(ready), .mem_rsp(rsp));
  lpddr_model mem (.clk, .rst_n, .req, .ready, .rsp);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  int cyc = 0, t_start = 0, t_l0 = 0, t_l1 = 0;
  always @(posedge clk) begin
    cyc++;
    if (layers_done == 1 && t_l0 == 0) t_l0 = cyc;
    if (layers_done == 2 && t_l1 == 0) t_l1 = cyc;
  end

  task automatic push(tpu_desc_t d);
    @(negedge clk); cmd = d; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    tpu_desc_t d;
    cmd = '0;
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
    @(negedge clk); t_start = cyc;
    d = '0; d.a_base = 'h1000; d.b_base = 'h1400; d.out_base = 'h5000; d.k_len = 24'(klen[0]);
    d.m_rows = 6'(N); d.softmax = 0; d.out_shift = 6;
    push(d);
    d = '0; d.a_base = 'h2000; d.b_base = 'h2400; d.out_base = 'h6000; d.k_len = 24'(klen[1]);
    d.m_rows = 6'(N); d.softmax = 1;
    push(d);
    while (layers_done != 2) @(negedge clk);
    repeat (4) @(negedge clk);

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
          end else begin
            real p;
            p = $exp(real'(s) / 1024.0) / 32.0 * 256.0;
            if (p > 255.0) p = 255.0;
            g = int'(w[j*8 +: 8]);
            if (fabs(real'(g) - p) > 0.1 * p + 2.0) begin
              failures++; if (failures < 5) $display("sm %0d %0d got %0d exp %f", i, j, g, p);
            end
          end
        end
      end
    // cycle-count bounds per layer
    begin
      int lo0, lo1, c0, c1;
      lo0 = 3 * klen[0] + 2 * N + 2 * N; lo1 = 3 * klen[1] + 2 * N + 2 * N;
      c0 = t_l0 - t_start; c1 = t_l1 - t_l0;
      $display("layer cycles: %0d (bound %0d), %0d (bound %0d)", c0, lo0, c1, lo1);
      checks += 2;
      if (c0 < lo0 || c0 > 4 * lo0 + 200) failures++;
      if (c1 < lo1 || c1 > 4 * lo1 + 200) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
