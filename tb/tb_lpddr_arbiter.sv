// tb_lpddr_arbiter: self-checking test of the two-master LPDDR arbiter.
// Two random masters issue reads and writes to disjoint address ranges of the
// LPDDR model, which drops ready on random cycles and returns reads in order
// after a fixed latency. Each master keeps a queue of the data it expects
// back; every response must arrive at the master that asked, in order and
// with the right data. While both masters request, grants must alternate, so
// in a long run each master wins at least a third of the contested cycles.
// A run of 2000 cycles is bounded by the watchdog.
module tb_lpddr_arbiter;
  import pim_llm_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t m_req [2];
  logic     m_ready [2];
  mem_rsp_t m_rsp [2];
  mem_req_t s_req; logic s_ready; mem_rsp_t s_rsp;
  int checks = 0, failures = 0;
  mem_word_t shadow [2][16];
  mem_word_t expq [2][$];
  int contested = 0, wins [2] = '{0, 0};

  lpddr_arbiter dut (.clk, .rst_n,
    .m0_req(m_req[0]), .m0_ready(m_ready[0]), .m0_rsp(m_rsp[0]),
    .m1_req(m_req[1]), .m1_ready(m_ready[1]), .m1_rsp(m_rsp[1]),
    .s_req, .s_ready, .s_rsp);
  lpddr_model mem (.clk, .rst_n, .req(s_req), .ready(s_ready), .rsp(s_rsp));
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  for (genvar m = 0; m < 2; m++) begin : g_m
    always @(posedge clk) if (rst_n) begin
      if (m_rsp[m].valid) begin
        checks++;
        if (expq[m].size() == 0) failures++;
        else begin
          mem_word_t e; e = expq[m].pop_front();
          if (m_rsp[m].rdata != e) begin failures++; if (failures < 5) $display("master %0d wrong read data", m); end
        end
      end
    end
  end
  always @(posedge clk) if (rst_n && m_req[0].valid && m_req[1].valid && s_ready) begin
    contested++;
    if (m_ready[1]) wins[1]++; else if (m_ready[0]) wins[0]++;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      m_req[m] = '0;
      for (int a = 0; a < 16; a++) begin
        shadow[m][a] = {8{$urandom}};
        mem.poke(mem_addr_t'(m * 'h100 + a), shadow[m][a]);
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      // a master whose request was taken at the last edge picks a new one
      for (int m = 0; m < 2; m++)
        if (!m_req[m].valid || m_ready[m]) begin
          m_req[m] = '0;
          if (cyc < 1900 && $urandom_range(99) < 80) begin
            int a; a = $urandom_range(15);
            m_req[m].valid = 1'b1;
            m_req[m].addr  = mem_addr_t'(m * 'h100 + a);
            m_req[m].we    = ($urandom_range(3) == 0);
            m_req[m].wdata = {8{$urandom}};
          end
        end
      // commit what will be accepted at the next edge (ready is combinational)
      #1;
      for (int m = 0; m < 2; m++)
        if (m_req[m].valid && m_ready[m]) begin
          int a; a = int'(m_req[m].addr) - m * 'h100;
          if (m_req[m].we) shadow[m][a] = m_req[m].wdata;
          else expq[m].push_back(shadow[m][a]);
        end
    end
    repeat (20) @(negedge clk);
    checks += 4;
    if (expq[0].size() != 0 || expq[1].size() != 0) begin failures++; $display("reads never answered"); end
    if (contested == 0) failures++;
    if (wins[0] * 3 < contested || wins[1] * 3 < contested) begin failures++; $display("unfair: %0d/%0d of %0d", wins[0], wins[1], contested); end
    if (mem.stalls == 0) failures++;
    $display("contested %0d, wins %0d/%0d, stalls %0d", contested, wins[0], wins[1], mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
