// tb_sram: writes random words to random addresses of a small SRAM, then
// reads them back and checks data and the one-cycle read latency, including
// a read of an address written in the same cycle (old data expected).
module tb_sram;
  localparam int D = 64, W = 256;
  logic clk = 0, we = 0, rd_en = 0;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;
  sram #(.DEPTH(D), .WIDTH(W)) dut (.clk, .we, .waddr, .wdata, .rd_en, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i);
      wdata = {8{$urandom}}; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      logic [5:0] a; logic [W-1:0] expd;
      a = 6'($urandom);
      @(negedge clk); rd_en = 1; raddr = a;
      we = ($urandom_range(1) == 1); waddr = a; wdata = {8{$urandom}};
      expd = shadow[a];
      if (we) shadow[a] = wdata;
      @(negedge clk); rd_en = 0; we = 0;
      checks++;
      if (rdata !== expd) begin failures++; $display("addr %0d mismatch", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
