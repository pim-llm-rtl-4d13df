// tb_tpu_pe: drives random int8 operand pairs into one systolic PE and
// checks the accumulated sum, the clear behaviour and the one-cycle operand
// forwarding against a reference sum kept in the testbench.
module tb_tpu_pe;
  logic clk = 0, rst_n = 0, clear;
  logic signed [7:0] a, b, ao, bo;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  longint ref_acc;
  tpu_pe dut (.clk, .rst_n, .clear, .a_in(a), .b_in(b), .a_out(ao), .b_out(bo), .acc);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    clear = 0; a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      clear = (n % 50 == 0);
      a = 8'($urandom); b = 8'($urandom);
      if (clear) ref_acc = 0;
      ref_acc += longint'(a) * longint'(b);
      @(posedge clk); #1;
      checks += 3;
      if (acc != 32'(ref_acc)) begin failures++; $display("acc %0d exp %0d", acc, ref_acc); end
      if (ao != a) failures++;
      if (bo != b) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
