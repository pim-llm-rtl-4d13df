// tb_dac: checks the DAC model's voltage for every int8 code against
// code * LSB computed in the testbench.
module tb_dac;
  logic signed [7:0] code;
  logic signed [31:0] v;
  int checks = 0, failures = 0;
  dac dut (.code, .v_uv(v));
  initial begin
    for (int c = -128; c < 128; c++) begin
      code = 8'(c); #1;
      checks++;
      if (v != c * 7812) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
