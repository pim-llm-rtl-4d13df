// tb_adc: sweeps column voltages and checks the ADC code against
// round(v / LSB) computed in floating point, with clipping to int8.
module tb_adc;
  logic signed [31:0] v;
  logic signed [7:0] code;
  int checks = 0, failures = 0;
  adc dut (.v_uv(v), .code);
  initial begin
    for (int n = 0; n < 2000; n++) begin
      real r; int e;
      v = 32'(int'($urandom_range(4000000)) - 2000000); #1;
      r = real'(v) / 12375.0;
      e = (r >= 0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
      if (e > 127) e = 127; if (e < -128) e = -128;
      checks++;
      if (int'(code) != e) begin failures++; $display("v %0d code %0d exp %0d", v, code, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
