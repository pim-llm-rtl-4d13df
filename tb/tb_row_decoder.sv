// tb_row_decoder: checks that every row address selects exactly its word
// line when enabled and none when disabled.
module tb_row_decoder;
  logic en; logic [7:0] addr; logic [255:0] wl;
  int checks = 0, failures = 0;
  row_decoder dut (.en, .addr, .wl);
  initial begin
    for (int r = 0; r < 256; r++) begin
      en = 1; addr = 8'(r); #1;
      checks++; if (wl != (256'(1) << r)) failures++;
      en = 0; #1;
      checks++; if (wl != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
