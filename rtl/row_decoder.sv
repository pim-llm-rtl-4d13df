// row_decoder: crossbar row decoder. During weight programming it turns a
// binary row address into a one-hot word-line select, so that one row of
// device pairs is written per cycle. The paper shows the row decoder beside
// the crossbar without details; a plain enable-gated one-hot decoder is this
// design's choice. Combinational.
module row_decoder #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] wl
);
  always_comb begin
    wl = '0;
    if (en && 32'(addr) < ROWS) wl[addr] = 1'b1;
  end
endmodule
