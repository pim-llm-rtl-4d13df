// sram: synchronous on-chip memory with one write port and one read port,
// used for every SRAM-type buffer in the design (TPU input, weight and
// activation memories; PIM global buffer, bank and tile buffers). A read
// returns the addressed word one cycle after rd_en. A write and a read to
// the same address in one cycle return the old word. Memory contents are not
// reset. The paper gives the TPU 8 MB of SRAM in total but not the port
// structure; one-read-one-write with one-cycle latency is this design's
// choice.
module sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 256,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_en,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
