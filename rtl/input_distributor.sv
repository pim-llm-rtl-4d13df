// input_distributor: moves an input vector from the tile's input buffer into
// the input registers of the tile's PEs, then starts them. The paper shows
// the input distributor feeding the PEs from the input buffer; the two
// distribution patterns are this design's:
//   reduce = 0 (broadcast): buffer words 0..WPR-1 go to every PE, so all PEs
//     see the same input (each PE holds different output columns);
//   reduce = 1 (slice): buffer words p*WPR .. p*WPR+WPR-1 go to PE p, so each
//     PE holds a different slice of a long input (row split; the tile adds
//     the PE outputs).
// One buffer word is read per cycle (one-cycle SRAM latency); pe_start
// pulses one cycle after the last register write.
module input_distributor
  import pim_llm_pkg::*;
#(
  parameter int unsigned PES = 4,
  parameter int unsigned WPR = 8,                    // words per PE input
  parameter int unsigned BAW = $clog2(PES*WPR)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      reduce,
  // input buffer read port
  output logic                      buf_re,
  output logic [BAW-1:0]            buf_addr,
  // PE input registers
  output logic [PES-1:0]            x_we,
  output logic [$clog2(WPR+1)-1:0]  x_widx,
  output logic                      pe_start,
  output logic                      busy
);
  localparam int unsigned NW = PES * WPR;

  logic             red_q, rd_d;
  logic [BAW:0]     cnt, cnt_d;
  logic [BAW:0]     total;

  assign total    = red_q ? (BAW+1)'(NW) : (BAW+1)'(WPR);
  assign buf_re   = busy && (cnt < total);
  assign buf_addr = BAW'(cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      red_q    <= 1'b0;
      cnt      <= '0;
      cnt_d    <= '0;
      rd_d     <= 1'b0;
      pe_start <= 1'b0;
    end else begin
      pe_start <= 1'b0;
      rd_d     <= buf_re;
      cnt_d    <= cnt;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          red_q <= reduce;
          cnt   <= '0;
        end
      end else begin
        if (cnt < total) cnt <= cnt + 1'b1;
        if (rd_d && cnt_d == total - 1) begin
          busy     <= 1'b0;
          pe_start <= 1'b1;
        end
      end
    end
  end

  // write the word read in the previous cycle
  always_comb begin
    x_we   = '0;
    x_widx = '0;
    if (rd_d) begin
      x_widx = $clog2(WPR+1)'(32'(cnt_d) % WPR);
      if (red_q) x_we[32'(cnt_d) / WPR] = 1'b1;
      else       x_we = '1;
    end
  end
endmodule
