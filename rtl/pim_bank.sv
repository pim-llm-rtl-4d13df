// pim_bank: one PIM bank: TILES tiles joined by the bank's on-chip network,
// and the bank output buffer. The paper says that tiles are interconnected by
// a network-on-chip but not how; here the network is the simplest one that
// does the job, a shared bus addressed by tile_sel: requests (input-buffer
// writes, programming, start) go to the selected tile only, and the selected
// tile's output buffer is read back over the same bus. When the selected tile
// finishes, the bank copies its n_out_words result words (one per cycle)
// into the bank output buffer and then pulses `done`; the controller reads
// the results from there (out_re/out_addr/out_rdata, one-cycle latency).
module pim_bank
  import pim_llm_pkg::*;
#(
  parameter int unsigned TILES = 4,
  parameter int unsigned PES   = 4,
  parameter int unsigned ROWS  = XBAR_ROWS,
  parameter int unsigned COLS  = XBAR_COLS,
  parameter int unsigned WPR   = (ROWS*ACT_W + MEM_DW - 1) / MEM_DW,
  parameter int unsigned WPC   = (COLS*ACT_W + MEM_DW - 1) / MEM_DW,
  parameter int unsigned IBAW  = $clog2(PES*WPR),
  parameter int unsigned OBAW  = $clog2(PES*WPC),
  parameter int unsigned RAW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned PEW   = (PES > 1) ? $clog2(PES) : 1,
  parameter int unsigned TW    = (TILES > 1) ? $clog2(TILES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TW-1:0]      tile_sel,
  input  logic               in_we,
  input  logic [IBAW-1:0]    in_addr,
  input  mem_word_t          in_wdata,
  input  logic               prog_en,
  input  logic [PEW-1:0]     prog_pe,
  input  logic [RAW-1:0]     prog_row,
  input  logic [2*COLS-1:0]  prog_data,
  input  logic               start,
  input  logic               reduce,
  input  pp_mode_t           pp_mode,
  output logic               done,
  output logic [OBAW:0]      n_out_words,
  input  logic               out_re,
  input  logic [OBAW-1:0]    out_addr,
  output mem_word_t          out_rdata
);
  logic [TILES-1:0]          t_done;
  logic [TILES-1:0][OBAW:0]  t_nout;
  mem_word_t                 t_rdata [TILES];
  logic                      cp_re;
  logic [OBAW-1:0]           cp_addr;

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    logic sel;
    assign sel = (32'(tile_sel) == t);
    pim_tile #(.PES(PES), .ROWS(ROWS), .COLS(COLS)) u_tile (
      .clk, .rst_n,
      .in_we(in_we && sel), .in_addr, .in_wdata,
      .prog_en(prog_en && sel), .prog_pe, .prog_row, .prog_data,
      .start(start && sel), .reduce, .pp_mode,
      .done(t_done[t]), .n_out_words(t_nout[t]),
      .out_re(cp_re && sel), .out_addr(cp_addr), .out_rdata(t_rdata[t])
    );
  end

  // ---- copy selected tile's results into the bank output buffer ---------
  logic          copying, rd_d;
  logic [OBAW:0] cnt, cnt_d, nwords;
  assign cp_re   = copying && (cnt < nwords);
  assign cp_addr = OBAW'(cnt);
  assign n_out_words = nwords;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      copying <= 1'b0;
      cnt     <= '0;
      cnt_d   <= '0;
      rd_d    <= 1'b0;
      nwords  <= '0;
      done    <= 1'b0;
    end else begin
      done  <= 1'b0;
      rd_d  <= cp_re;
      cnt_d <= cnt;
      if (!copying) begin
        if (t_done[tile_sel]) begin
          copying <= 1'b1;
          cnt     <= '0;
          nwords  <= t_nout[tile_sel];
        end
      end else begin
        if (cnt < nwords) cnt <= cnt + 1'b1;
        if (rd_d && cnt_d == nwords - 1) begin
          copying <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  sram #(.DEPTH(PES*WPC), .WIDTH(MEM_DW)) u_bank_obuf (
    .clk, .we(rd_d), .waddr(OBAW'(cnt_d)), .wdata(t_rdata[tile_sel]),
    .rd_en(out_re), .raddr(out_addr), .rdata(out_rdata)
  );
endmodule
