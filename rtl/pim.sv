// pim: the PIM architecture that runs the W1A8 projection layers (W_Q, W_K,
// W_V, W_X and the two feed-forward layers) of a 1-bit LLM: a controller, a
// global buffer and BANKS banks of tiles of crossbar PEs, as in the paper.
// Weights are programmed into the crossbars once (weight-stationary); each
// matrix-vector product moves an int8 input vector from LPDDR through the
// global buffer into a tile and the int8 results back to LPDDR.
// Bank, tile and PE counts are not given by the paper (its drawing shows a
// stack of banks, 12 tiles per bank and 16 PEs per tile); the defaults here
// are this design's. Global buffer: 2^GAW words of 256 bits, the lower half
// for inputs, the upper half for results (size not given by the paper).
module pim
  import pim_llm_pkg::*;
#(
  parameter int unsigned BANKS = 2,
  parameter int unsigned TILES = 4,
  parameter int unsigned PES   = 4,
  parameter int unsigned ROWS  = XBAR_ROWS,
  parameter int unsigned COLS  = XBAR_COLS,
  parameter int unsigned GAW   = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  pim_cmd_t     cmd,
  output logic         busy,
  output logic [15:0]  cmds_done,
  output mem_req_t     mem_req,
  input  logic         mem_req_ready,
  input  mem_rsp_t     mem_rsp
);
  localparam int unsigned WPR  = (ROWS*ACT_W + MEM_DW - 1) / MEM_DW;
  localparam int unsigned WPC  = (COLS*ACT_W + MEM_DW - 1) / MEM_DW;
  localparam int unsigned IBAW = $clog2(PES*WPR);
  localparam int unsigned OBAW = $clog2(PES*WPC);
  localparam int unsigned RAW  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned PEW  = (PES > 1) ? $clog2(PES) : 1;
  localparam int unsigned TW   = (TILES > 1) ? $clog2(TILES) : 1;

  logic             gb_we, gb_re;
  logic [GAW-1:0]   gb_waddr, gb_raddr;
  mem_word_t        gb_wdata, gb_rdata;
  logic [3:0]       bank_sel, tile_sel;
  logic             in_we, prog_en, start, reduce, out_re;
  logic [IBAW-1:0]  in_addr;
  mem_word_t        in_wdata;
  logic [PEW-1:0]   prog_pe;
  logic [RAW-1:0]   prog_row;
  logic [2*COLS-1:0] prog_data;
  pp_mode_t         pp_mode;
  logic [OBAW-1:0]  out_addr;

  logic [BANKS-1:0]          b_done;
  logic [BANKS-1:0][OBAW:0]  b_nout;
  mem_word_t                 b_rdata [BANKS];
  logic [$clog2(BANKS+1)-1:0] bsel;
  assign bsel = $clog2(BANKS+1)'(bank_sel);

  pim_controller #(.PES(PES), .ROWS(ROWS), .COLS(COLS), .GAW(GAW)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .busy, .cmds_done,
    .mem_req, .mem_req_ready, .mem_rsp,
    .gb_we, .gb_waddr, .gb_wdata, .gb_re, .gb_raddr, .gb_rdata,
    .bank_sel, .tile_sel, .in_we, .in_addr, .in_wdata,
    .prog_en, .prog_pe, .prog_row, .prog_data,
    .start, .reduce, .pp_mode,
    .bank_done(b_done[bsel]), .bank_nout(b_nout[bsel]),
    .out_re, .out_addr, .out_rdata(b_rdata[bsel])
  );

  sram #(.DEPTH(1 << GAW), .WIDTH(MEM_DW)) u_global_buf (
    .clk, .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata),
    .rd_en(gb_re), .raddr(gb_raddr), .rdata(gb_rdata)
  );

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic sel;
    assign sel = (32'(bank_sel) == b);
    pim_bank #(.TILES(TILES), .PES(PES), .ROWS(ROWS), .COLS(COLS)) u_bank (
      .clk, .rst_n,
      .tile_sel(TW'(tile_sel)),
      .in_we(in_we && sel), .in_addr, .in_wdata,
      .prog_en(prog_en && sel), .prog_pe, .prog_row, .prog_data,
      .start(start && sel), .reduce, .pp_mode,
      .done(b_done[b]), .n_out_words(b_nout[b]),
      .out_re(out_re && sel), .out_addr, .out_rdata(b_rdata[b])
    );
  end
endmodule
