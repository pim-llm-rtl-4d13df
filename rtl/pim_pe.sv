// pim_pe: one processing element of a PIM tile: DACs, a memristive crossbar
// with its row decoder, ADCs and a post-processing unit, as in the paper's
// PE. It computes y = PP(ADC(W^T x)) for a ternary ROWS x COLS weight matrix W
// held in the crossbar and an int8 input vector x.
//   Input register: x is written 32 int8 values (one 256-bit word) at a time
//     through x_we / x_widx / x_wdata; it drives one DAC per row.
//   Programming: prog_en writes crossbar row prog_row (through the row
//     decoder) with prog_data, COLS ternary codes.
//   start: the crossbar samples the DAC voltages; when the (row-serial)
//     crossbar model has integrated all rows the ADC codes go into the
//     post-processing unit; `done` pulses when y is valid.
// Latency: ROWS+2 cycles plus the post-processing time (1 cycle bypass or
// GELU, 39 cycles LayerNorm). One DAC per row and one ADC per column are
// this design's assumptions; the paper does not say how converters are
// shared.
module pim_pe
  import pim_llm_pkg::*;
#(
  parameter int unsigned ROWS       = XBAR_ROWS,
  parameter int unsigned COLS       = XBAR_COLS,
  parameter int unsigned DAC_LSB_UV = 7812,
  parameter int unsigned ADC_LSB_UV = 12375,
  parameter int unsigned G_ON_US    = 100,
  parameter int unsigned G_OFF_US   = 1,
  parameter int unsigned R_F_OHM    = 1000,
  parameter int unsigned WPR        = (ROWS*ACT_W + MEM_DW - 1) / MEM_DW,
  parameter int unsigned RAW        = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input register
  input  logic                          x_we,
  input  logic [$clog2(WPR+1)-1:0]      x_widx,
  input  mem_word_t                     x_wdata,
  // weight programming
  input  logic                          prog_en,
  input  logic [RAW-1:0]                prog_row,
  input  logic [2*COLS-1:0]             prog_data,
  // compute
  input  logic                          start,
  input  pp_mode_t                      pp_mode,
  output logic                          done,
  output logic signed [COLS-1:0][7:0]   y
);
  // ---- input register (one int8 per crossbar row) --------------------
  logic [WPR*MEM_DW-1:0] x_reg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    x_reg <= '0;
    else if (x_we) x_reg[32'(x_widx)*MEM_DW +: MEM_DW] <= x_wdata;
  end

  // ---- DACs ------------------------------------------------------------
  logic signed [ROWS-1:0][31:0] v_row;
  for (genvar r = 0; r < ROWS; r++) begin : g_dac
    dac #(.BITS(ACT_W), .LSB_UV(DAC_LSB_UV)) u_dac (
      .code(x_reg[r*ACT_W +: ACT_W]),
      .v_uv(v_row[r])
    );
  end

  // ---- row decoder + crossbar -------------------------------------------
  logic [ROWS-1:0] wl;
  row_decoder #(.ROWS(ROWS)) u_rowdec (.en(prog_en), .addr(prog_row), .wl(wl));

  logic                         xb_valid, xb_busy;
  logic signed [COLS-1:0][31:0] v_col;
  rram_crossbar #(
    .ROWS(ROWS), .COLS(COLS), .G_ON_US(G_ON_US), .G_OFF_US(G_OFF_US), .R_F_OHM(R_F_OHM)
  ) u_xbar (
    .clk, .rst_n,
    .prog_en, .wl, .prog_data,
    .eval(start), .v_in(v_row),
    .busy(xb_busy), .out_valid(xb_valid), .v_out(v_col)
  );

  // ---- ADCs --------------------------------------------------------------
  logic signed [COLS-1:0][7:0] code;
  for (genvar c = 0; c < COLS; c++) begin : g_adc
    adc #(.BITS(8), .LSB_UV(ADC_LSB_UV)) u_adc (.v_uv(v_col[c]), .code(code[c]));
  end

  // ---- post-processing -----------------------------------------------
  pp_mode_t mode_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     mode_q <= PP_BYPASS;
    else if (start) mode_q <= pp_mode;
  end

  post_processing_unit #(.N(COLS)) u_ppu (
    .clk, .rst_n,
    .start(xb_valid), .mode(mode_q), .x(code),
    .done, .y
  );

  // a new product is only started on an idle crossbar
  always_ff @(posedge clk) begin
    if (rst_n && start) a_start_idle: assert (!xb_busy) else $error("start while crossbar busy");
  end
endmodule
