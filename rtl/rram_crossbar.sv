// rram_crossbar: behavioural model of a ROWS x COLS memristive (RRAM)
// crossbar with differential sensing, as in the paper's PIM PE. Not a
// synthesizable circuit: it models analog behaviour with integer quantities
// (voltages in uV, conductances in uS, currents in pA).
//
// Each ternary weight is a pair of devices (G+, G-) on two bit lines:
//   W_POS: G+ = G_ON, G- = G_OFF;  W_NEG: G+ = G_OFF, G- = G_ON;
//   W_ZERO: both G_OFF.
// With row voltages v_i, Ohm's and Kirchhoff's laws give the column currents
// I+_j = sum_i v_i G+_ij and I-_j = sum_i v_i G-_ij; a differential
// transimpedance amplifier returns v_out_j = (I+_j - I-_j) * R_F. The G_OFF
// leakage cancels in the difference, so the model accumulates
// (G_ON - G_OFF) * sum_i (+-v_i). The differential pair encoding follows the
// paper; device values, the amplifier and the ideal (noise-free,
// wire-resistance-free) behaviour are this design's assumptions.
//
// Programming: when prog_en is high, the row whose word line is set in the
// one-hot `wl` takes prog_data (COLS ternary codes, column j in bits
// 2j+1:2j). The array is not reset (RRAM is non-volatile); rows are
// programmed before use.
// Evaluation: `eval` samples the row voltages. The model integrates the
// bit-line currents one row per clock, so v_out is valid (out_valid pulse)
// ROWS+1 cycles after eval; the real array settles in one analog read. This
// row-serial integration is a modelling choice that keeps the model's size
// linear in ROWS + COLS.
module rram_crossbar
  import pim_llm_pkg::*;
#(
  parameter int unsigned ROWS     = XBAR_ROWS,
  parameter int unsigned COLS     = XBAR_COLS,
  parameter int unsigned G_ON_US  = 100,    // low-resistance state, 10 kOhm
  parameter int unsigned G_OFF_US = 1,      // high-resistance state, 1 MOhm
  parameter int unsigned R_F_OHM  = 1000    // transimpedance gain
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // programming
  input  logic                          prog_en,
  input  logic [ROWS-1:0]               wl,
  input  logic [2*COLS-1:0]             prog_data,
  // evaluation
  input  logic                          eval,
  input  logic signed [ROWS-1:0][31:0]  v_in,
  output logic                          busy,
  output logic                          out_valid,
  output logic signed [COLS-1:0][31:0]  v_out
);
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1;
  // amplifier gain (G_ON - G_OFF) * R_F as a Q16 factor
  localparam longint GAIN_Q16 =
    ((longint'(G_ON_US) - longint'(G_OFF_US)) * longint'(R_F_OHM) * 65536 + 500000) / 1000000;

  // device-pair states, one word per row
  logic [2*COLS-1:0] pairs [ROWS];
  logic [RAW-1:0]    prog_row;

  always_comb begin
    prog_row = '0;
    for (int r = 0; r < ROWS; r++) if (wl[r]) prog_row = RAW'(r);
  end

  always_ff @(posedge clk) begin
    if (prog_en) pairs[prog_row] <= prog_data;
  end

  // row-serial integration of the bit-line currents
  logic signed [ROWS-1:0][31:0] v_hold;   // sampled row voltages
  logic [RAW-1:0]               row;
  logic                         fin;
  logic [2*COLS-1:0]            row_pairs;
  logic signed [31:0]           vrow;     // voltage of the row being added

  assign row_pairs = pairs[row];
  assign vrow      = v_hold[row];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      fin       <= 1'b0;
      row       <= '0;
      out_valid <= 1'b0;
      v_hold    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (eval) begin
          v_hold <= v_in;
          row    <= '0;
          busy   <= 1'b1;
        end
      end else if (!fin) begin
        if (32'(row) == ROWS - 1) fin <= 1'b1;
        else                      row <= row + 1'b1;
      end else begin
        out_valid <= 1'b1;
        busy      <= 1'b0;
        fin       <= 1'b0;
      end
    end
  end

  // one bit-line pair per column: running sum of +-v_i (uV), then the
  // differential amplifier
  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [31:0] isum, vo;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        isum <= '0;
        vo   <= '0;
      end else if (!busy) begin
        if (eval) isum <= '0;
      end else if (!fin) begin
        if (row_pairs[2*c +: 2] == W_POS)      isum <= isum + vrow;
        else if (row_pairs[2*c +: 2] == W_NEG) isum <= isum - vrow;
      end else begin
        vo <= 32'((64'(isum) * GAIN_Q16) >>> 16);
      end
    end
    assign v_out[c] = vo;
  end
endmodule
