// pim_tile: one PIM tile: an input buffer, an input distributor, PES PIM PEs,
// the reduction adder (the summing node in the tile drawing) and an output
// buffer, as in the paper's tile. A tile runs one matrix-vector product at a
// time in one of two modes (chosen per start):
//   reduce = 0: every PE gets the same input vector (broadcast) and produces
//     its own COLS outputs, post-processed in the PE; the output buffer then
//     holds PES*COLS int8 values (PE p, column c at byte p*COLS+c);
//   reduce = 1: PE p gets input slice p; the PE outputs (post-processing
//     should be PP_BYPASS) are added column by column in a two-level tree:
//     groups of GROUP PEs are summed at a junction, the junction sums at the
//     central adder. The sum is scaled by 2^-RED_SHIFT and saturated to int8;
//     the output buffer holds COLS values.
// Interface: input buffer write port (in_we/in_addr/in_wdata), crossbar
// programming (prog_*), start/reduce/pp_mode, done pulse, output buffer read
// port (out_re/out_addr/out_rdata, one-cycle latency), n_out_words = number
// of valid output-buffer words of the last run.
// The grouping of 4 PEs per junction follows the tile drawing; the number of
// PEs, the two modes, RED_SHIFT and the buffer sizes are this design's.
module pim_tile
  import pim_llm_pkg::*;
#(
  parameter int unsigned PES       = 4,
  parameter int unsigned GROUP     = 4,
  parameter int unsigned ROWS      = XBAR_ROWS,
  parameter int unsigned COLS      = XBAR_COLS,
  parameter int unsigned RED_SHIFT = 2,
  parameter int unsigned WPR       = (ROWS*ACT_W + MEM_DW - 1) / MEM_DW,
  parameter int unsigned WPC       = (COLS*ACT_W + MEM_DW - 1) / MEM_DW,
  parameter int unsigned IBAW      = $clog2(PES*WPR),
  parameter int unsigned OBAW      = $clog2(PES*WPC),
  parameter int unsigned RAW       = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned PEW       = (PES > 1) ? $clog2(PES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input buffer
  input  logic                  in_we,
  input  logic [IBAW-1:0]       in_addr,
  input  mem_word_t             in_wdata,
  // programming
  input  logic                  prog_en,
  input  logic [PEW-1:0]        prog_pe,
  input  logic [RAW-1:0]        prog_row,
  input  logic [2*COLS-1:0]     prog_data,
  // run
  input  logic                  start,
  input  logic                  reduce,
  input  pp_mode_t              pp_mode,
  output logic                  done,
  output logic [OBAW:0]         n_out_words,
  // output buffer
  input  logic                  out_re,
  input  logic [OBAW-1:0]       out_addr,
  output mem_word_t             out_rdata
);
  localparam int unsigned NG = (PES + GROUP - 1) / GROUP;

  // ---- input buffer + distributor -----------------------------------
  logic                     ib_re, pe_start, dist_busy;
  logic [IBAW-1:0]          ib_raddr;
  mem_word_t                ib_rdata;
  logic [PES-1:0]           x_we;
  logic [$clog2(WPR+1)-1:0] x_widx;
  logic                     red_q;
  pp_mode_t                 mode_q;

  sram #(.DEPTH(PES*WPR), .WIDTH(MEM_DW)) u_in_buf (
    .clk, .we(in_we), .waddr(in_addr), .wdata(in_wdata),
    .rd_en(ib_re), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  input_distributor #(.PES(PES), .WPR(WPR)) u_dist (
    .clk, .rst_n, .start, .reduce,
    .buf_re(ib_re), .buf_addr(ib_raddr),
    .x_we, .x_widx, .pe_start, .busy(dist_busy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      red_q  <= 1'b0;
      mode_q <= PP_BYPASS;
    end else if (start) begin
      red_q  <= reduce;
      mode_q <= pp_mode;
    end
  end

  // ---- PEs ------------------------------------------------------------
  logic [PES-1:0]                    pe_done;
  logic [PES-1:0][COLS-1:0][7:0]     pe_y;

  for (genvar p = 0; p < PES; p++) begin : g_pe
    pim_pe #(.ROWS(ROWS), .COLS(COLS)) u_pe (
      .clk, .rst_n,
      .x_we(x_we[p]), .x_widx, .x_wdata(ib_rdata),
      .prog_en(prog_en && (32'(prog_pe) == p)), .prog_row, .prog_data,
      .start(pe_start), .pp_mode(red_q ? PP_BYPASS : mode_q),
      .done(pe_done[p]), .y(pe_y[p])
    );
  end

  // ---- reduction adder: junctions of GROUP PEs, then the central sum ---
  logic [COLS-1:0][7:0] red_y;
  for (genvar c = 0; c < COLS; c++) begin : g_red
    logic signed [NG-1:0][15:0] junction;
    logic signed [15:0]         total;
    for (genvar g = 0; g < NG; g++) begin : g_junc
      always_comb begin
        junction[g] = '0;
        for (int k = 0; k < GROUP; k++)
          if (g*GROUP + k < PES)
            junction[g] = junction[g] + 16'($signed(pe_y[g*GROUP + k][c]));
      end
    end
    always_comb begin
      total = '0;
      for (int g = 0; g < NG; g++) total = total + junction[g];
    end
    assign red_y[c] = sat8(64'(total >>> RED_SHIFT));
  end

  // ---- output writer ----------------------------------------------------
  logic [OBAW:0]        wcnt;
  logic                 writing;
  logic [COLS*8-1:0]    red_q_vec;
  logic                 ob_we;
  mem_word_t            ob_wdata;
  logic [PES*COLS*8-1:0] all_y;

  assign all_y = pe_y;
  assign n_out_words = red_q ? (OBAW+1)'(WPC) : (OBAW+1)'(PES*WPC);
  assign ob_we    = writing;
  assign ob_wdata = red_q ? red_q_vec[32'(wcnt)*MEM_DW +: MEM_DW]
                          : all_y[32'(wcnt)*MEM_DW +: MEM_DW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      writing   <= 1'b0;
      wcnt      <= '0;
      done      <= 1'b0;
      red_q_vec <= '0;
    end else begin
      done <= 1'b0;
      if (pe_done[0]) begin
        writing   <= 1'b1;
        wcnt      <= '0;
        red_q_vec <= red_y;
      end else if (writing) begin
        if (wcnt == n_out_words - 1) begin
          writing <= 1'b0;
          done    <= 1'b1;
        end else begin
          wcnt <= wcnt + 1'b1;
        end
      end
    end
  end

  sram #(.DEPTH(PES*WPC), .WIDTH(MEM_DW)) u_out_buf (
    .clk, .we(ob_we), .waddr(OBAW'(wcnt)), .wdata(ob_wdata),
    .rd_en(out_re), .raddr(out_addr), .rdata(out_rdata)
  );

  // all PEs of a tile run in lock step
  always_ff @(posedge clk) begin
    if (rst_n && pe_done[0]) a_lockstep: assert (&pe_done) else $error("PEs out of step");
  end
endmodule
