// tpu: the LLM-specific TPU that runs the 8-bit activation-to-activation
// MatMuls of the attention heads (Score = Q.K^T and V.Score). It follows the
// paper's block diagram: input memory, weight memory and activation memory
// (SRAM), a ROWS x COLS output-stationary systolic array of 8-bit MAC PEs, a
// nonlinear functional unit (one ConSmax lane per array column), a scheduler,
// a dataflow generator and a main controller. The cached Key and Value
// matrices go to the weight memory, the Query and score vectors to the input
// memory, as in the paper.
//
// Host side: descriptors (tpu_desc_t) are pushed through cmd_valid/cmd_ready;
// layers_done counts finished descriptors. Memory side: one LPDDR master
// port (mem_req_t with req_ready, in-order mem_rsp_t). Each word is
// ROWS (= COLS) int8 values.
//
// Memory sizes: the paper gives 8 MB of SRAM for the TPU; the split into
// 2 MB input, 4 MB weight and 2 MB activation memory is this design's.
module tpu
  import pim_llm_pkg::*;
#(
  parameter int unsigned ROWS      = SA_DIM,
  parameter int unsigned COLS      = SA_DIM,
  parameter int unsigned IN_DEPTH  = 65536,    // 2 MB of ROWS-byte words
  parameter int unsigned W_DEPTH   = 131072,   // 4 MB of COLS-byte words
  parameter int unsigned ACT_DEPTH = 65536,    // 2 MB
  parameter int unsigned CS_IN_FRAC      = 10,
  parameter int          CS_BETA_Q8      = 0,
  parameter int unsigned CS_INV_GAMMA_Q8 = 8,
  parameter int unsigned QDEPTH    = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // host
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  tpu_desc_t   cmd,
  output logic        busy,
  output logic [15:0] layers_done,
  // LPDDR master
  output mem_req_t    mem_req,
  input  logic        mem_req_ready,
  input  mem_rsp_t    mem_rsp
);
  localparam int unsigned MAXD = (W_DEPTH > IN_DEPTH) ? W_DEPTH : IN_DEPTH;
  localparam int unsigned SAW  = $clog2(MAXD);
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1;

  // scheduler <-> controller
  logic      issue, layer_done;
  tpu_desc_t issue_desc;
  logic      sched_busy;

  tpu_scheduler #(.DEPTH(QDEPTH)) u_sched (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .issue, .issue_desc, .layer_done,
    .busy(sched_busy), .layers_done
  );
  assign busy = sched_busy;

  // controller <-> dataflow generator
  logic        dg_start, dg_busy, dg_done, load_b;
  dg_mode_t    dg_mode;
  logic [23:0] dg_count;
  mem_addr_t   dg_base;
  logic        drain_valid, softmax;
  logic [RW-1:0] drain_row;
  logic [4:0]  out_shift;

  tpu_controller #(.ROWS(ROWS)) u_ctrl (
    .clk, .rst_n,
    .start(issue), .desc(issue_desc), .done(layer_done),
    .dg_start, .dg_mode, .dg_count, .dg_base, .dg_busy, .dg_done, .load_b,
    .drain_valid, .drain_row, .softmax, .out_shift
  );

  logic            sram_we, sram_re, arr_valid, arr_first;
  logic [SAW-1:0]  sram_waddr, sram_raddr;
  mem_word_t       sram_wdata, act_rdata;

  dataflow_generator #(.SAW(SAW), .FLUSH(ROWS+COLS)) u_dg (
    .clk, .rst_n,
    .start(dg_start), .mode(dg_mode), .count(dg_count), .mem_base(dg_base),
    .busy(dg_busy), .done(dg_done),
    .req(mem_req), .req_ready(mem_req_ready), .rsp(mem_rsp),
    .sram_we, .sram_waddr, .sram_wdata, .sram_re, .sram_raddr,
    .sram_rdata(act_rdata),
    .arr_valid, .arr_first
  );

  // ---- memories -----------------------------------------------------
  logic [ROWS*ACT_W-1:0] in_rdata;
  logic [COLS*ACT_W-1:0] w_rdata;
  logic                  comp_re, store_re;
  assign comp_re  = sram_re && (dg_mode == DG_COMPUTE);
  assign store_re = sram_re && (dg_mode == DG_STORE);

  sram #(.DEPTH(IN_DEPTH), .WIDTH(ROWS*ACT_W)) u_input_mem (
    .clk,
    .we(sram_we && !load_b), .waddr(sram_waddr[$clog2(IN_DEPTH)-1:0]),
    .wdata(sram_wdata[ROWS*ACT_W-1:0]),
    .rd_en(comp_re), .raddr(sram_raddr[$clog2(IN_DEPTH)-1:0]), .rdata(in_rdata)
  );

  sram #(.DEPTH(W_DEPTH), .WIDTH(COLS*ACT_W)) u_weight_mem (
    .clk,
    .we(sram_we && load_b), .waddr(sram_waddr[$clog2(W_DEPTH)-1:0]),
    .wdata(sram_wdata[COLS*ACT_W-1:0]),
    .rd_en(comp_re), .raddr(sram_raddr[$clog2(W_DEPTH)-1:0]), .rdata(w_rdata)
  );

  // ---- systolic array ------------------------------------------------
  logic signed [ACT_W-1:0] a_col [ROWS];
  logic signed [ACT_W-1:0] b_row [COLS];
  logic signed [ACC_W-1:0] acc   [ROWS][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_a
    assign a_col[i] = in_rdata[i*ACT_W +: ACT_W];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_b
    assign b_row[j] = w_rdata[j*ACT_W +: ACT_W];
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .in_valid(arr_valid), .clear(arr_first),
    .a_col, .b_row, .acc
  );

  // ---- drain: nonlinear unit or requantisation, one row per cycle ----
  logic [COLS*ACT_W-1:0] act_wdata;
  logic                  act_we;
  logic [RW-1:0]         act_waddr;
  logic [COLS*ACT_W-1:0] rq_row;
  logic                  sm_d;

  for (genvar j = 0; j < COLS; j++) begin : g_nfu
    logic       pv;
    logic [7:0] prob;
    consmax_unit #(
      .IN_FRAC(CS_IN_FRAC), .BETA_Q8(CS_BETA_Q8), .INV_GAMMA_Q8(CS_INV_GAMMA_Q8)
    ) u_consmax (
      .clk, .rst_n,
      .in_valid(drain_valid && softmax),
      .score(acc[drain_row][j]),
      .out_valid(pv), .prob(prob)
    );
    always_ff @(posedge clk) begin
      if (drain_valid)
        rq_row[j*ACT_W +: ACT_W] <= sat8(64'(acc[drain_row][j] >>> out_shift));
    end
    assign act_wdata[j*ACT_W +: ACT_W] = sm_d ? prob : rq_row[j*ACT_W +: ACT_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_we    <= 1'b0;
      act_waddr <= '0;
      sm_d      <= 1'b0;
    end else begin
      act_we    <= drain_valid;
      act_waddr <= drain_row;
      sm_d      <= softmax;
    end
  end

  logic [COLS*ACT_W-1:0] act_rd;
  sram #(.DEPTH(ACT_DEPTH), .WIDTH(COLS*ACT_W)) u_act_mem (
    .clk,
    .we(act_we), .waddr($clog2(ACT_DEPTH)'(act_waddr)), .wdata(act_wdata),
    .rd_en(store_re), .raddr(sram_raddr[$clog2(ACT_DEPTH)-1:0]), .rdata(act_rd)
  );
  assign act_rdata = mem_word_t'(act_rd);
endmodule
