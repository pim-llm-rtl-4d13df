// pim_llm_top: the hybrid PIM-LLM accelerator. The PIM part (crossbar banks)
// runs the low-precision W1A8 projection layers; the TPU (32 x 32
// output-stationary systolic array) runs the 8-bit attention-head MatMuls
// Q.K^T and V.Score with ConSmax softmax in between. Both read and write the
// LPDDR memory, which holds weights, activations and the key/value cache; the
// host CPU queues work on each side and watches their status.
// Ports: a TPU descriptor queue port and a PIM command port (host side),
// status counters, and one LPDDR port (valid/ready request, in-order read
// response) shared through a round-robin arbiter. LPDDR and the CPU are
// outside this design.
module pim_llm_top
  import pim_llm_pkg::*;
#(
  parameter int unsigned PIM_BANKS = 2,
  parameter int unsigned PIM_TILES = 4,
  parameter int unsigned PIM_PES   = 4,
  parameter int unsigned XB_ROWS   = XBAR_ROWS,
  parameter int unsigned XB_COLS   = XBAR_COLS,
  parameter int unsigned SA_ROWS   = SA_DIM,
  parameter int unsigned SA_COLS   = SA_DIM,
  parameter int unsigned TPU_IN_DEPTH  = 65536,
  parameter int unsigned TPU_W_DEPTH   = 131072,
  parameter int unsigned TPU_ACT_DEPTH = 65536
) (
  input  logic         clk,
  input  logic         rst_n,
  // host: TPU
  input  logic         tpu_cmd_valid,
  output logic         tpu_cmd_ready,
  input  tpu_desc_t    tpu_cmd,
  output logic         tpu_busy,
  output logic [15:0]  tpu_layers_done,
  // host: PIM
  input  logic         pim_cmd_valid,
  output logic         pim_cmd_ready,
  input  pim_cmd_t     pim_cmd,
  output logic         pim_busy,
  output logic [15:0]  pim_cmds_done,
  // LPDDR
  output mem_req_t     mem_req,
  input  logic         mem_req_ready,
  input  mem_rsp_t     mem_rsp
);
  mem_req_t tpu_req, pim_req;
  logic     tpu_ready, pim_ready;
  mem_rsp_t tpu_rsp, pim_rsp;

  tpu #(
    .ROWS(SA_ROWS), .COLS(SA_COLS),
    .IN_DEPTH(TPU_IN_DEPTH), .W_DEPTH(TPU_W_DEPTH), .ACT_DEPTH(TPU_ACT_DEPTH)
  ) u_tpu (
    .clk, .rst_n,
    .cmd_valid(tpu_cmd_valid), .cmd_ready(tpu_cmd_ready), .cmd(tpu_cmd),
    .busy(tpu_busy), .layers_done(tpu_layers_done),
    .mem_req(tpu_req), .mem_req_ready(tpu_ready), .mem_rsp(tpu_rsp)
  );

  pim #(
    .BANKS(PIM_BANKS), .TILES(PIM_TILES), .PES(PIM_PES), .ROWS(XB_ROWS), .COLS(XB_COLS)
  ) u_pim (
    .clk, .rst_n,
    .cmd_valid(pim_cmd_valid), .cmd_ready(pim_cmd_ready), .cmd(pim_cmd),
    .busy(pim_busy), .cmds_done(pim_cmds_done),
    .mem_req(pim_req), .mem_req_ready(pim_ready), .mem_rsp(pim_rsp)
  );

  lpddr_arbiter u_arb (
    .clk, .rst_n,
    .m0_req(tpu_req), .m0_ready(tpu_ready), .m0_rsp(tpu_rsp),
    .m1_req(pim_req), .m1_ready(pim_ready), .m1_rsp(pim_rsp),
    .s_req(mem_req), .s_ready(mem_req_ready), .s_rsp(mem_rsp)
  );
endmodule
