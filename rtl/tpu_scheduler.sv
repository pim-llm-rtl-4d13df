// tpu_scheduler: the TPU scheduler. The host queues layer descriptors (one
// attention MatMul each, see tpu_desc_t); the scheduler hands them to the
// main controller one at a time, in order, and starts the next as soon as
// the controller reports the previous one done, so several layers run back to
// back. The paper says only that the scheduler orchestrates the execution of
// each layer and may run several layers sequentially; the in-order queue of
// DEPTH entries with a valid/ready push port is this design's choice.
// Timing: a descriptor pushed into an empty queue with the controller idle is
// issued (issue pulse) on the next cycle.
module tpu_scheduler
  import pim_llm_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // host push port
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  tpu_desc_t   cmd,
  // to / from the main controller
  output logic        issue,
  output tpu_desc_t   issue_desc,
  input  logic        layer_done,
  // status
  output logic        busy,
  output logic [15:0] layers_done
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  tpu_desc_t      q [DEPTH];
  logic [PW-1:0]  wr_ptr, rd_ptr;
  logic [PW:0]    used;
  logic           running;
  logic           push, pop;

  assign cmd_ready = (used != (PW+1)'(DEPTH));
  assign push      = cmd_valid && cmd_ready;
  assign pop       = !running && (used != 0);
  assign busy      = running || (used != 0);

  always_ff @(posedge clk) begin
    if (push) q[wr_ptr] <= cmd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      used        <= '0;
      running     <= 1'b0;
      issue       <= 1'b0;
      issue_desc  <= '0;
      layers_done <= '0;
    end else begin
      issue <= 1'b0;
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop) begin
        rd_ptr     <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
        issue      <= 1'b1;
        issue_desc <= q[rd_ptr];
        running    <= 1'b1;
      end
      used <= used + (PW+1)'(push) - (PW+1)'(pop);
      if (layer_done) begin
        running     <= 1'b0;
        layers_done <= layers_done + 1'b1;
      end
    end
  end
endmodule
