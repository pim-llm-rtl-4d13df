// tpu_controller: the TPU main controller. For each descriptor issued by the
// scheduler it runs the phases of one output-stationary MatMul:
//   LOAD_A  - dataflow generator copies k_len words of A from LPDDR into the
//             input memory;
//   LOAD_B  - the same for B into the weight memory;
//   COMPUTE - both memories are streamed into the systolic array, then the
//             array is flushed;
//   DRAIN   - one result row per cycle is taken from the array, passed through
//             the nonlinear unit (softmax descriptors) or requantised to int8,
//             and written to the activation memory one cycle later;
//   STORE   - m_rows result words are written from the activation memory to
//             LPDDR.
// `done` pulses when the store has finished. The paper says the main
// controller coordinates the data transfer following the scheduler; this
// phase order is this design's.
module tpu_controller
  import pim_llm_pkg::*;
#(
  parameter int unsigned ROWS = SA_DIM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  tpu_desc_t   desc,
  output logic        done,
  // dataflow generator control
  output logic        dg_start,
  output dg_mode_t    dg_mode,
  output logic [23:0] dg_count,
  output mem_addr_t   dg_base,
  input  logic        dg_busy,
  input  logic        dg_done,
  output logic        load_b,      // 0: loads go to input memory, 1: weight memory
  // drain
  output logic        drain_valid,
  output logic [$clog2(ROWS)-1:0] drain_row,
  output logic        softmax,
  output logic [4:0]  out_shift
);
  typedef enum logic [2:0] {C_IDLE, C_LOAD_A, C_LOAD_B, C_COMP, C_DRAIN, C_DRAIN_W, C_STORE} cstate_t;
  cstate_t   state;
  tpu_desc_t d;
  logic      launched;   // dg_start has been given for the current phase

  assign softmax   = d.softmax;
  assign out_shift = d.out_shift;
  assign load_b    = (state == C_LOAD_B);

  always_comb begin
    dg_mode  = DG_LOAD;
    dg_count = d.k_len;
    dg_base  = d.a_base;
    unique case (state)
      C_LOAD_B: dg_base = d.b_base;
      C_COMP:   dg_mode = DG_COMPUTE;
      C_STORE: begin
        dg_mode  = DG_STORE;
        dg_count = 24'(d.m_rows);
        dg_base  = d.out_base;
      end
      default: ;
    endcase
  end

  assign dg_start = !launched && (state inside {C_LOAD_A, C_LOAD_B, C_COMP, C_STORE});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= C_IDLE;
      d           <= '0;
      launched    <= 1'b0;
      done        <= 1'b0;
      drain_valid <= 1'b0;
      drain_row   <= '0;
    end else begin
      done <= 1'b0;
      if (dg_start) launched <= 1'b1;
      unique case (state)
        C_IDLE: if (start) begin
          d        <= desc;
          state    <= C_LOAD_A;
          launched <= 1'b0;
        end
        C_LOAD_A: if (dg_done) begin state <= C_LOAD_B; launched <= 1'b0; end
        C_LOAD_B: if (dg_done) begin state <= C_COMP;   launched <= 1'b0; end
        C_COMP:   if (dg_done) begin
          state       <= C_DRAIN;
          drain_row   <= '0;
          drain_valid <= 1'b1;
        end
        C_DRAIN: begin
          if (32'(drain_row) + 1 == 32'(d.m_rows)) begin
            drain_valid <= 1'b0;
            state       <= C_DRAIN_W;
          end else begin
            drain_row <= drain_row + 1'b1;
          end
        end
        C_DRAIN_W: begin
          // last activation-memory write happens this cycle
          state    <= C_STORE;
          launched <= 1'b0;
        end
        C_STORE: if (dg_done) begin
          state <= C_IDLE;
          done  <= 1'b1;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // a phase is only launched on an idle dataflow generator
  always_ff @(posedge clk) begin
    if (rst_n && dg_start) a_dg_idle: assert (!dg_busy) else $error("phase launched on a busy dataflow generator");
  end
endmodule
