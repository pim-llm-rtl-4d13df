// dataflow_generator: address-trace generator of the TPU. The paper states
// that it produces the read address traces that fetch inputs and weights from
// LPDDR into the input and weight SRAMs for the output-stationary dataflow;
// the phases and counters below are this design's implementation of that.
// One phase runs per `start` pulse and ends with a one-cycle `done`:
//   DG_LOAD    : issues `count` LPDDR reads at mem_base, mem_base+1, ...
//                (valid/ready handshake, any number outstanding) and writes
//                each in-order response into SRAM word 0, 1, ...
//   DG_COMPUTE : reads SRAM words 0..count-1, one per cycle; arr_valid marks
//                the cycle the read data is at the SRAM output (1 cycle
//                later) and arr_first the first of them. It then waits
//                FLUSH cycles for the last operands to cross the array.
//   DG_STORE   : for each word, reads the SRAM, then issues an LPDDR write of
//                that word at mem_base+i, waiting for `ready`.
module dataflow_generator
  import pim_llm_pkg::*;
#(
  parameter int unsigned SAW   = 16,   // SRAM address width
  parameter int unsigned FLUSH = 2*SA_DIM
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  dg_mode_t        mode,
  input  logic [23:0]     count,
  input  mem_addr_t       mem_base,
  output logic            busy,
  output logic            done,
  // LPDDR master side
  output mem_req_t        req,
  input  logic            req_ready,
  input  mem_rsp_t        rsp,
  // SRAM side
  output logic            sram_we,
  output logic [SAW-1:0]  sram_waddr,
  output mem_word_t       sram_wdata,
  output logic            sram_re,
  output logic [SAW-1:0]  sram_raddr,
  input  mem_word_t       sram_rdata,
  // systolic array side
  output logic            arr_valid,
  output logic            arr_first
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_COMP, S_FLUSH, S_ST_RD, S_ST_WR} state_t;
  state_t state;

  logic [23:0] n, issued, received;
  mem_addr_t   base;
  logic [15:0] flush_cnt;
  logic        rd_d, first_d;

  assign busy = (state != S_IDLE);

  // request channel
  always_comb begin
    req = '0;
    if (state == S_LOAD && issued < n) begin
      req.valid = 1'b1;
      req.addr  = base + mem_addr_t'(issued);
    end else if (state == S_ST_WR) begin
      req.valid = 1'b1;
      req.we    = 1'b1;
      req.addr  = base + mem_addr_t'(issued);
      req.wdata = sram_rdata;   // SRAM output holds while re is low
    end
  end

  assign sram_we    = (state == S_LOAD) && rsp.valid;
  assign sram_waddr = SAW'(received);
  assign sram_wdata = rsp.rdata;
  assign sram_re    = (state == S_COMP) || (state == S_ST_RD);
  assign sram_raddr = SAW'(issued);
  assign arr_valid  = rd_d;
  assign arr_first  = first_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n         <= '0;
      issued    <= '0;
      received  <= '0;
      base      <= '0;
      flush_cnt <= '0;
      rd_d      <= 1'b0;
      first_d   <= 1'b0;
      done      <= 1'b0;
    end else begin
      done    <= 1'b0;
      rd_d    <= (state == S_COMP);
      first_d <= (state == S_COMP) && (issued == 0);
      case (state)
        S_IDLE: if (start) begin
          n        <= count;
          base     <= mem_base;
          issued   <= '0;
          received <= '0;
          unique case (mode)
            DG_LOAD:    state <= S_LOAD;
            DG_COMPUTE: state <= S_COMP;
            default:    state <= S_ST_RD;
          endcase
        end
        S_LOAD: begin
          if (issued < n && req_ready) issued <= issued + 1;
          if (rsp.valid) begin
            received <= received + 1;
            if (received + 1 == n) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_COMP: begin
          issued <= issued + 1;
          if (issued + 1 == n) begin
            state     <= S_FLUSH;
            flush_cnt <= '0;
          end
        end
        S_FLUSH: begin
          flush_cnt <= flush_cnt + 1;
          if (flush_cnt == 16'(FLUSH)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_ST_RD: state <= S_ST_WR;
        S_ST_WR: begin
          if (req_ready) begin
            issued <= issued + 1;
            if (issued + 1 == n) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ST_RD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
