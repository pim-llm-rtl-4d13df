// pim_controller: the PIM controller. It takes one command at a time from the
// host (the CPU of the paper, which tells it what to do and reads its status)
// and moves data between LPDDR, the global buffer and the banks:
//   PIM_PROGRAM: for each of `rows` crossbar rows, reads two LPDDR words
//     (src+2r: columns 0..127, src+2r+1: columns 128..255, 2-bit ternary
//     codes) and writes them into row r of crossbar (bank, tile, pe).
//   PIM_MVM: LOAD  - reads the input vector (WPR words, or PES*WPR words for
//                    a row-split `reduce` run) from LPDDR into the global
//                    buffer;
//            SEND  - copies it into the tile's input buffer over the bank
//                    network;
//            RUN   - starts the tile and waits for the bank to have the
//                    results in its output buffer;
//            COLLECT - copies the results into the global buffer;
//            STORE - writes them to LPDDR at dst, dst+1, ...
// The paper states that the controller manages data movement between LPDDR
// and the banks following status updates from the CPU, and that results go
// back to LPDDR; the command set and phases are this design's.
// Host port: cmd_valid/cmd_ready (cmd_ready is high only when idle), busy,
// cmds_done counter.
module pim_controller
  import pim_llm_pkg::*;
#(
  parameter int unsigned PES   = 4,
  parameter int unsigned ROWS  = XBAR_ROWS,
  parameter int unsigned COLS  = XBAR_COLS,
  parameter int unsigned WPR   = (ROWS*ACT_W + MEM_DW - 1) / MEM_DW,
  parameter int unsigned WPC   = (COLS*ACT_W + MEM_DW - 1) / MEM_DW,
  parameter int unsigned GAW   = 8,        // global buffer address width
  parameter int unsigned IBAW  = $clog2(PES*WPR),
  parameter int unsigned OBAW  = $clog2(PES*WPC),
  parameter int unsigned RAW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned PEW   = (PES > 1) ? $clog2(PES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  pim_cmd_t           cmd,
  output logic               busy,
  output logic [15:0]        cmds_done,
  // LPDDR master
  output mem_req_t           mem_req,
  input  logic               mem_req_ready,
  input  mem_rsp_t           mem_rsp,
  // global buffer
  output logic               gb_we,
  output logic [GAW-1:0]     gb_waddr,
  output mem_word_t          gb_wdata,
  output logic               gb_re,
  output logic [GAW-1:0]     gb_raddr,
  input  mem_word_t          gb_rdata,
  // bank bus
  output logic [3:0]         bank_sel,
  output logic [3:0]         tile_sel,
  output logic               in_we,
  output logic [IBAW-1:0]    in_addr,
  output mem_word_t          in_wdata,
  output logic               prog_en,
  output logic [PEW-1:0]     prog_pe,
  output logic [RAW-1:0]     prog_row,
  output logic [2*COLS-1:0]  prog_data,
  output logic               start,
  output logic               reduce,
  output pp_mode_t           pp_mode,
  input  logic               bank_done,
  input  logic [OBAW:0]      bank_nout,
  output logic               out_re,
  output logic [OBAW-1:0]    out_addr,
  input  mem_word_t          out_rdata
);
  localparam logic [GAW-1:0] OUT_AREA = GAW'(1 << (GAW-1));

  typedef enum logic [3:0] {
    S_IDLE, S_P_REQ, S_P_WAIT, S_P_WRITE,
    S_LOAD, S_SEND, S_RUN, S_COLLECT, S_ST_RD, S_ST_WR, S_DONE
  } state_t;
  state_t     state;
  pim_cmd_t   c;
  logic [15:0] issued, recvd, k, k_d, n;
  logic        rd_d;
  logic [1:0][MEM_DW-1:0] row_buf;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign bank_sel  = c.bank;
  assign tile_sel  = c.tile;
  assign prog_pe   = PEW'(c.pe);
  assign prog_row  = RAW'(k);
  assign prog_data = (2*COLS)'(row_buf);
  assign prog_en   = (state == S_P_WRITE);
  assign reduce    = c.reduce;
  assign pp_mode   = c.pp_mode;

  // LPDDR requests
  always_comb begin
    mem_req = '0;
    if (state == S_P_REQ && issued < 2) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = c.src + mem_addr_t'(2*k) + mem_addr_t'(issued);
    end else if (state == S_LOAD && issued < n) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = c.src + mem_addr_t'(issued);
    end else if (state == S_ST_WR) begin
      mem_req.valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = c.dst + mem_addr_t'(k);
      mem_req.wdata = gb_rdata;
    end
  end

  // global buffer ports
  always_comb begin
    gb_we    = 1'b0;
    gb_waddr = '0;
    gb_wdata = '0;
    gb_re    = 1'b0;
    gb_raddr = '0;
    if (state == S_LOAD && mem_rsp.valid) begin
      gb_we    = 1'b1;
      gb_waddr = GAW'(recvd);
      gb_wdata = mem_rsp.rdata;
    end else if (state == S_COLLECT && rd_d) begin
      gb_we    = 1'b1;
      gb_waddr = OUT_AREA + GAW'(k_d);
      gb_wdata = out_rdata;
    end
    if (state == S_SEND && k < n) begin
      gb_re    = 1'b1;
      gb_raddr = GAW'(k);
    end else if (state == S_ST_RD) begin
      gb_re    = 1'b1;
      gb_raddr = OUT_AREA + GAW'(k);
    end
  end

  assign in_we    = (state == S_SEND) && rd_d;
  assign in_addr  = IBAW'(k_d);
  assign in_wdata = gb_rdata;
  assign out_re   = (state == S_COLLECT) && (k < n);
  assign out_addr = OBAW'(k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      issued    <= '0;
      recvd     <= '0;
      k         <= '0;
      k_d       <= '0;
      n         <= '0;
      rd_d      <= 1'b0;
      row_buf   <= '0;
      start     <= 1'b0;
      cmds_done <= '0;
    end else begin
      start <= 1'b0;
      rd_d  <= gb_re || out_re;
      k_d   <= k;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c      <= cmd;
          k      <= '0;
          issued <= '0;
          recvd  <= '0;
          if (cmd.op == PIM_PROGRAM) begin
            state <= S_P_REQ;
          end else begin
            n     <= cmd.reduce ? 16'(PES*WPR) : 16'(WPR);
            state <= S_LOAD;
          end
        end
        // ---- programming: two words per crossbar row ----------------
        S_P_REQ: begin
          if (issued < 2 && mem_req_ready) issued <= issued + 1'b1;
          if (mem_rsp.valid) begin
            row_buf[recvd[0]] <= mem_rsp.rdata;
            recvd <= recvd + 1'b1;
            if (recvd == 1) state <= S_P_WRITE;
          end
        end
        S_P_WRITE: begin
          issued <= '0;
          recvd  <= '0;
          if (k + 1 == 16'(c.rows)) state <= S_DONE;
          else begin
            k     <= k + 1'b1;
            state <= S_P_REQ;
          end
        end
        // ---- matrix-vector product ---------------------------------
        S_LOAD: begin
          if (issued < n && mem_req_ready) issued <= issued + 1'b1;
          if (mem_rsp.valid) begin
            recvd <= recvd + 1'b1;
            if (recvd + 1 == n) begin
              state <= S_SEND;
              k     <= '0;
            end
          end
        end
        S_SEND: begin
          if (k < n) k <= k + 1'b1;
          if (rd_d && k_d + 1 == n) begin
            state <= S_RUN;
            start <= 1'b1;
          end
        end
        S_RUN: if (bank_done) begin
          state <= S_COLLECT;
          n     <= 16'(bank_nout);
          k     <= '0;
        end
        S_COLLECT: begin
          if (k < n) k <= k + 1'b1;
          if (rd_d && k_d + 1 == n) begin
            state <= S_ST_RD;
            k     <= '0;
          end
        end
        S_ST_RD: state <= S_ST_WR;
        S_ST_WR: if (mem_req_ready) begin
          if (k + 1 == n) state <= S_DONE;
          else begin
            k     <= k + 1'b1;
            state <= S_ST_RD;
          end
        end
        S_DONE: begin
          cmds_done <= cmds_done + 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
