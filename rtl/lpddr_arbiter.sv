// lpddr_arbiter: shares the single LPDDR port between the TPU and the PIM
// controller, both of which the paper connects to LPDDR. Requests use a
// valid/ready handshake; when both masters request, the grant alternates
// (round robin). Read responses come back in request order, so the arbiter
// records the owner of every accepted read in a FIFO and steers each
// response to it. The arbitration policy and the FIFO depth are this
// design's; the paper does not describe the memory interconnect.
module lpddr_arbiter
  import pim_llm_pkg::*;
#(
  parameter int unsigned MAX_OUT = 64     // outstanding reads
) (
  input  logic      clk,
  input  logic      rst_n,
  input  mem_req_t  m0_req,
  output logic      m0_ready,
  output mem_rsp_t  m0_rsp,
  input  mem_req_t  m1_req,
  output logic      m1_ready,
  output mem_rsp_t  m1_rsp,
  output mem_req_t  s_req,
  input  logic      s_ready,
  input  mem_rsp_t  s_rsp
);
  localparam int unsigned PW = $clog2(MAX_OUT);

  logic              rr;       // 1: master 1 has priority
  logic              gnt1;     // master 1 is granted
  logic [MAX_OUT-1:0] owner;
  logic [PW-1:0]     wp, rp;
  logic [PW:0]       cnt;
  logic              full, acc, acc_rd;

  assign full   = (cnt == (PW+1)'(MAX_OUT));
  assign gnt1   = m1_req.valid && (!m0_req.valid || rr);
  assign s_req  = full ? '0 : (gnt1 ? m1_req : m0_req);
  assign m0_ready = !full && !gnt1 && s_ready;
  assign m1_ready = !full &&  gnt1 && s_ready;
  assign acc    = s_req.valid && s_ready;
  assign acc_rd = acc && !s_req.we;

  always_comb begin
    m0_rsp = '0;
    m1_rsp = '0;
    if (s_rsp.valid) begin
      if (owner[rp]) m1_rsp = s_rsp;
      else           m0_rsp = s_rsp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr    <= 1'b0;
      owner <= '0;
      wp    <= '0;
      rp    <= '0;
      cnt   <= '0;
    end else begin
      if (acc && m0_req.valid && m1_req.valid) rr <= !gnt1;
      if (acc_rd) begin
        owner[wp] <= gnt1;
        wp        <= wp + 1'b1;
      end
      if (s_rsp.valid) rp <= rp + 1'b1;
      cnt <= cnt + (PW+1)'(acc_rd) - (PW+1)'(s_rsp.valid);
    end
  end

  // a response always belongs to an accepted read
  always_ff @(posedge clk) begin
    if (rst_n && s_rsp.valid) a_rsp_owner: assert (cnt != 0) else $error("response without request");
  end
endmodule
