// lpddr_model: behavioural stand-in for the LPDDR memory used by the
// testbenches. Word-addressed, 256-bit words, sparse storage. Requests use
// valid/ready; `ready` is dropped pseudo-randomly (STALL_PCT percent of
// cycles) to exercise back-pressure. Reads return in order LAT cycles after
// they are accepted. stalls counts cycles in which a valid request was held
// off.
module lpddr_model
  import pim_llm_pkg::*;
#(
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic      clk,
  input  logic      rst_n,
  input  mem_req_t  req,
  output logic      ready,
  output mem_rsp_t  rsp
);
  mem_word_t mem [mem_addr_t];
  int unsigned stalls = 0, reads = 0, writes = 0;

  mem_word_t   pipe_d [LAT];
  logic        pipe_v [LAT];

  function automatic mem_word_t peek(mem_addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  function automatic void poke(mem_addr_t a, mem_word_t d);
    mem[a] = d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ready <= 1'b0;
    else        ready <= ($urandom_range(99) >= STALL_PCT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
    end else begin
      pipe_v[0] <= req.valid && ready && !req.we;
      pipe_d[0] <= peek(req.addr);
      for (int i = 1; i < LAT; i++) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
      if (req.valid && ready && req.we) begin mem[req.addr] = req.wdata; writes++; end
      if (req.valid && ready && !req.we) reads++;
      if (req.valid && !ready) stalls++;
    end
  end
  assign rsp.valid = pipe_v[LAT-1];
  assign rsp.rdata = pipe_d[LAT-1];
endmodule
