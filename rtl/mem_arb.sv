// mem_arb: round-robin arbiter that merges several line-granular memory
// masters (the dram_req_t / dram_rsp_t port used throughout the CTHW) onto
// one slave port.
//
// One request is in flight at a time: after a grant the arbiter waits for the
// slave's single response and routes it back to the master that issued the
// request. This keeps ordering trivial and is enough for the one-at-a-time
// masters of this design; a pipelined memory system would need tags instead.
// The arbiter is this design's own plumbing; the paper draws a single DRAM
// controller shared by all CTHWs.
module mem_arb
  import ctxnl_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        m_req_valid [N],
  output logic        m_req_ready [N],
  input  dram_req_t   m_req       [N],
  output logic        m_rsp_valid [N],
  output dram_rsp_t   m_rsp       [N],
  output logic        s_req_valid,
  input  logic        s_req_ready,
  output dram_req_t   s_req,
  input  logic        s_rsp_valid,
  input  dram_rsp_t   s_rsp
);
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1;

  logic         busy;      // a request is outstanding
  logic [W-1:0] owner;
  logic [W-1:0] last;
  logic         found;
  logic [W-1:0] pick;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (!found && m_req_valid[c]) begin
        found = 1'b1;
        pick  = W'(c);
      end
    end
  end

  always_comb begin
    s_req_valid = !busy && found;
    s_req       = m_req[pick];
    for (int unsigned i = 0; i < N; i++) begin
      m_req_ready[i] = !busy && found && (pick == W'(i)) && s_req_ready;
      m_rsp_valid[i] = busy && s_rsp_valid && (owner == W'(i));
      m_rsp[i]       = s_rsp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; owner <= '0; last <= W'(N - 1);
    end else begin
      if (!busy && found && s_req_ready) begin
        busy  <= 1'b1;
        owner <= pick;
        last  <= pick;
      end else if (busy && s_rsp_valid) begin
        busy <= 1'b0;
      end
    end
  end
endmodule
