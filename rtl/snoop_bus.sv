// snoop_bus: the coherence snoop bus that links the CTHWs of all nodes inside
// the G-FAM device.
//
// A CTHW executing a GSync (the requester) asks for the bus with the EMS line
// to invalidate. The bus grants one requester at a time, round-robin (own
// choice), presents the line to every other CTHW (the peers) and waits until
// each of them has acknowledged, then signals `done` to the requester for one
// cycle. The bus carries addresses only, never line data, as the paper
// describes. The paper does not give the arbitration, the acknowledgement
// scheme or the timing; those are this design's.
//
// Timing: a grant is decided in the cycle after a request is seen; each peer's
// `snp_valid` drops on the cycle after its `snp_ack`; `done` follows the last
// acknowledgement by one cycle. A requester keeps `req_valid` high until
// `done`; a node is not granted in the cycle its `done` is high, when it
// still holds the request it has just had served.
module snoop_bus
  import ctxnl_pkg::*;
#(
  parameter int unsigned N_NODES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_NODES-1:0] req_valid,
  input  dline_t             req_line [N_NODES],
  output logic [N_NODES-1:0] done,
  output logic [N_NODES-1:0] snp_valid,
  output dline_t             snp_line,
  output logic [$clog2(N_NODES)-1:0] snp_src,
  input  logic [N_NODES-1:0] snp_ack,
  output logic [31:0]        n_broadcasts
);
  localparam int unsigned SW = $clog2(N_NODES);

  logic               busy;
  logic [SW-1:0]      last;     // last granted requester
  logic [N_NODES-1:0] pending;  // peers that still owe an ack

  // round-robin choice starting after `last`
  logic          found;
  logic [SW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int unsigned k = 1; k <= N_NODES; k++) begin
      int unsigned c;
      c = (int'(last) + k) % N_NODES;
      if (!found && req_valid[c] && !done[c]) begin
        found = 1'b1;
        pick  = SW'(c);
      end
    end
  end

  assign snp_valid = pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; last <= SW'(N_NODES - 1); pending <= '0; snp_line <= '0;
      snp_src <= '0; done <= '0; n_broadcasts <= '0;
    end else begin
      done <= '0;
      if (!busy) begin
        if (found) begin
          busy     <= 1'b1;
          last     <= pick;
          snp_src  <= pick;
          snp_line <= req_line[pick];
          pending  <= ~(N_NODES'(1) << pick);
          n_broadcasts <= n_broadcasts + 1;
        end
      end else begin
        pending <= pending & ~snp_ack;
        if ((pending & ~snp_ack) == '0) begin
          busy          <= 1'b0;
          done[snp_src] <= 1'b1;
        end
      end
    end
  end

  // A peer only acknowledges a broadcast it was shown.
  assert property (@(posedge clk) disable iff (!rst_n) (snp_ack & ~pending) == '0);
endmodule
