// seg_router: memory-mapped primitive selection for one node's link.
//
// The device exposes its 16 GB of shared DRAM to each host three times, as
// three consecutive 16 GB segments of physical address space (paper, memory
// mapping figure): the CtXnL primitive (loosely coherent L-Ld/L-St), the
// CXL-vanilla primitive (strictly coherent loads/stores) and the hardware
// configuration primitive (VAT tables, VMS contents, work/completion queues,
// and here also the CTHW's registers). All three map onto the same DRAM, so
// the offset inside a segment is the DRAM line address. The host picks the
// primitive per allocation simply by which segment it maps.
//
// This router splits the incoming request stream by the two segment bits of
// the 30-bit line address and merges the three response streams back, giving
// the CtXnL path priority, then configuration, then vanilla (own choice).
// Requests to the unused fourth quarter are answered at once with zero data
// (own choice). Requests are rewritten to carry the in-segment line address.
module seg_router
  import ctxnl_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // from the CXL IP
  input  logic     in_req_valid,
  output logic     in_req_ready,
  input  mem_req_t in_req,
  output logic     in_rsp_valid,
  input  logic     in_rsp_ready,
  output mem_rsp_t in_rsp,
  // to the three primitive paths: 0 CtXnL, 1 vanilla, 2 hardware config
  output logic     out_req_valid [3],
  input  logic     out_req_ready [3],
  output mem_req_t out_req       [3],
  input  logic     out_rsp_valid [3],
  output logic     out_rsp_ready [3],
  input  mem_rsp_t out_rsp       [3],
  output logic [31:0] n_per_seg  [4]
);
  seg_e     seg;
  mem_req_t local_req;
  logic     null_valid;
  mem_rsp_t null_rsp;

  always_comb begin
    seg            = seg_e'(in_req.addr[PA_LINE_W-1 -: 2]);
    local_req      = in_req;
    local_req.addr = paline_t'(in_req.addr[DRAM_LINE_W-1:0]);
    for (int unsigned i = 0; i < 3; i++) begin
      out_req[i]       = local_req;
      out_req_valid[i] = in_req_valid && (seg == seg_e'(i));
    end
    unique case (seg)
      SEG_CTXNL:   in_req_ready = out_req_ready[0];
      SEG_VANILLA: in_req_ready = out_req_ready[1];
      SEG_HWCFG:   in_req_ready = out_req_ready[2];
      default:     in_req_ready = !null_valid;
    endcase
  end

  // response merge, fixed priority 0 > 2 > 1 > unmapped
  always_comb begin
    for (int unsigned i = 0; i < 3; i++) out_rsp_ready[i] = 1'b0;
    in_rsp_valid = 1'b1;
    if (out_rsp_valid[0]) begin
      in_rsp = out_rsp[0]; out_rsp_ready[0] = in_rsp_ready;
    end else if (out_rsp_valid[2]) begin
      in_rsp = out_rsp[2]; out_rsp_ready[2] = in_rsp_ready;
    end else if (out_rsp_valid[1]) begin
      in_rsp = out_rsp[1]; out_rsp_ready[1] = in_rsp_ready;
    end else begin
      in_rsp = null_rsp; in_rsp_valid = null_valid;
    end
  end

  wire null_taken = null_valid && in_rsp_ready && !out_rsp_valid[0]
                    && !out_rsp_valid[1] && !out_rsp_valid[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      null_valid <= 1'b0;
      null_rsp   <= '0;
      for (int unsigned i = 0; i < 4; i++) n_per_seg[i] <= '0;
    end else begin
      if (null_taken) null_valid <= 1'b0;
      if (in_req_valid && in_req_ready) begin
        n_per_seg[seg] <= n_per_seg[seg] + 1;
        if (seg == SEG_NONE) begin
          null_valid   <= 1'b1;
          null_rsp.op  <= in_req.op;
          null_rsp.tag <= in_req.tag;
          null_rsp.data <= '0;
        end
      end
    end
  end
endmodule
