// ctxnl_gfam: the hybrid-coherence CXL G-FAM (globally shared fabric-attached
// memory) device: one CTHW agent per connected node, the coherence snoop bus
// that links them, and the path from all agents to the one shared DRAM.
//
// Each node's CXL IP hands the device the host's CXL.mem requests (`h_*`,
// already decoded to line addresses inside the device's 48 GB window), takes
// the CXL.BI back-invalidations (`bi_*`) and gives the device coherent access
// to host memory for the GSync/Wd work and completion queues (`cc_*`). Those
// IP blocks, the standard coherent path of the CXL-vanilla segment (`van_*`)
// and the DRAM controller (`dram_*`) are outside this design; their signals
// are ports here.
//
// Inside: N_NODES cthw instances with node ids 0..N_NODES-1, one snoop_bus and
// a round-robin mem_arb in front of the DRAM port (one request in flight,
// every request answered in order by exactly one response). The sizes (16
// nodes, 4 KB VMS filter bits, 16 KB VMS back filter, 2 x 2^19-entry VAT
// tables, 64 cuckoo retries) are the paper's; the single arbitrated DRAM port
// is this design's choice.
module ctxnl_gfam
  import ctxnl_pkg::*;
#(
  parameter int unsigned N_NODES    = 16,
  parameter int unsigned MAX_TABLES = 16,
  parameter int unsigned WAY_IDX_W  = 19,
  parameter int unsigned MAX_RETRY  = 64,
  parameter int unsigned VF_BITS    = 4096,
  parameter int unsigned VBF_BYTES  = 16384,
  parameter int unsigned POLL_GAP   = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // per-node host requests (CXL.mem M2S) and responses (S2M)
  input  logic        h_req_valid  [N_NODES],
  output logic        h_req_ready  [N_NODES],
  input  mem_req_t    h_req        [N_NODES],
  output logic        h_rsp_valid  [N_NODES],
  input  logic        h_rsp_ready  [N_NODES],
  output mem_rsp_t    h_rsp        [N_NODES],
  // per-node CXL-vanilla segment traffic
  output logic        van_req_valid[N_NODES],
  input  logic        van_req_ready[N_NODES],
  output mem_req_t    van_req      [N_NODES],
  input  logic        van_rsp_valid[N_NODES],
  output logic        van_rsp_ready[N_NODES],
  input  mem_rsp_t    van_rsp      [N_NODES],
  // per-node CXL.BI
  output logic        bi_req_valid [N_NODES],
  input  logic        bi_req_ready [N_NODES],
  output bi_req_t     bi_req       [N_NODES],
  input  logic        bi_rsp_valid [N_NODES],
  input  bi_rsp_t     bi_rsp       [N_NODES],
  // per-node coherent access to the work / completion queues
  output logic        cc_req_valid [N_NODES],
  input  logic        cc_req_ready [N_NODES],
  output dram_req_t   cc_req       [N_NODES],
  input  logic        cc_rsp_valid [N_NODES],
  input  dram_rsp_t   cc_rsp       [N_NODES],
  // shared DRAM
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output dram_req_t   dram_req,
  input  logic        dram_rsp_valid,
  input  dram_rsp_t   dram_rsp,
  // runtime interrupts and observation
  output logic        irq          [N_NODES],
  output cthw_stats_t stats        [N_NODES],
  output logic [31:0] n_broadcasts,
  output logic [$clog2(N_NODES)-1:0] snp_src   // requester of the current broadcast
);
  logic [N_NODES-1:0] sb_req_valid, sb_done, snp_valid, snp_ack;
  dline_t             sb_req_line [N_NODES];
  dline_t             snp_line;

  logic      m_req_valid [N_NODES];
  logic      m_req_ready [N_NODES];
  dram_req_t m_req       [N_NODES];
  logic      m_rsp_valid [N_NODES];
  dram_rsp_t m_rsp       [N_NODES];

  for (genvar n = 0; n < N_NODES; n++) begin : g_node
    cthw #(
      .MAX_TABLES(MAX_TABLES), .WAY_IDX_W(WAY_IDX_W), .MAX_RETRY(MAX_RETRY),
      .VF_BITS(VF_BITS), .VBF_BYTES(VBF_BYTES), .POLL_GAP(POLL_GAP)
    ) u_cthw (
      .clk, .rst_n,
      .node_id       (node_t'(n)),
      .req_valid     (h_req_valid[n]),  .req_ready     (h_req_ready[n]),  .req (h_req[n]),
      .rsp_valid     (h_rsp_valid[n]),  .rsp_ready     (h_rsp_ready[n]),  .rsp (h_rsp[n]),
      .van_req_valid (van_req_valid[n]), .van_req_ready (van_req_ready[n]), .van_req (van_req[n]),
      .van_rsp_valid (van_rsp_valid[n]), .van_rsp_ready (van_rsp_ready[n]), .van_rsp (van_rsp[n]),
      .bi_req_valid  (bi_req_valid[n]), .bi_req_ready  (bi_req_ready[n]), .bi_req (bi_req[n]),
      .bi_rsp_valid  (bi_rsp_valid[n]), .bi_rsp        (bi_rsp[n]),
      .cc_req_valid  (cc_req_valid[n]), .cc_req_ready  (cc_req_ready[n]), .cc_req (cc_req[n]),
      .cc_rsp_valid  (cc_rsp_valid[n]), .cc_rsp        (cc_rsp[n]),
      .sb_req_valid  (sb_req_valid[n]), .sb_req_line   (sb_req_line[n]),  .sb_done (sb_done[n]),
      .snp_valid     (snp_valid[n]),    .snp_line,      .snp_ack (snp_ack[n]),
      .dram_req_valid(m_req_valid[n]),  .dram_req_ready(m_req_ready[n]), .dram_req (m_req[n]),
      .dram_rsp_valid(m_rsp_valid[n]),  .dram_rsp      (m_rsp[n]),
      .irq           (irq[n]),
      .stats         (stats[n])
    );
  end

  snoop_bus #(.N_NODES(N_NODES)) u_bus (
    .clk, .rst_n,
    .req_valid (sb_req_valid), .req_line (sb_req_line), .done (sb_done),
    .snp_valid, .snp_line, .snp_src, .snp_ack,
    .n_broadcasts
  );

  mem_arb #(.N(N_NODES)) u_dram_arb (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp,
    .s_req_valid (dram_req_valid), .s_req_ready (dram_req_ready), .s_req (dram_req),
    .s_rsp_valid (dram_rsp_valid), .s_rsp (dram_rsp)
  );
endmodule
