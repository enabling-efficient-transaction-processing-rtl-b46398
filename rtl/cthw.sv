// cthw: the CtXnL hardware agent (CTHW) that sits behind one host's CXL IP in
// the G-FAM device. There is one per connected node.
//
// It turns the host's ordinary CXL.mem loads and write-backs in the CtXnL
// segment into node-private L-Ld / L-St (translation flow over the VMS filter,
// VMS back filter and the cuckoo-hash view address table), executes the GSync
// and Wd requests the host posts in its work queue (CC agent), answers the
// invalidations other nodes broadcast on the coherence snoop bus (peer), and
// serves the hardware configuration segment (registers and raw DRAM). Requests
// in the CXL-vanilla segment leave through the `van_*` port to the standard
// coherent path of the CXL IP, which this design does not model.
//
// Inside (this design's organisation of the paper's blocks):
//   - the filters, the VAT engine and the CXL.BI port are shared by the three
//     clients (translation flow, CC agent, peer). A client takes a lock first;
//     the lock is granted with fixed priority peer > CC agent > translation and
//     held until released. The peer never waits for anything but its own host,
//     so GSync broadcasts from other nodes always complete;
//   - the DRAM port is shared by the VAT engine, the translation flow, the CC
//     agent and the register block through a round-robin arbiter.
//
// All ports are valid/ready (requests) and valid or valid/ready (responses);
// see ctxnl_pkg for the structs.
module cthw
  import ctxnl_pkg::*;
#(
  parameter int unsigned MAX_TABLES = 16,
  parameter int unsigned WAY_IDX_W  = 19,
  parameter int unsigned MAX_RETRY  = 64,
  parameter int unsigned VF_BITS    = 4096,
  parameter int unsigned VBF_BYTES  = 16384,
  parameter int unsigned POLL_GAP   = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  node_t       node_id,
  // host link (CXL.mem, as decoded by the CXL IP)
  input  logic        req_valid,
  output logic        req_ready,
  input  mem_req_t    req,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output mem_rsp_t    rsp,
  // CXL-vanilla segment, to the CXL IP's coherent path
  output logic        van_req_valid,
  input  logic        van_req_ready,
  output mem_req_t    van_req,
  input  logic        van_rsp_valid,
  output logic        van_rsp_ready,
  input  mem_rsp_t    van_rsp,
  // CXL.BI back-invalidation to the host
  output logic        bi_req_valid,
  input  logic        bi_req_ready,
  output bi_req_t     bi_req,
  input  logic        bi_rsp_valid,
  input  bi_rsp_t     bi_rsp,
  // coherent device-to-host access to the work / completion queues
  output logic        cc_req_valid,
  input  logic        cc_req_ready,
  output dram_req_t   cc_req,
  input  logic        cc_rsp_valid,
  input  dram_rsp_t   cc_rsp,
  // coherence snoop bus
  output logic        sb_req_valid,
  output dline_t      sb_req_line,
  input  logic        sb_done,
  input  logic        snp_valid,
  input  dline_t      snp_line,
  output logic        snp_ack,
  // shared DRAM
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output dram_req_t   dram_req,
  input  logic        dram_rsp_valid,
  input  dram_rsp_t   dram_rsp,
  // runtime signal and counters
  output logic        irq,
  output cthw_stats_t stats
);
  localparam int unsigned TIDW = $clog2(MAX_TABLES);
  localparam int unsigned OCC_W = WAY_IDX_W + 2;

  // ---- primitive router ----------------------------------------------------------
  logic     p_req_valid [3];
  logic     p_req_ready [3];
  mem_req_t p_req       [3];
  logic     p_rsp_valid [3];
  logic     p_rsp_ready [3];
  mem_rsp_t p_rsp       [3];
  logic [31:0] n_seg [4];

  seg_router u_router (
    .clk, .rst_n,
    .in_req_valid (req_valid), .in_req_ready (req_ready), .in_req (req),
    .in_rsp_valid (rsp_valid), .in_rsp_ready (rsp_ready), .in_rsp (rsp),
    .out_req_valid(p_req_valid), .out_req_ready(p_req_ready), .out_req(p_req),
    .out_rsp_valid(p_rsp_valid), .out_rsp_ready(p_rsp_ready), .out_rsp(p_rsp),
    .n_per_seg    (n_seg)
  );

  assign van_req_valid  = p_req_valid[1];
  assign p_req_ready[1] = van_req_ready;
  assign van_req        = p_req[1];
  assign p_rsp_valid[1] = van_rsp_valid;
  assign van_rsp_ready  = p_rsp_ready[1];
  assign p_rsp[1]       = van_rsp;

  // ---- shared-resource lock: 0 peer, 1 CC agent, 2 translation ------------------
  logic [2:0] lreq, lgnt;
  res_req_t   creq [3];
  res_req_t   rq;
  res_rsp_t   rs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lgnt <= '0;
    else if ((lgnt & lreq) == '0) begin
      if      (lreq[0]) lgnt <= 3'b001;
      else if (lreq[1]) lgnt <= 3'b010;
      else if (lreq[2]) lgnt <= 3'b100;
      else              lgnt <= '0;
    end
  end

  always_comb begin
    rq = '0;
    for (int unsigned i = 0; i < 3; i++) if (lgnt[i]) rq = creq[i];
  end

  // ---- filters ----------------------------------------------------------------------
  logic [31:0] vf_inserts;

  vms_filter #(.BITS(VF_BITS)) u_vf (
    .clk, .rst_n,
    .q_key (rq.vf_qkey), .q_hit (rs.vf_hit),
    .ins_valid (rq.vf_ins), .ins_key (rq.vf_ins_key),
    .clr (1'b0), .n_inserts (vf_inserts)
  );

  vms_back_filter #(.BYTES(VBF_BYTES)) u_vbf (
    .clk, .rst_n,
    .q_key (rq.vbf_qkey), .q_hit (rs.vbf_hit),
    .ins_valid (rq.vbf_ins), .ins_key (rq.vbf_ins_key),
    .rem_valid (rq.vbf_rem), .rem_key (rq.vbf_rem_key)
  );

  // ---- VAT: LUT + engine --------------------------------------------------------------
  ind_t             lut_q;
  logic [TIDW-1:0]  lut_tid;
  dline_t           lut_base;
  logic             lut_valid;
  logic             occ_inc, occ_dec;
  logic [TIDW-1:0]  occ_tid;
  logic [OCC_W-1:0] occ [MAX_TABLES];
  logic                        c_lut_we, c_tbl_we, c_tbl_valid, c_occ_clr;
  logic [LUT_IDX_W-NODE_W-1:0] c_lut_idx;
  logic [TIDW-1:0]             c_lut_tid, c_tbl_id, c_occ_tid, c_rd_tid;
  dline_t                      c_tbl_base;
  logic [OCC_W-1:0]            c_occ_val;
  dline_t                      tbase_rd  [MAX_TABLES];
  logic                        tvalid_rd [MAX_TABLES];

  vat_lut #(.MAX_TABLES(MAX_TABLES), .OCC_W(OCC_W)) u_lut (
    .clk, .rst_n,
    .q_ind (lut_q), .q_tid (lut_tid), .q_base (lut_base), .q_valid (lut_valid),
    .lut_we (c_lut_we), .lut_idx (c_lut_idx), .lut_tid (c_lut_tid),
    .tbl_we (c_tbl_we), .tbl_id (c_tbl_id), .tbl_base (c_tbl_base), .tbl_valid (c_tbl_valid),
    .occ_inc, .occ_inc_tid (occ_tid), .occ_dec, .occ_dec_tid (occ_tid),
    .occ_clr (c_occ_clr), .occ_clr_tid (c_occ_tid), .occ_clr_val (c_occ_val),
    .occ,
    .rd_idx (c_lut_idx), .rd_tid (c_rd_tid), .tbase_o (tbase_rd), .tvalid_o (tvalid_rd)
  );

  logic                 vat_blocked, vat_err, vat_retry, vat_hold;
  logic [WAY_IDX_W-1:0] vat_res_idx;
  logic [31:0]          n_kicks, n_fails;

  // DRAM masters: 0 VAT engine, 1 translation, 2 CC agent, 3 registers
  logic      m_req_valid [4];
  logic      m_req_ready [4];
  dram_req_t m_req       [4];
  logic      m_rsp_valid [4];
  dram_rsp_t m_rsp       [4];

  vat_engine #(.MAX_TABLES(MAX_TABLES), .WAY_IDX_W(WAY_IDX_W), .MAX_RETRY(MAX_RETRY)) u_vat (
    .clk, .rst_n,
    .op_valid (rq.vat_valid), .op_ready (rs.vat_ready), .op (rq.vat_op),
    .op_ind (rq.vat_ind), .op_data (rq.vat_data), .op_way (rq.vat_way),
    .op_idx (WAY_IDX_W'(rq.vat_idx)),
    .done (rs.vat_done), .res_hit (rs.vat_hit), .res_ok (rs.vat_ok),
    .res_way (rs.vat_way), .res_idx (vat_res_idx), .res_slot (rs.vat_slot),
    .lut_ind (lut_q), .lut_tid, .lut_base, .lut_valid,
    .occ_inc, .occ_dec, .occ_tid,
    .blocked (vat_blocked), .resize_err (vat_err), .retry (vat_retry), .hold (vat_hold),
    .n_kicks, .n_fails,
    .dram_req_valid (m_req_valid[0]), .dram_req_ready (m_req_ready[0]), .dram_req (m_req[0]),
    .dram_rsp_valid (m_rsp_valid[0]), .dram_rsp (m_rsp[0])
  );
  assign rs.vat_idx = 32'(vat_res_idx);

  // ---- CXL.BI port ----------------------------------------------------------------------
  assign bi_req_valid    = rq.bi_valid;
  assign bi_req          = rq.bi;
  assign rs.bi_ready     = bi_req_ready;
  assign rs.bi_rsp_valid = bi_rsp_valid;
  assign rs.bi_rsp       = bi_rsp;

  // ---- clients ------------------------------------------------------------------------------
  logic [31:0] x_ld, x_st, x_vfh, x_vath, x_fp, x_park;
  logic [31:0] a_gs, a_wd, a_bi, a_cp;
  logic [31:0] p_sn, p_drop, p_bi;

  xlate_flow u_xlate (
    .clk, .rst_n, .node_id,
    .req_valid (p_req_valid[0]), .req_ready (p_req_ready[0]), .req (p_req[0]),
    .rsp_valid (p_rsp_valid[0]), .rsp_ready (p_rsp_ready[0]), .rsp (p_rsp[0]),
    .lock_req (lreq[2]), .lock_gnt (lgnt[2]), .res (creq[2]), .res_in (rs),
    .dram_req_valid (m_req_valid[1]), .dram_req_ready (m_req_ready[1]), .dram_req (m_req[1]),
    .dram_rsp_valid (m_rsp_valid[1]), .dram_rsp (m_rsp[1]),
    .n_loads (x_ld), .n_stores (x_st), .n_vf_hits (x_vfh), .n_vat_hits (x_vath),
    .n_vf_false_pos (x_fp), .n_parked (x_park)
  );

  dline_t wq_base, cq_line;
  logic   wq_enable;

  cc_agent #(.POLL_GAP(POLL_GAP)) u_cc (
    .clk, .rst_n, .node_id,
    .enable (wq_enable), .wq_base, .cq_line,
    .cc_req_valid, .cc_req_ready, .cc_req, .cc_rsp_valid, .cc_rsp,
    .sb_req_valid, .sb_req_line, .sb_done,
    .lock_req (lreq[1]), .lock_gnt (lgnt[1]), .res (creq[1]), .res_in (rs),
    .dram_req_valid (m_req_valid[2]), .dram_req_ready (m_req_ready[2]), .dram_req (m_req[2]),
    .dram_rsp_valid (m_rsp_valid[2]), .dram_rsp (m_rsp[2]),
    .n_gsync (a_gs), .n_wd (a_wd), .n_bisnp (a_bi), .n_vms_copy (a_cp)
  );

  snoop_peer u_peer (
    .clk, .rst_n, .node_id,
    .snp_valid, .snp_line, .snp_ack,
    .lock_req (lreq[0]), .lock_gnt (lgnt[0]), .res (creq[0]), .res_in (rs),
    .n_snoops (p_sn), .n_vat_drops (p_drop), .n_bisnp (p_bi)
  );

  cthw_csr #(.MAX_TABLES(MAX_TABLES), .OCC_W(OCC_W)) u_csr (
    .clk, .rst_n,
    .req_valid (p_req_valid[2]), .req_ready (p_req_ready[2]), .req (p_req[2]),
    .rsp_valid (p_rsp_valid[2]), .rsp_ready (p_rsp_ready[2]), .rsp (p_rsp[2]),
    .lut_we (c_lut_we), .lut_idx (c_lut_idx), .lut_tid (c_lut_tid),
    .tbl_we (c_tbl_we), .tbl_id (c_tbl_id), .tbl_base (c_tbl_base), .tbl_valid (c_tbl_valid),
    .occ_clr (c_occ_clr), .occ_clr_tid (c_occ_tid), .occ_clr_val (c_occ_val), .occ,
    .tbl_base_rd (tbase_rd), .tbl_valid_rd (tvalid_rd), .lut_rd_tid (c_rd_tid),
    .resize_err (vat_err), .vat_blocked, .retry (vat_retry), .vat_hold, .irq,
    .wq_base, .cq_line, .wq_enable, .vf_inserts,
    .dram_req_valid (m_req_valid[3]), .dram_req_ready (m_req_ready[3]), .dram_req (m_req[3]),
    .dram_rsp_valid (m_rsp_valid[3]), .dram_rsp (m_rsp[3])
  );

  mem_arb #(.N(4)) u_arb (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp,
    .s_req_valid (dram_req_valid), .s_req_ready (dram_req_ready), .s_req (dram_req),
    .s_rsp_valid (dram_rsp_valid), .s_rsp (dram_rsp)
  );

  always_comb begin
    stats.loads          = x_ld;
    stats.stores         = x_st;
    stats.vf_hits        = x_vfh;
    stats.vat_hits       = x_vath;
    stats.vf_false_pos   = x_fp;
    stats.parked         = x_park;
    stats.kicks          = n_kicks;
    stats.fails          = n_fails;
    stats.gsync          = a_gs;
    stats.wd             = a_wd;
    stats.req_bisnp      = a_bi;
    stats.vms_copy       = a_cp;
    stats.snoops         = p_sn;
    stats.peer_vat_drops = p_drop;
    stats.peer_bisnp     = p_bi;
    stats.seg_ctxnl      = n_seg[0];
    stats.seg_vanilla    = n_seg[1];
    stats.seg_hwcfg      = n_seg[2];
    stats.seg_none       = n_seg[3];
  end

  // Only one client may hold the shared resources.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(lgnt));
endmodule
