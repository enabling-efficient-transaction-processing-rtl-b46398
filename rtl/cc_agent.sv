// cc_agent: the GSync / Wd side of one CTHW ("CC Agent" in the overview
// figure): it fetches synchronisation requests from the host's work queue,
// runs the requester datapath, and reports completion in the completion queue.
//
// Task offloading (paper): the host posts the line address of a GSync or Wd in
// a work queue element (WQE) of a circular work queue in shared memory and
// polls a completion queue (CQ) that is one cacheline, one bit per WQE, so the
// queue is 512 deep. Each WQE carries its own valid bit, so one coherent read
// returns both the flag and the payload. Both queues are reached through the
// CXL IP's coherent device-to-host port (`cc_*`).
//
// WQE format (own choice): one line per element, bit 63 valid, bit 62 op
// (0 GSync, 1 Wd), bits 27..0 the line address in the shared DRAM. After
// reading a valid WQE the agent writes the element back as zero. Completion of
// element i toggles CQ bit i (own choice: a toggle lets the host tell this
// round's completion from the previous round's without a clearing write).
//
// GSync, requester datapath (paper, synchronisation figure):
//   1. broadcast the EMS line on the coherence snoop bus and wait until every
//      peer CTHW has dropped its copies (peer VMS views, peer host lines);
//   2. merge: if the VMS back filter says the host may hold the line, send a
//      CXL.BI BISnpInv; a dirty answer is written to the EMS. Otherwise, or if
//      the host answered clean, the view is looked up in the VAT (after a VMS
//      filter hit) and copied from its VMS slot to the EMS, and its VATE removed.
// Wd (the paper gives its meaning, not its datapath; own choice): no broadcast,
// since no other node can see an unpublished view; the host line is
// back-invalidated with its data discarded and any VMS view removed unmerged.
//
// The agent holds the CTHW's shared-resource lock only during step 2, never
// while waiting on the snoop bus, so peers can always serve broadcasts.
module cc_agent
  import ctxnl_pkg::*;
#(
  parameter int unsigned POLL_GAP = 8     // idle cycles between empty polls
) (
  input  logic        clk,
  input  logic        rst_n,
  input  node_t       node_id,
  // configuration
  input  logic        enable,
  input  dline_t      wq_base,
  input  dline_t      cq_line,
  // coherent access to the host-shared queues
  output logic        cc_req_valid,
  input  logic        cc_req_ready,
  output dram_req_t   cc_req,
  input  logic        cc_rsp_valid,
  input  dram_rsp_t   cc_rsp,
  // snoop bus, requester side
  output logic        sb_req_valid,
  output dline_t      sb_req_line,
  input  logic        sb_done,
  // shared resources
  output logic        lock_req,
  input  logic        lock_gnt,
  output res_req_t    res,
  input  res_rsp_t    res_in,
  // DRAM
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output dram_req_t   dram_req,
  input  logic        dram_rsp_valid,
  input  dram_rsp_t   dram_rsp,
  // statistics
  output logic [31:0] n_gsync,
  output logic [31:0] n_wd,
  output logic [31:0] n_bisnp,
  output logic [31:0] n_vms_copy
);
  localparam int unsigned HW = $clog2(WQ_DEPTH);

  typedef enum logic [3:0] {
    S_GAP, S_POLL, S_DEQ, S_BCAST, S_LOCK, S_VBF, S_BI, S_BI_WAIT, S_EMS_WR,
    S_VF, S_LOOKUP, S_COPY_RD, S_REMOVE, S_CQ_WR
  } state_e;

  state_e             st;
  logic [HW-1:0]      head;
  logic [WQ_DEPTH-1:0] cq;
  wq_op_e             wop;
  dline_t             wline;
  logic               issued;      // request of the current state accepted
  logic               host_dirty;
  line_t              buf_q;       // line being merged into the EMS
  logic               vat_sent;
  logic               vat_way_q;
  logic [31:0]        vat_idx_q;
  logic [$clog2(POLL_GAP+1)-1:0] gap;

  // ---- coherent queue port ------------------------------------------------------
  always_comb begin
    cc_req       = '0;
    cc_req_valid = 1'b0;
    unique case (st)
      S_POLL: begin
        cc_req_valid = !issued;
        cc_req.addr  = wq_base + dline_t'(head);
      end
      S_DEQ: begin
        cc_req_valid = !issued;
        cc_req.we    = 1'b1;
        cc_req.addr  = wq_base + dline_t'(head);
        cc_req.wmask = '1;
      end
      S_CQ_WR: begin
        cc_req_valid = !issued;
        cc_req.we    = 1'b1;
        cc_req.addr  = cq_line;
        cc_req.wdata = cq ^ (line_t'(1) << head);
        cc_req.wmask = '1;
      end
      default: ;
    endcase
  end

  // ---- DRAM port (EMS writes, VMS reads) ---------------------------------------
  always_comb begin
    dram_req       = '0;
    dram_req_valid = 1'b0;
    unique case (st)
      S_EMS_WR: begin
        dram_req_valid = !issued;
        dram_req.we    = 1'b1;
        dram_req.addr  = wline;
        dram_req.wdata = buf_q;
        dram_req.wmask = '1;
      end
      S_COPY_RD: begin
        dram_req_valid = !issued;
        dram_req.addr  = res_in.vat_slot;
      end
      default: ;
    endcase
  end

  // ---- shared resources --------------------------------------------------------
  always_comb begin
    res          = '0;
    res.vf_qkey  = wline;
    res.vbf_qkey = wline;
    res.vat_ind  = make_ind(node_id, wline);
    res.vat_way  = vat_way_q;
    res.vat_idx  = vat_idx_q;
    res.bi.addr  = wline;
    unique case (st)
      S_BI:     res.bi_valid = 1'b1;
      S_BI_WAIT: begin
        res.vbf_rem     = res_in.bi_rsp_valid;   // line left the host cache
        res.vbf_rem_key = wline;
      end
      S_LOOKUP: begin
        res.vat_valid = !vat_sent;
        res.vat_op    = VAT_LOOKUP;
      end
      S_REMOVE: begin
        res.vat_valid = !vat_sent;
        res.vat_op    = VAT_REMOVE;
      end
      default: ;
    endcase
  end

  assign sb_req_valid = (st == S_BCAST);
  assign sb_req_line  = wline;
  assign lock_req     = st inside {S_LOCK, S_VBF, S_BI, S_BI_WAIT, S_EMS_WR,
                                   S_VF, S_LOOKUP, S_COPY_RD, S_REMOVE};

  wire cc_hs   = cc_req_valid && cc_req_ready;
  wire dr_hs   = dram_req_valid && dram_req_ready;
  wire cc_back = issued && cc_rsp_valid;
  wire dr_back = issued && dram_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_GAP; head <= '0; cq <= '0; wop <= WQ_GSYNC; wline <= '0;
      issued <= 1'b0; host_dirty <= 1'b0; buf_q <= '0; vat_sent <= 1'b0;
      vat_way_q <= 1'b0; vat_idx_q <= '0; gap <= '0;
      n_gsync <= '0; n_wd <= '0; n_bisnp <= '0; n_vms_copy <= '0;
    end else begin
      if (cc_hs || dr_hs) issued <= 1'b1;
      if (res.vat_valid && res_in.vat_ready && lock_gnt) vat_sent <= 1'b1;
      unique case (st)
        S_GAP: begin
          if (gap != '0) gap <= gap - 1'b1;
          else if (enable) st <= S_POLL;
        end
        S_POLL: if (cc_back) begin
          issued <= 1'b0;
          if (cc_rsp.rdata[WQE_VALID_BIT]) begin
            wop   <= wq_op_e'(cc_rsp.rdata[WQE_OP_BIT]);
            wline <= cc_rsp.rdata[DRAM_LINE_W-1:0];
            st    <= S_DEQ;
          end else begin
            gap <= ($bits(gap))'(POLL_GAP);
            st  <= S_GAP;
          end
        end
        S_DEQ: if (cc_back) begin
          issued     <= 1'b0;
          host_dirty <= 1'b0;
          if (wop == WQ_GSYNC) begin
            n_gsync <= n_gsync + 1;
            st <= S_BCAST;
          end else begin
            n_wd <= n_wd + 1;
            st <= S_LOCK;
          end
        end
        S_BCAST: if (sb_done) st <= S_LOCK;
        S_LOCK:  if (lock_gnt) st <= S_VBF;
        S_VBF:   st <= res_in.vbf_hit ? S_BI : S_VF;
        S_BI:    if (res_in.bi_ready) begin
          n_bisnp <= n_bisnp + 1;
          st <= S_BI_WAIT;
        end
        S_BI_WAIT: if (res_in.bi_rsp_valid) begin
          buf_q <= res_in.bi_rsp.data;
          if (res_in.bi_rsp.dirty && wop == WQ_GSYNC) begin
            host_dirty <= 1'b1;
            st <= S_EMS_WR;
          end else begin
            st <= S_VF;
          end
        end
        S_EMS_WR: if (dr_back) begin
          issued <= 1'b0;
          st <= S_VF;   // a VMS copy, if any, is older: drop it unmerged
        end
        S_VF: begin
          vat_sent <= 1'b0;
          st <= res_in.vf_hit ? S_LOOKUP : S_CQ_WR;
        end
        S_LOOKUP: if (vat_sent && res_in.vat_done) begin
          vat_sent  <= 1'b0;
          vat_way_q <= res_in.vat_way;
          vat_idx_q <= res_in.vat_idx;
          if (!res_in.vat_hit)                          st <= S_CQ_WR;
          else if (wop == WQ_GSYNC && !host_dirty)      st <= S_COPY_RD;
          else                                          st <= S_REMOVE;
        end
        S_COPY_RD: if (dr_back) begin
          issued     <= 1'b0;
          buf_q      <= dram_rsp.rdata;
          n_vms_copy <= n_vms_copy + 1;
          host_dirty <= 1'b1;           // after the EMS write, remove the VATE
          st         <= S_EMS_WR;
        end
        S_REMOVE: if (vat_sent && res_in.vat_done) begin
          vat_sent <= 1'b0;
          st <= S_CQ_WR;
        end
        S_CQ_WR: if (cc_back) begin
          issued   <= 1'b0;
          cq[head] <= ~cq[head];
          head     <= head + 1'b1;
          st       <= S_POLL;
        end
        default: st <= S_GAP;
      endcase
    end
  end
endmodule
