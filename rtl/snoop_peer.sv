// snoop_peer: the peer datapath of one CTHW on the coherence snoop bus.
//
// When another node's CTHW publishes a line with GSync, it broadcasts the
// line's EMS address. Every peer must then drop its own stale copies (paper,
// synchronisation figure):
//   - if its VMS filter hits, the line is looked up in its VAT and, if a view
//     is there, the VATE is removed (the view is discarded, not merged);
//   - if its VMS back filter hits, its host's copy is back-invalidated with a
//     CXL.BI BISnpInv. Whatever data the host returns is ignored: it is out of
//     date. The VMS back filter then forgets the line.
// The peer acknowledges on the bus when both checks are done. The order of the
// two checks is this design's choice (VMS first).
//
// Interface: `snp_valid`/`snp_line` is held by the bus until `snp_ack` (one
// cycle); the CTHW's shared resources are used under its lock.
module snoop_peer
  import ctxnl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  node_t       node_id,
  input  logic        snp_valid,
  input  dline_t      snp_line,
  output logic        snp_ack,
  output logic        lock_req,
  input  logic        lock_gnt,
  output res_req_t    res,
  input  res_rsp_t    res_in,
  output logic [31:0] n_snoops,
  output logic [31:0] n_vat_drops,
  output logic [31:0] n_bisnp
);
  typedef enum logic [2:0] {
    S_IDLE, S_LOCK, S_VF, S_LOOKUP, S_REMOVE, S_VBF, S_BI, S_BI_WAIT
  } state_e;

  state_e      st;
  dline_t      line;
  logic        vat_sent;
  logic        vat_way_q;
  logic [31:0] vat_idx_q;

  always_comb begin
    res          = '0;
    res.vf_qkey  = line;
    res.vbf_qkey = line;
    res.vat_ind  = make_ind(node_id, line);
    res.vat_way  = vat_way_q;
    res.vat_idx  = vat_idx_q;
    res.bi.addr  = line;
    unique case (st)
      S_LOOKUP: begin res.vat_valid = !vat_sent; res.vat_op = VAT_LOOKUP; end
      S_REMOVE: begin res.vat_valid = !vat_sent; res.vat_op = VAT_REMOVE; end
      S_BI:     res.bi_valid = 1'b1;
      S_BI_WAIT: begin
        res.vbf_rem     = res_in.bi_rsp_valid;
        res.vbf_rem_key = line;
      end
      default: ;
    endcase
  end

  assign lock_req = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; line <= '0; vat_sent <= 1'b0; vat_way_q <= 1'b0;
      vat_idx_q <= '0; snp_ack <= 1'b0;
      n_snoops <= '0; n_vat_drops <= '0; n_bisnp <= '0;
    end else begin
      snp_ack <= 1'b0;
      if (res.vat_valid && res_in.vat_ready && lock_gnt) vat_sent <= 1'b1;
      unique case (st)
        S_IDLE: if (snp_valid && !snp_ack) begin
          line     <= snp_line;
          n_snoops <= n_snoops + 1;
          st       <= S_LOCK;
        end
        S_LOCK: if (lock_gnt) begin
          vat_sent <= 1'b0;
          st <= S_VF;
        end
        S_VF: st <= res_in.vf_hit ? S_LOOKUP : S_VBF;
        S_LOOKUP: if (vat_sent && res_in.vat_done) begin
          vat_sent  <= 1'b0;
          vat_way_q <= res_in.vat_way;
          vat_idx_q <= res_in.vat_idx;
          st <= res_in.vat_hit ? S_REMOVE : S_VBF;
        end
        S_REMOVE: if (vat_sent && res_in.vat_done) begin
          vat_sent    <= 1'b0;
          n_vat_drops <= n_vat_drops + 1;
          st <= S_VBF;
        end
        S_VBF: if (res_in.vbf_hit) st <= S_BI;
               else begin snp_ack <= 1'b1; st <= S_IDLE; end
        S_BI: if (res_in.bi_ready) begin
          n_bisnp <= n_bisnp + 1;
          st <= S_BI_WAIT;
        end
        S_BI_WAIT: if (res_in.bi_rsp_valid) begin
          snp_ack <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
