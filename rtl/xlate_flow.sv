// xlate_flow: the view address translation flow of one CTHW, which serves the
// host's CXL.mem loads and dirty write-backs that fall in the CtXnL segment.
//
// L-Ld (a read that misses the whole host cache hierarchy):
//   the VMS back filter (VBF) records that the host now holds the line, and in
//   parallel the VMS filter (VF) is asked whether a view of the line may have
//   overflowed into the VMS. On a VF miss the line is read from its EMS
//   address. On a VF hit the VAT is walked: on a hit the view is read from its
//   VMS slot and its VATE removed (the view is back in the host cache); on a
//   miss (a false positive of the VF) the EMS line is read.
// L-St (a dirty write-back, i.e. an overflowing view):
//   the VBF forgets the line and the line is inserted into the VAT, never
//   written to the EMS, so no other node can observe it. The VF then records
//   the line. If the insert fails the VAT parks the entry and blocks; this
//   flow still completes the store, and later requests that need the VAT wait
//   until the runtime has resized it.
//
// This follows the paper's translation-flow figure and text. One difference:
// the figure draws the store branch after a VF hit, while the text has every
// dirty write-back insert into the VAT; the text is followed, since a store
// sent to the EMS would publish an uncommitted view.
//
// Interface: a request/response pair with valid/ready (one request at a time,
// addresses are lines inside the 16 GB shared DRAM), a lock request/grant for
// the CTHW's shared filters and VAT, and a DRAM port with one request in flight.
module xlate_flow
  import ctxnl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  node_t       node_id,
  // CtXnL-segment requests
  input  logic        req_valid,
  output logic        req_ready,
  input  mem_req_t    req,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output mem_rsp_t    rsp,
  // shared resources
  output logic        lock_req,
  input  logic        lock_gnt,
  output res_req_t    res,
  input  res_rsp_t    res_in,
  // DRAM data accesses
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output dram_req_t   dram_req,
  input  logic        dram_rsp_valid,
  input  dram_rsp_t   dram_rsp,
  // statistics
  output logic [31:0] n_loads,
  output logic [31:0] n_stores,
  output logic [31:0] n_vf_hits,
  output logic [31:0] n_vat_hits,
  output logic [31:0] n_vf_false_pos,
  output logic [31:0] n_parked
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOCK, S_LD_CHECK, S_LD_LOOKUP, S_LD_READ, S_LD_REMOVE,
    S_ST_INSERT, S_RESP
  } state_e;

  state_e   st;
  mem_req_t r;
  dline_t   line;
  dline_t   rd_addr;
  logic     rd_issued;
  logic     vat_sent;
  line_t    rdata;
  logic     vat_hit_q;
  logic     vat_way_q;
  logic [31:0] vat_idx_q;

  assign line      = dline_t'(r.addr);
  assign req_ready = (st == S_IDLE);
  assign lock_req  = (st != S_IDLE);

  // Drive the shared resources (only looked at while lock_gnt).
  always_comb begin
    res            = '0;
    res.vf_qkey    = line;
    res.vbf_qkey   = line;
    res.vat_ind    = make_ind(node_id, line);
    res.vat_data   = r.data;
    res.vat_way    = vat_way_q;
    res.vat_idx    = vat_idx_q;
    unique case (st)
      S_LD_CHECK: begin
        res.vbf_ins     = 1'b1;          // the host is about to hold the line
        res.vbf_ins_key = line;
      end
      S_LD_LOOKUP: begin
        res.vat_valid = !vat_sent;
        res.vat_op    = VAT_LOOKUP;
      end
      S_LD_REMOVE: begin
        res.vat_valid = !vat_sent;
        res.vat_op    = VAT_REMOVE;
      end
      S_ST_INSERT: begin
        res.vat_valid   = !vat_sent;
        res.vat_op      = VAT_INSERT;
        res.vbf_rem     = !vat_sent && res_in.vat_ready;   // once per store
        res.vbf_rem_key = line;
        res.vf_ins      = res_in.vat_done;
        res.vf_ins_key  = line;
      end
      default: ;
    endcase
  end

  assign dram_req_valid  = (st == S_LD_READ) && !rd_issued;
  assign dram_req.we     = 1'b0;
  assign dram_req.addr   = rd_addr;
  assign dram_req.wdata  = '0;
  assign dram_req.wmask  = '0;

  assign rsp_valid = (st == S_RESP);
  assign rsp.op    = r.op;
  assign rsp.tag   = r.tag;
  assign rsp.data  = (r.op == MEM_LD) ? rdata : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r <= '0; rd_addr <= '0; rd_issued <= 1'b0;
      vat_sent <= 1'b0; rdata <= '0; vat_hit_q <= 1'b0; vat_way_q <= 1'b0;
      vat_idx_q <= '0;
      n_loads <= '0; n_stores <= '0; n_vf_hits <= '0; n_vat_hits <= '0;
      n_vf_false_pos <= '0; n_parked <= '0;
    end else begin
      if (res.vat_valid && res_in.vat_ready && lock_gnt) vat_sent <= 1'b1;
      unique case (st)
        S_IDLE: if (req_valid) begin
          r  <= req;
          st <= S_LOCK;
        end
        S_LOCK: if (lock_gnt) begin
          vat_sent <= 1'b0;
          if (r.op == MEM_LD) begin
            n_loads <= n_loads + 1;
            st <= S_LD_CHECK;
          end else begin
            n_stores <= n_stores + 1;
            st <= S_ST_INSERT;
          end
        end
        S_LD_CHECK: begin
          vat_sent <= 1'b0;
          if (res_in.vf_hit) begin
            n_vf_hits <= n_vf_hits + 1;
            st <= S_LD_LOOKUP;
          end else begin
            rd_addr <= line;
            vat_hit_q <= 1'b0;
            st <= S_LD_READ;
          end
        end
        S_LD_LOOKUP: if (res_in.vat_done && vat_sent) begin
          vat_sent  <= 1'b0;
          vat_hit_q <= res_in.vat_hit;
          vat_way_q <= res_in.vat_way;
          vat_idx_q <= res_in.vat_idx;
          if (res_in.vat_hit) begin
            n_vat_hits <= n_vat_hits + 1;
            rd_addr <= res_in.vat_slot;
          end else begin
            n_vf_false_pos <= n_vf_false_pos + 1;
            rd_addr <= line;
          end
          st <= S_LD_READ;
        end
        S_LD_READ: begin
          if (dram_req_valid && dram_req_ready) rd_issued <= 1'b1;
          if (rd_issued && dram_rsp_valid) begin
            rdata     <= dram_rsp.rdata;
            rd_issued <= 1'b0;
            st        <= vat_hit_q ? S_LD_REMOVE : S_RESP;
          end
        end
        S_LD_REMOVE: if (res_in.vat_done && vat_sent) begin
          vat_sent <= 1'b0;
          st <= S_RESP;
        end
        S_ST_INSERT: if (res_in.vat_done && vat_sent) begin
          vat_sent <= 1'b0;
          if (!res_in.vat_ok) n_parked <= n_parked + 1;
          st <= S_RESP;
        end
        S_RESP: if (rsp_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // A response that is not taken stays offered, with the same tag.
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp.tag));
endmodule
