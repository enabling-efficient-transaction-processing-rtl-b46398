// vat_engine: the view address table (VAT) of one CTHW, a two-way cuckoo hash
// kept in the view memory store (VMS) in DRAM, with its three operations.
//
//   LOOKUP  (L-Ld that passed the VMS filter): read the VATE line for way 0 at
//           H1(tag), then the one for way 1 at H2(tag); a VATE whose stored
//           indicator equals the key is a hit. At most two DRAM reads, which is
//           the bound the flattened cuckoo table is there to give.
//   INSERT  (dirty write-back of an L-St view): if the key is already present
//           only its data slot is rewritten. Otherwise it goes to an empty way;
//           if both are taken it displaces the way-0 occupant, which moves to its
//           own alternative way, displacing in turn, until an empty slot is found
//           or MAX_RETRY displacements have been made.
//   REMOVE  invalidates one VATE (after a load consumed the view, a GSync merged
//           it, or a peer/Wd discarded it).
//
// Data slots are preallocated next to the entries (the paper preallocates the
// cacheline buffers of each table), so a displaced entry carries its 64-byte
// line with it. Layout of a table whose descriptor base is B (own choice): the
// VATE of way w, index i has flat number f = w*2^WAY_IDX_W + i and sits in word
// f%8 of line B + f/8; its data slot is line B + 2^(WAY_IDX_W-2) + f. A VATE is
// 64 bits: bit 63 valid, bits 55..0 the view shim indicator. The table is
// chosen by the LUT from the indicator's top 16 bits; hashing uses the low 40.
//
// Failure (paper): after MAX_RETRY displacements the engine stops serving the
// hash map (`blocked`), raises `resize_err`, and keeps the homeless entry and
// its data in a park register. When the runtime has resized the VAT it pulses
// `retry`; the parked entry is inserted again from the start. An INSERT into a
// table whose descriptor is invalid fails the same way.
//
// While the runtime migrates entries of a table that has not failed (a resize
// driven by the occupancy threshold) it raises `hold`: the operation in
// progress finishes, and no new one is accepted until `hold` drops. The paper:
// CTRt "temporarily blocks any access to the hash table" it is resizing.
//
// Defaults: 2 ways x 2^19 = 1M entries per table (paper: "1M entries/hash
// table, 2-way"), MAX_RETRY = 64 (the paper's retry threshold). The hash
// functions themselves are not given by the paper and are XOR folds.
//
// Interface: one operation at a time, `op_valid`/`op_ready` then a one-cycle
// `done` with results. DRAM port: one request in flight, one response each.
module vat_engine
  import ctxnl_pkg::*;
#(
  parameter int unsigned MAX_TABLES = 16,
  parameter int unsigned WAY_IDX_W  = 19,
  parameter int unsigned MAX_RETRY  = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // operation
  input  logic                          op_valid,
  output logic                          op_ready,
  input  logic [1:0]                    op,        // 0 lookup, 1 insert, 2 remove
  input  ind_t                          op_ind,
  input  line_t                         op_data,
  input  logic                          op_way,
  input  logic [WAY_IDX_W-1:0]          op_idx,
  output logic                          done,
  output logic                          res_hit,   // lookup/insert found key
  output logic                          res_ok,    // insert placed (else parked)
  output logic                          res_way,
  output logic [WAY_IDX_W-1:0]          res_idx,
  output dline_t                        res_slot,  // data slot line of the hit
  // LUT lookup and occupancy
  output ind_t                          lut_ind,
  input  logic [$clog2(MAX_TABLES)-1:0] lut_tid,
  input  dline_t                        lut_base,
  input  logic                          lut_valid,
  output logic                          occ_inc,
  output logic                          occ_dec,
  output logic [$clog2(MAX_TABLES)-1:0] occ_tid,
  // resize handshake with the runtime
  output logic                          blocked,
  output logic                          resize_err,
  input  logic                          retry,
  input  logic                          hold,      // runtime resize in progress
  // statistics
  output logic [31:0]                   n_kicks,
  output logic [31:0]                   n_fails,
  // DRAM
  output logic                          dram_req_valid,
  input  logic                          dram_req_ready,
  output dram_req_t                     dram_req,
  input  logic                          dram_rsp_valid,
  input  dram_rsp_t                     dram_rsp
);
  localparam logic [1:0] OP_LOOKUP = 2'd0, OP_INSERT = 2'd1, OP_REMOVE = 2'd2;
  localparam int unsigned FW   = WAY_IDX_W + 1;
  localparam int unsigned TIDW = $clog2(MAX_TABLES);
  localparam int unsigned RW   = $clog2(MAX_RETRY + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_RD0, S_RD1, S_DECIDE, S_WR_DATA, S_WR_VATE,
    S_KICK_RD_DATA, S_KICK_RD_ALT, S_REMOVE, S_PARKED, S_DONE
  } state_e;

  state_e                 st;
  logic [1:0]             cur_op;
  ind_t                   key;          // entry being placed / looked up
  line_t                  data;         // its line
  dline_t                 base;
  logic [TIDW-1:0]        tid;
  logic [WAY_IDX_W-1:0]   idx0, idx1;   // H1 / H2 of key
  logic [63:0]            vate0;        // VATE read at idx0
  logic                   tgt_way;      // where key goes next
  logic [WAY_IDX_W-1:0]   tgt_idx;
  logic [63:0]            victim;       // VATE displaced from (tgt_way,tgt_idx)
  line_t                  victim_data;
  logic [RW-1:0]          tries;
  logic                   pend;         // DRAM request issued, waiting response
  logic                   retrying;     // working on the parked entry
  logic                   place_new;    // the write fills an empty slot
  logic                   hit_q, ok_q, hway_q;
  logic [WAY_IDX_W-1:0]   hidx_q;
  logic                   after_wr_kick; // after writing, continue displacement

  // ---- address helpers -------------------------------------------------------
  function automatic logic [FW-1:0] flat(logic w, logic [WAY_IDX_W-1:0] i);
    return {w, i};
  endfunction
  function automatic dline_t vate_line(dline_t b, logic w, logic [WAY_IDX_W-1:0] i);
    return b + (dline_t'(flat(w, i)) >> 3);
  endfunction
  function automatic dline_t slot_line(dline_t b, logic w, logic [WAY_IDX_W-1:0] i);
    return b + dline_t'(2 ** (WAY_IDX_W - 2)) + dline_t'(flat(w, i));
  endfunction
  function automatic logic [63:0] word_of(line_t l, logic w, logic [WAY_IDX_W-1:0] i);
    logic [2:0] sel;
    sel = flat(w, i)[2:0];
    return l[sel*64 +: 64];
  endfunction
  function automatic logic [WAY_IDX_W-1:0] hidx(ind_t k, logic w);
    return w ? WAY_IDX_W'(ck_h2(k[TAG_W-1:0], WAY_IDX_W))
             : WAY_IDX_W'(ck_h1(k[TAG_W-1:0], WAY_IDX_W));
  endfunction
  function automatic logic vmatch(logic [63:0] v, ind_t k);
    return v[VATE_VALID_BIT] && (v[IND_W-1:0] == k);
  endfunction

  // DRAM request builder for the state being entered.
  dram_req_t nreq;

  assign lut_ind    = key;
  assign op_ready   = (st == S_IDLE) && !hold;
  assign blocked    = (st == S_PARKED) || retrying;
  assign res_hit    = hit_q;
  assign res_ok     = ok_q;
  assign res_way    = hway_q;
  assign res_idx    = hidx_q;
  assign res_slot   = slot_line(base, hway_q, hidx_q);
  assign occ_tid    = tid;

  // Request for the current state (held stable while !pend).
  always_comb begin
    nreq = '0;
    unique case (st)
      S_RD0:          nreq.addr = vate_line(base, 1'b0, idx0);
      S_RD1:          nreq.addr = vate_line(base, 1'b1, idx1);
      S_KICK_RD_DATA: nreq.addr = slot_line(base, tgt_way, tgt_idx);
      S_KICK_RD_ALT:  nreq.addr = vate_line(base, tgt_way, tgt_idx);
      S_WR_DATA: begin
        nreq.we    = 1'b1;
        nreq.addr  = slot_line(base, tgt_way, tgt_idx);
        nreq.wdata = data;
        nreq.wmask = '1;
      end
      S_WR_VATE, S_REMOVE: begin
        nreq.we    = 1'b1;
        nreq.addr  = vate_line(base, tgt_way, tgt_idx);
        nreq.wdata = {WORDS{(st == S_REMOVE) ? 64'd0
                            : {1'b1, {(63-IND_W){1'b0}}, key}}};
        nreq.wmask = LINE_BYTES'(64'hFF) << (flat(tgt_way, tgt_idx)[2:0] * 8);
      end
      default: ;
    endcase
  end

  assign dram_req_valid = !pend && (st inside {S_RD0, S_RD1, S_KICK_RD_DATA,
                                    S_KICK_RD_ALT, S_WR_DATA, S_WR_VATE, S_REMOVE});
  assign dram_req       = nreq;

  wire issued  = dram_req_valid && dram_req_ready;
  wire got_rsp = pend && dram_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur_op <= OP_LOOKUP; key <= '0; data <= '0; base <= '0;
      tid <= '0; idx0 <= '0; idx1 <= '0; vate0 <= '0;
      tgt_way <= 1'b0; tgt_idx <= '0; victim <= '0; victim_data <= '0;
      tries <= '0; pend <= 1'b0; retrying <= 1'b0; place_new <= 1'b0;
      hit_q <= 1'b0; ok_q <= 1'b0; hway_q <= 1'b0; hidx_q <= '0;
      after_wr_kick <= 1'b0; done <= 1'b0; occ_inc <= 1'b0; occ_dec <= 1'b0;
      resize_err <= 1'b0; n_kicks <= '0; n_fails <= '0;
    end else begin
      done    <= 1'b0;
      occ_inc <= 1'b0;
      occ_dec <= 1'b0;
      if (issued)  pend <= 1'b1;
      if (got_rsp) pend <= 1'b0;

      unique case (st)
        S_IDLE: if (op_valid && !hold) begin
          cur_op <= op;
          key    <= op_ind;
          data   <= op_data;
          hit_q  <= 1'b0;
          ok_q   <= 1'b0;
          tries  <= '0;
          idx0   <= hidx(op_ind, 1'b0);
          idx1   <= hidx(op_ind, 1'b1);
          tgt_way <= op_way;
          tgt_idx <= op_idx;
          st     <= S_DECIDE;   // one cycle to let the LUT answer for `key`
          place_new <= 1'b0;
          after_wr_kick <= 1'b0;
        end

        // LUT result for `key` is valid now; pick the path.
        S_DECIDE: begin
          base <= lut_base;
          tid  <= lut_tid;
          if (cur_op == OP_REMOVE) begin
            st <= S_REMOVE;
          end else if (!lut_valid) begin
            if (cur_op == OP_INSERT) begin
              st <= S_PARKED; resize_err <= 1'b1; n_fails <= n_fails + 1;
              if (!retrying) begin ok_q <= 1'b0; done <= 1'b1; end
            end else begin
              st <= S_DONE;
            end
          end else begin
            st <= S_RD0;
          end
        end

        S_RD0: if (got_rsp) begin
          vate0 <= word_of(dram_rsp.rdata, 1'b0, idx0);
          if (vmatch(word_of(dram_rsp.rdata, 1'b0, idx0), key)) begin
            hit_q <= 1'b1; hway_q <= 1'b0; hidx_q <= idx0;
            if (cur_op == OP_INSERT) begin
              tgt_way <= 1'b0; tgt_idx <= idx0; st <= S_WR_DATA;
            end else st <= S_DONE;
          end else st <= S_RD1;
        end

        S_RD1: if (got_rsp) begin
          if (vmatch(word_of(dram_rsp.rdata, 1'b1, idx1), key)) begin
            hit_q <= 1'b1; hway_q <= 1'b1; hidx_q <= idx1;
            if (cur_op == OP_INSERT) begin
              tgt_way <= 1'b1; tgt_idx <= idx1; st <= S_WR_DATA;
            end else st <= S_DONE;
          end else if (cur_op == OP_LOOKUP) begin
            st <= S_DONE;
          end else if (!vate0[VATE_VALID_BIT]) begin
            tgt_way <= 1'b0; tgt_idx <= idx0; place_new <= 1'b1; st <= S_WR_DATA;
          end else if (!word_of(dram_rsp.rdata, 1'b1, idx1)[VATE_VALID_BIT]) begin
            tgt_way <= 1'b1; tgt_idx <= idx1; place_new <= 1'b1; st <= S_WR_DATA;
          end else begin
            // both ways taken: displace the way-0 occupant
            tgt_way <= 1'b0; tgt_idx <= idx0; victim <= vate0;
            st <= S_KICK_RD_DATA;
          end
        end

        // read the victim's line before overwriting its slot
        S_KICK_RD_DATA: if (got_rsp) begin
          victim_data   <= dram_rsp.rdata;
          after_wr_kick <= 1'b1;
          n_kicks       <= n_kicks + 1;
          st            <= S_WR_DATA;
        end

        S_WR_DATA: if (got_rsp) st <= S_WR_VATE;

        S_WR_VATE: if (got_rsp) begin
          if (after_wr_kick) begin
            // key now sits at (tgt_way,tgt_idx); carry the victim onward
            after_wr_kick <= 1'b0;
            key     <= victim[IND_W-1:0];
            data    <= victim_data;
            tgt_way <= ~tgt_way;
            tgt_idx <= hidx(victim[IND_W-1:0], ~tgt_way);
            st      <= S_KICK_RD_ALT;
          end else begin
            if (place_new) occ_inc <= 1'b1;
            ok_q <= 1'b1;
            st   <= S_DONE;
          end
        end

        // VATE at the displaced entry's alternative location
        S_KICK_RD_ALT: if (got_rsp) begin
          if (!word_of(dram_rsp.rdata, tgt_way, tgt_idx)[VATE_VALID_BIT]) begin
            place_new <= 1'b1;
            st        <= S_WR_DATA;
          end else if (tries == RW'(MAX_RETRY - 1)) begin
            st <= S_PARKED; resize_err <= 1'b1; n_fails <= n_fails + 1;
            if (!retrying) begin ok_q <= 1'b0; done <= 1'b1; end
          end else begin
            tries  <= tries + 1'b1;
            victim <= word_of(dram_rsp.rdata, tgt_way, tgt_idx);
            st     <= S_KICK_RD_DATA;
          end
        end

        S_REMOVE: if (got_rsp) begin
          occ_dec <= 1'b1;
          st      <= S_DONE;
        end

        // holding the homeless entry in `key`/`data` until the runtime resized
        S_PARKED: begin
          retrying <= 1'b0;
          if (retry) begin
            resize_err <= 1'b0;
            retrying   <= 1'b1;
            cur_op     <= OP_INSERT;
            tries      <= '0;
            idx0       <= hidx(key, 1'b0);
            idx1       <= hidx(key, 1'b1);
            place_new  <= 1'b0;
            after_wr_kick <= 1'b0;
            st         <= S_DECIDE;
          end
        end

        S_DONE: begin
          if (!retrying) done <= 1'b1;
          retrying <= 1'b0;
          st <= S_IDLE;
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  // The displacement loop may only run for an INSERT.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (st == S_KICK_RD_DATA) |-> (cur_op == OP_INSERT));
endmodule
