// ctxnl_pkg: types and constants shared by the G-FAM side agent (CTHW) of the
// hybrid-coherence CXL memory-sharing device.
//
// All widths here are in cachelines (64 bytes) unless the name says otherwise.
// The shared DRAM is 16 GB (2^28 lines); the host sees it three times, once per
// primitive segment (CtXnL, CXL-vanilla, hardware configuration), so a host-side
// line address within the device window is 30 bits. Those sizes and the 4-bit
// node id, 56-bit view shim indicator, 16-bit LUT index and 40-bit cuckoo tag
// follow the paper. The request/response structs, tags and the DRAM write mask
// are this design's own choices.
package ctxnl_pkg;

  // ---- sizes taken from the paper --------------------------------------------
  localparam int unsigned LINE_BYTES   = 64;   // CXL.mem granularity
  localparam int unsigned LINE_BITS    = 512;
  localparam int unsigned DRAM_LINE_W  = 28;   // 16 GB shared DRAM
  localparam int unsigned PA_LINE_W    = 30;   // 3 x 16 GB primitive window
  localparam int unsigned NODE_W       = 4;    // 4-bit node id, up to 16 nodes
  localparam int unsigned IND_W        = 56;   // view shim indicator width
  localparam int unsigned LUT_IDX_W    = 16;   // MSBs of indicator -> LUT
  localparam int unsigned TAG_W        = 40;   // remaining bits -> cuckoo hash
  localparam int unsigned EMS_IND_W    = IND_W - NODE_W; // EMS line field (52)

  // ---- design choices -------------------------------------------------------
  localparam int unsigned TAGID_W      = 8;    // request tag echoed in responses
  localparam int unsigned WORDS        = LINE_BITS / 64;

  typedef logic [LINE_BITS-1:0]   line_t;
  typedef logic [DRAM_LINE_W-1:0] dline_t;
  typedef logic [PA_LINE_W-1:0]   paline_t;
  typedef logic [NODE_W-1:0]      node_t;
  typedef logic [IND_W-1:0]       ind_t;

  // Primitive segment of the 3x window, in the order the paper's memory-mapping
  // figure draws them.
  typedef enum logic [1:0] {
    SEG_CTXNL   = 2'd0,
    SEG_VANILLA = 2'd1,
    SEG_HWCFG   = 2'd2,
    SEG_NONE    = 2'd3
  } seg_e;

  typedef enum logic { MEM_LD = 1'b0, MEM_ST = 1'b1 } mem_op_e;

  // Host -> device memory request as delivered by the CXL IP (M2S Req / RwD).
  typedef struct packed {
    mem_op_e              op;
    paline_t              addr;   // line address inside the device window
    logic [TAGID_W-1:0]   tag;
    line_t                data;   // write data for MEM_ST (dirty write-back)
  } mem_req_t;

  // Device -> host response (S2M DRS for loads, NDR completion for stores).
  typedef struct packed {
    mem_op_e              op;
    logic [TAGID_W-1:0]   tag;
    line_t                data;
  } mem_rsp_t;

  // Line-granular DRAM / coherent-cache port. Every request gets one response.
  typedef struct packed {
    logic                 we;
    dline_t               addr;
    line_t                wdata;
    logic [LINE_BYTES-1:0] wmask; // byte enables for writes
  } dram_req_t;

  typedef struct packed {
    line_t                rdata;
  } dram_rsp_t;

  // CXL.BI back-invalidation snoop (BISnpInv) and its answer.
  typedef struct packed {
    dline_t               addr;
  } bi_req_t;

  typedef struct packed {
    logic                 dirty;  // host returned modified data
    line_t                data;
  } bi_rsp_t;

  // GSync / Wd work queue element, carried in the low 64 bits of one line.
  typedef enum logic { WQ_GSYNC = 1'b0, WQ_WD = 1'b1 } wq_op_e;

  localparam int unsigned WQE_VALID_BIT = 63;
  localparam int unsigned WQE_OP_BIT    = 62;
  localparam int unsigned WQ_DEPTH      = LINE_BITS; // CQ is one line: 1 bit/WQE

  // View address table entry, 64 bits: {valid, 7'b0, indicator}.
  localparam int unsigned VATE_VALID_BIT = 63;

  // Build the 56-bit view shim indicator of a line of node `node`:
  //   [55:52] node id, [51:40] LUT prefix = line[27:16], [39:0] hash tag =
  //   the whole line address, zero-extended.
  // The paper gives the total width, the 4-bit node id, the 16-bit LUT part and
  // the 40-bit hashed part. Putting the top line bits in the prefix (own
  // choice) lets the runtime spread the 16 GB over several tables in 4 MB
  // regions; keeping the whole line in the tag makes the hashed part alone
  // identify the line, so tables shared by several prefixes hash well.
  localparam int unsigned PREFIX_W = LUT_IDX_W - NODE_W;   // 12
  function automatic ind_t make_ind(node_t node, dline_t line);
    return {node, line[DRAM_LINE_W-1 -: PREFIX_W],
            {(TAG_W-DRAM_LINE_W){1'b0}}, line};
  endfunction

  // Multiplicative (Fibonacci) hashing: the top `w` bits (w <= 32) of the
  // 64-bit product of the key with an odd constant. Each hash below uses its
  // own constant, which keeps the two indexes of a pair independent.
  function automatic logic [31:0] mul_hash(logic [63:0] key, logic [63:0] c,
                                           int unsigned w);
    logic [63:0] p;
    p = key * c;
    return 32'(p >> (64 - w));
  endfunction

  // Bloom-filter hashes (VF and VBF): two indexes of `w` bits.
  function automatic logic [31:0] bf_hash0(logic [63:0] key, int unsigned w);
    return mul_hash(key, 64'h9e3779b97f4a7c15, w);
  endfunction
  function automatic logic [31:0] bf_hash1(logic [63:0] key, int unsigned w);
    return mul_hash(key, 64'hc2b2ae3d27d4eb4f, w);
  endfunction

  // Cuckoo hashes H1/H2 over the 40-bit tag, each `w` bits wide.
  function automatic logic [31:0] ck_h1(logic [TAG_W-1:0] tag, int unsigned w);
    return mul_hash(64'(tag), 64'hff51afd7ed558ccd, w);
  endfunction
  function automatic logic [31:0] ck_h2(logic [TAG_W-1:0] tag, int unsigned w);
    return mul_hash(64'(tag), 64'hc4ceb9fe1a85ec53, w);
  endfunction

  // ---- per-CTHW shared resources --------------------------------------------
  // The VMS filter, VMS back filter, VAT engine and CXL.BI port of a CTHW are
  // used by one client at a time (translation flow, GSync/Wd requester or peer
  // snoop handler). A client drives a res_req_t while it holds the lock and
  // reads the common res_rsp_t.
  localparam logic [1:0] VAT_LOOKUP = 2'd0, VAT_INSERT = 2'd1, VAT_REMOVE = 2'd2;

  typedef struct packed {
    dline_t       vf_qkey;
    logic         vf_ins;
    dline_t       vf_ins_key;
    dline_t       vbf_qkey;
    logic         vbf_ins;
    dline_t       vbf_ins_key;
    logic         vbf_rem;
    dline_t       vbf_rem_key;
    logic         vat_valid;
    logic [1:0]   vat_op;
    ind_t         vat_ind;
    line_t        vat_data;
    logic         vat_way;
    logic [31:0]  vat_idx;
    logic         bi_valid;
    bi_req_t      bi;
  } res_req_t;

  typedef struct packed {
    logic         vf_hit;
    logic         vbf_hit;
    logic         vat_ready;
    logic         vat_done;
    logic         vat_hit;
    logic         vat_ok;
    logic         vat_way;
    logic [31:0]  vat_idx;
    dline_t       vat_slot;
    logic         bi_ready;
    logic         bi_rsp_valid;
    bi_rsp_t      bi_rsp;
  } res_rsp_t;

  // Event counters of one CTHW, brought out for observation.
  typedef struct packed {
    logic [31:0] loads;          // L-Ld served
    logic [31:0] stores;         // L-St write-backs absorbed
    logic [31:0] vf_hits;        // loads that passed the VMS filter
    logic [31:0] vat_hits;       // loads served from the VMS
    logic [31:0] vf_false_pos;   // VMS filter hits with no VATE
    logic [31:0] parked;         // inserts that failed and blocked the VAT
    logic [31:0] kicks;          // cuckoo displacements
    logic [31:0] fails;          // insert failures (incl. retries)
    logic [31:0] gsync;          // GSync requests executed
    logic [31:0] wd;             // Wd requests executed
    logic [31:0] req_bisnp;      // BISnpInv sent as requester
    logic [31:0] vms_copy;       // VMS -> EMS merges
    logic [31:0] snoops;         // broadcasts served as a peer
    logic [31:0] peer_vat_drops; // peer views discarded
    logic [31:0] peer_bisnp;     // BISnpInv sent as a peer
    logic [31:0] seg_ctxnl;      // host requests per primitive segment
    logic [31:0] seg_vanilla;
    logic [31:0] seg_hwcfg;
    logic [31:0] seg_none;       // outside the three segments
  } cthw_stats_t;

endpackage
