// vat_lut: the on-chip table lookup of the view address table (VAT), marked (1)
// in the paper's VAT figure, plus the per-table descriptors and occupancy
// counters the runtime thread (CTRt) reads to decide when to resize.
//
// The most significant 16 bits of the 56-bit view shim indicator select a LUT
// entry (paper). The top 4 of those bits are the node id, which is fixed for
// the CTHW that owns this LUT, so each CTHW keeps only the 2^12 entries for its
// own node (own choice). With the indicator layout of ctxnl_pkg those 12 bits
// are line[27:16], i.e. the 4 MB region of the line. Each entry names one of MAX_TABLES cuckoo hash tables
// (a "k x k" mapping of prefixes onto tables, as drawn), and each table has a
// descriptor holding its DRAM base line address. Several prefixes may share a
// table; VAT expansion (done by CTRt) moves some prefixes to new tables and
// rewrites their LUT entries. MAX_TABLES = 16 follows the 1/4/16-table setups
// the paper evaluates; the descriptor format is this design's own.
//
// Interface: combinational lookup (`q_ind` -> table id, base, valid); a write
// port for LUT entries and one for descriptors (from the CSR block); one
// increment and one decrement strobe for the occupancy counters, which count
// valid VATEs per table; a read-back port for the registers. A table whose descriptor is invalid makes every
// lookup through it miss.
module vat_lut
  import ctxnl_pkg::*;
#(
  parameter int unsigned MAX_TABLES = 16,
  parameter int unsigned OCC_W      = 21   // up to 1M entries per table
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // lookup
  input  ind_t                          q_ind,
  output logic [$clog2(MAX_TABLES)-1:0] q_tid,
  output dline_t                        q_base,
  output logic                          q_valid,
  // configuration
  input  logic                          lut_we,
  input  logic [LUT_IDX_W-NODE_W-1:0]   lut_idx,
  input  logic [$clog2(MAX_TABLES)-1:0] lut_tid,
  input  logic                          tbl_we,
  input  logic [$clog2(MAX_TABLES)-1:0] tbl_id,
  input  dline_t                        tbl_base,
  input  logic                          tbl_valid,
  // occupancy
  input  logic                          occ_inc,
  input  logic [$clog2(MAX_TABLES)-1:0] occ_inc_tid,
  input  logic                          occ_dec,
  input  logic [$clog2(MAX_TABLES)-1:0] occ_dec_tid,
  input  logic                          occ_clr,     // CTRt rewrote the tables
  input  logic [$clog2(MAX_TABLES)-1:0] occ_clr_tid,
  input  logic [OCC_W-1:0]              occ_clr_val,
  output logic [OCC_W-1:0]              occ [MAX_TABLES],
  // read-back for the register window
  input  logic [LUT_IDX_W-NODE_W-1:0]   rd_idx,
  output logic [$clog2(MAX_TABLES)-1:0] rd_tid,
  output dline_t                        tbase_o  [MAX_TABLES],
  output logic                          tvalid_o [MAX_TABLES]
);
  localparam int unsigned ENTRIES = 2 ** (LUT_IDX_W - NODE_W);
  localparam int unsigned TIDW    = $clog2(MAX_TABLES);

  logic [TIDW-1:0] lut      [ENTRIES];
  dline_t          tbase    [MAX_TABLES];
  logic            tvalid   [MAX_TABLES];

  logic [LUT_IDX_W-NODE_W-1:0] qidx;

  always_comb begin
    qidx    = q_ind[IND_W-NODE_W-1 -: (LUT_IDX_W-NODE_W)];
    q_tid   = lut[qidx];
    q_base  = tbase[q_tid];
    q_valid = tvalid[q_tid];
    rd_tid  = lut[rd_idx];
    for (int unsigned t = 0; t < MAX_TABLES; t++) begin
      tbase_o[t]  = tbase[t];
      tvalid_o[t] = tvalid[t];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) lut[i] <= '0;
    end else if (lut_we) begin
      lut[lut_idx] <= lut_tid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned t = 0; t < MAX_TABLES; t++) begin
        tbase[t]  <= '0;
        tvalid[t] <= 1'b0;
        occ[t]    <= '0;
      end
    end else begin
      if (tbl_we) begin
        tbase[tbl_id]  <= tbl_base;
        tvalid[tbl_id] <= tbl_valid;
      end
      for (int unsigned t = 0; t < MAX_TABLES; t++) begin
        if (occ_clr && occ_clr_tid == TIDW'(t))
          occ[t] <= occ_clr_val;
        else if (occ_inc && occ_inc_tid == TIDW'(t) && !(occ_dec && occ_dec_tid == TIDW'(t)))
          occ[t] <= occ[t] + 1'b1;
        else if (occ_dec && occ_dec_tid == TIDW'(t) && !(occ_inc && occ_inc_tid == TIDW'(t)))
          occ[t] <= occ[t] - 1'b1;
      end
    end
  end
endmodule
