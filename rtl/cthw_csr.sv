// cthw_csr: the hardware configuration segment of one CTHW.
//
// The paper reserves a third address segment for the CTHW's own data (VAT hash
// tables, VMS contents, work and completion queues) and says that the VAT
// occupancy is exposed there for the runtime thread (CTRt), which also
// reprograms the table LUT when it resizes the VAT and restarts an insertion
// that failed. The register layout below is this design's own. The low 8192
// lines of the segment are a register window (value in the low 64 bits of the
// line); every other line of the segment reaches the shared DRAM directly, so
// CTRt can build and migrate hash tables while the VAT is blocked.
//
//   line 0x0000-0x0FFF  LUT entry i: table id                        (rw)
//   line 0x1000+t       table t descriptor: [63] valid, [27:0] base   (rw)
//   line 0x1010+t       table t occupancy (valid VATEs); write sets it (rw)
//   line 0x1020         status: [0] resize error, [1] VAT blocked;
//                       writing 1 to bit 0 restarts the parked insertion
//   line 0x1021         work queue base line                          (rw)
//   line 0x1022         completion queue line                         (rw)
//   line 0x1023         control: [0] work-queue polling enable,        (rw)
//                       [1] hold the VAT (no new lookups or inserts are
//                       accepted while CTRt migrates a table)
//   line 0x1024         VMS filter inserts since reset                 (ro)
//
// `irq` is the resize error bit: it signals CTRt. Register accesses answer one
// cycle after acceptance (read data comes straight from the registers); DRAM accesses when the DRAM answers.
module cthw_csr
  import ctxnl_pkg::*;
#(
  parameter int unsigned MAX_TABLES = 16,
  parameter int unsigned OCC_W      = 21
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  mem_req_t    req,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output mem_rsp_t    rsp,
  // VAT LUT programming
  output logic                          lut_we,
  output logic [LUT_IDX_W-NODE_W-1:0]   lut_idx,
  output logic [$clog2(MAX_TABLES)-1:0] lut_tid,
  output logic                          tbl_we,
  output logic [$clog2(MAX_TABLES)-1:0] tbl_id,
  output dline_t                        tbl_base,
  output logic                          tbl_valid,
  output logic                          occ_clr,
  output logic [$clog2(MAX_TABLES)-1:0] occ_clr_tid,
  output logic [OCC_W-1:0]              occ_clr_val,
  input  logic [OCC_W-1:0]              occ [MAX_TABLES],
  // read-back of descriptors
  input  dline_t                        tbl_base_rd  [MAX_TABLES],
  input  logic                          tbl_valid_rd [MAX_TABLES],
  input  logic [$clog2(MAX_TABLES)-1:0] lut_rd_tid,   // LUT entry at lut_idx
  // VAT resize handshake
  input  logic        resize_err,
  input  logic        vat_blocked,
  output logic        retry,
  output logic        vat_hold,     // runtime holds the VAT during a resize
  output logic        irq,
  // queue configuration
  output dline_t      wq_base,
  output dline_t      cq_line,
  output logic        wq_enable,
  input  logic [31:0] vf_inserts,
  // DRAM for the rest of the segment
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output dram_req_t   dram_req,
  input  logic        dram_rsp_valid,
  input  dram_rsp_t   dram_rsp
);
  localparam int unsigned TIDW = $clog2(MAX_TABLES);
  localparam dline_t WIN   = dline_t'(8192);
  localparam dline_t A_TBL = dline_t'(16'h1000);
  localparam dline_t A_OCC = dline_t'(16'h1010);
  localparam dline_t A_ST  = dline_t'(16'h1020);
  localparam dline_t A_WQ  = dline_t'(16'h1021);
  localparam dline_t A_CQ  = dline_t'(16'h1022);
  localparam dline_t A_CTL = dline_t'(16'h1023);
  localparam dline_t A_VF  = dline_t'(16'h1024);

  typedef enum logic [1:0] { S_IDLE, S_DRAM, S_DRAM_WAIT, S_RESP } state_e;
  state_e    st;
  mem_req_t  r;
  dline_t    a;
  logic [63:0] rd;
  line_t     rdata;

  assign a         = dline_t'(r.addr);
  assign req_ready = (st == S_IDLE);
  assign irq       = resize_err;

  // LUT index is taken from the request being decoded in S_IDLE so that the
  // read-back value is ready one cycle later.
  assign lut_idx   = (LUT_IDX_W-NODE_W)'(req_valid && st == S_IDLE ? req.addr : r.addr);

  wire wr_now = req_valid && req_ready && (req.op == MEM_ST)
                && (dline_t'(req.addr) < WIN);
  dline_t wa;
  assign wa = dline_t'(req.addr);

  always_comb begin
    lut_we      = wr_now && (wa < dline_t'(16'h1000));
    lut_tid     = TIDW'(req.data[TIDW-1:0]);
    tbl_we      = wr_now && (wa >= A_TBL) && (wa < A_TBL + dline_t'(MAX_TABLES));
    tbl_id      = TIDW'(wa - A_TBL);
    tbl_base    = req.data[DRAM_LINE_W-1:0];
    tbl_valid   = req.data[63];
    occ_clr     = wr_now && (wa >= A_OCC) && (wa < A_OCC + dline_t'(MAX_TABLES));
    occ_clr_tid = TIDW'(wa - A_OCC);
    occ_clr_val = req.data[OCC_W-1:0];
    retry       = wr_now && (wa == A_ST) && req.data[0];
  end

  // register read value
  always_comb begin
    rd = '0;
    if (a < dline_t'(16'h1000))                                   rd = 64'(lut_rd_tid);
    else if (a >= A_TBL && a < A_TBL + dline_t'(MAX_TABLES))
      rd = {tbl_valid_rd[TIDW'(a - A_TBL)], 35'd0, tbl_base_rd[TIDW'(a - A_TBL)]};
    else if (a >= A_OCC && a < A_OCC + dline_t'(MAX_TABLES))      rd = 64'(occ[TIDW'(a - A_OCC)]);
    else if (a == A_ST)  rd = {62'd0, vat_blocked, resize_err};
    else if (a == A_WQ)  rd = 64'(wq_base);
    else if (a == A_CQ)  rd = 64'(cq_line);
    else if (a == A_CTL) rd = {62'd0, vat_hold, wq_enable};
    else if (a == A_VF)  rd = 64'(vf_inserts);
  end

  assign dram_req_valid = (st == S_DRAM);
  assign dram_req.we    = (r.op == MEM_ST);
  assign dram_req.addr  = a;
  assign dram_req.wdata = r.data;
  assign dram_req.wmask = '1;

  assign rsp_valid = (st == S_RESP);
  assign rsp.op    = r.op;
  assign rsp.tag   = r.tag;
  assign rsp.data  = (a < WIN) ? ((r.op == MEM_LD) ? line_t'(rd) : '0) : rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r <= '0; rdata <= '0;
      wq_base <= '0; cq_line <= '0; wq_enable <= 1'b0; vat_hold <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (req_valid) begin
          r <= req;
          if (dline_t'(req.addr) < WIN) begin
            st <= S_RESP;
            if (req.op == MEM_ST) begin
              if (wa == A_WQ)  wq_base   <= req.data[DRAM_LINE_W-1:0];
              if (wa == A_CQ)  cq_line   <= req.data[DRAM_LINE_W-1:0];
              if (wa == A_CTL) begin
                wq_enable <= req.data[0];
                vat_hold  <= req.data[1];
              end
            end
          end else begin
            st <= S_DRAM;
          end
        end
        S_DRAM: if (dram_req_ready) st <= S_DRAM_WAIT;
        S_DRAM_WAIT: if (dram_rsp_valid) begin
          rdata <= (r.op == MEM_LD) ? dram_rsp.rdata : '0;
          st    <= S_RESP;
        end
        S_RESP: if (rsp_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
