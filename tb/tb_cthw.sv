// tb_cthw: self-checking test of one CTHW with all its sub-blocks, at small
// VAT tables (2 ways x 16 entries, 8 displacements).
//
// The testbench stands in for everything outside the agent: the host (requests,
// a cache answering CXL.BI, the memory holding the work and completion
// queues), the CXL-vanilla path, the snoop bus (it answers this node's
// broadcast requests and presents broadcasts from imaginary other nodes), and
// the DRAM. It checks, in order:
//   - configuration through the configuration segment, and register read-back;
//   - L-St keeps a view out of the EMS, L-Ld returns it from the VMS, and a
//     load of an untouched line returns the EMS;
//   - GSync asks for the bus, holds until `done`, pulls the dirty host line
//     and writes it to the EMS, and completes in the completion queue;
//   - a GSync whose view sits in the VMS copies it to the EMS;
//   - a broadcast from another node drops this node's view and back-
//     invalidates the host copy, and is acknowledged once;
//   - overflow of the VAT raises `irq`; a new table plus restart clears it;
//   - a CXL-vanilla access leaves through the vanilla port;
//   - the counters agree with what was done.
module tb_cthw;
  import ctxnl_pkg::*;

  localparam int unsigned W  = 4;
  localparam int unsigned MR = 8;
  localparam node_t  NODE = 4'd5;
  localparam dline_t WQB  = 28'h0001000;
  localparam dline_t CQL  = 28'h0000800;
  localparam dline_t TB0  = 28'h0100000;
  localparam dline_t TB1  = 28'h0200000;

  logic clk, rst_n;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t req;
  mem_rsp_t rsp;
  logic van_req_valid, van_req_ready, van_rsp_valid, van_rsp_ready;
  mem_req_t van_req;
  mem_rsp_t van_rsp;
  logic bi_req_valid, bi_req_ready, bi_rsp_valid;
  bi_req_t bi_req;
  bi_rsp_t bi_rsp;
  logic cc_req_valid, cc_req_ready, cc_rsp_valid;
  dram_req_t cc_req;
  dram_rsp_t cc_rsp;
  logic sb_req_valid, sb_done, snp_valid, snp_ack;
  dline_t sb_req_line, snp_line;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;
  logic irq;
  cthw_stats_t stats;

  cthw #(.MAX_TABLES(4), .WAY_IDX_W(W), .MAX_RETRY(MR), .POLL_GAP(4)) dut (.node_id(NODE), .*);

  int checks, failures;
  line_t dram [dline_t];
  bit    hdirty [dline_t];
  line_t hdata [dline_t];
  line_t hm [dline_t];
  int    bcasts, acks, wq_head;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rdm(dline_t a);
    return dram.exists(a) ? dram[a] : '0;
  endfunction

  // DRAM
  logic dbusy; dram_req_t dreq;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dbusy <= 0; dram_rsp_valid <= 0; dram_rsp <= '0; dreq <= '0; end
    else begin
      dram_rsp_valid <= 0;
      if (dram_req_valid && dram_req_ready) begin dbusy <= 1; dreq <= dram_req; end
      else if (dbusy && $urandom_range(1)) begin
        line_t cur;
        cur = rdm(dreq.addr);
        if (dreq.we) begin
          for (int b = 0; b < 64; b++) if (dreq.wmask[b]) cur[b*8 +: 8] = dreq.wdata[b*8 +: 8];
          dram[dreq.addr] = cur;
        end
        dbusy <= 0; dram_rsp_valid <= 1; dram_rsp.rdata <= cur;
      end
    end
  end
  assign dram_req_ready = !dbusy;

  // host: BI, queues, vanilla
  logic bpend, cpend, vpend;
  dline_t bline;
  dram_req_t creq;
  mem_req_t vreq;
  assign bi_req_ready = !bpend;
  assign cc_req_ready = !cpend;
  assign van_req_ready = !vpend;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bpend <= 0; bline <= '0; bi_rsp_valid <= 0; bi_rsp <= '0;
      cpend <= 0; creq <= '0; cc_rsp_valid <= 0; cc_rsp <= '0;
      vpend <= 0; vreq <= '0; van_rsp_valid <= 0; van_rsp <= '0;
    end else begin
      bi_rsp_valid <= 0;
      cc_rsp_valid <= 0;
      if (bi_req_valid && !bpend) begin bpend <= 1; bline <= bi_req.addr; end
      else if (bpend) begin
        bpend <= 0; bi_rsp_valid <= 1;
        bi_rsp.dirty <= hdirty.exists(bline);
        bi_rsp.data  <= hdata.exists(bline) ? hdata[bline] : '0;
        hdirty.delete(bline); hdata.delete(bline);
      end
      if (cc_req_valid && !cpend) begin cpend <= 1; creq <= cc_req; end
      else if (cpend) begin
        cpend <= 0; cc_rsp_valid <= 1;
        cc_rsp.rdata <= hm.exists(creq.addr) ? hm[creq.addr] : '0;
        if (creq.we) hm[creq.addr] = creq.wdata;
      end
      if (van_req_valid && !vpend) begin vpend <= 1; vreq <= van_req; end
      else if (vpend && !van_rsp_valid) begin
        van_rsp_valid <= 1; van_rsp.op <= vreq.op; van_rsp.tag <= vreq.tag;
        van_rsp.data <= {16{32'h0bad_cafe}};
      end else if (van_rsp_valid && van_rsp_ready) begin
        van_rsp_valid <= 0; vpend <= 0;
      end
    end
  end

  // snoop bus stand-in: answer own broadcasts after 3 cycles
  int sbw;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin sb_done <= 0; sbw <= 0; end
    else begin
      sb_done <= 0;
      if (sb_req_valid && !sb_done) begin
        if (sbw == 3) begin sb_done <= 1; sbw <= 0; bcasts++; end
        else sbw <= sbw + 1;
      end
    end
  end
  always @(posedge clk) if (rst_n && snp_ack) acks++;

  task automatic hreq(mem_op_e op, paline_t a, line_t d, output line_t q);
    @(negedge clk);
    req_valid = 1; req.op = op; req.addr = a; req.data = d; req.tag = TAGID_W'($urandom);
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(rsp.tag == req.tag, "response tag");
    q = rsp.data;
    @(posedge clk);
  endtask

  task automatic cfg(dline_t a, line_t v);
    line_t q;
    hreq(MEM_ST, {SEG_HWCFG, a}, v, q);
  endtask

  task automatic sync(dline_t l, bit wd);
    int h;
    bit cq_old;
    h = wq_head;
    cq_old = hm.exists(CQL) ? hm[CQL][h] : 1'b0;
    hm[WQB + dline_t'(h)] = line_t'({1'b1, wd, 34'd0, l});
    wq_head++;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      if (hm.exists(CQL) && hm[CQL][h] != cq_old) break;
    end
    check(hm.exists(CQL) && hm[CQL][h] != cq_old, "completion");
  endtask

  initial begin
    line_t q;
    dline_t A, B, C;
    int a0, parked_at;
    checks = 0; failures = 0; bcasts = 0; acks = 0; wq_head = 0;
    rst_n = 0; req_valid = 0; req = '0; rsp_ready = 1; snp_valid = 0; snp_line = '0;
    A = 28'h0011000; B = 28'h0022000; C = 28'h0033000;
    dram[A] = {16{32'haaaa_0000}}; dram[B] = {16{32'hbbbb_0000}}; dram[C] = {16{32'hcccc_0000}};
    repeat (4) @(negedge clk);
    rst_n = 1;

    cfg(dline_t'(16'h1000), line_t'({1'b1, 35'd0, TB0}));
    cfg(dline_t'(16'h1021), line_t'(WQB));
    cfg(dline_t'(16'h1022), line_t'(CQL));
    cfg(dline_t'(16'h1023), line_t'(1));
    hreq(MEM_LD, {SEG_HWCFG, dline_t'(16'h1022)}, '0, q);
    check(q[27:0] == CQL, "register read-back");

    // L-Ld of an untouched line, L-St, L-Ld of the view
    hreq(MEM_LD, {SEG_CTXNL, A}, '0, q);
    check(q == {16{32'haaaa_0000}}, "EMS load");
    hreq(MEM_ST, {SEG_CTXNL, A}, {16{32'haaaa_0001}}, q);
    check(rdm(A) == {16{32'haaaa_0000}}, "L-St kept out of the EMS");
    hreq(MEM_LD, {SEG_CTXNL, A}, '0, q);
    check(q == {16{32'haaaa_0001}}, "view loaded from the VMS");

    // GSync of a dirty host line
    hdirty[A] = 1; hdata[A] = {16{32'haaaa_0002}};
    sync(A, 0);
    check(rdm(A) == {16{32'haaaa_0002}} && bcasts == 1, "GSync of the host line");

    // GSync of a view in the VMS
    hreq(MEM_ST, {SEG_CTXNL, B}, {16{32'hbbbb_0001}}, q);
    sync(B, 0);
    check(rdm(B) == {16{32'hbbbb_0001}} && stats.vms_copy == 1, "GSync copies the VMS view");

    // broadcast from another node: drop the view and the host copy
    hreq(MEM_LD, {SEG_CTXNL, C}, '0, q);
    hdata[C] = q;
    hreq(MEM_ST, {SEG_CTXNL, dline_t'(C + 1)}, {16{32'hcccc_0001}}, q);
    a0 = acks;
    @(negedge clk); snp_valid = 1; snp_line = C;
    while (!snp_ack) @(negedge clk);
    snp_valid = 0;
    @(negedge clk); snp_valid = 1; snp_line = dline_t'(C + 1);
    while (!snp_ack) @(negedge clk);
    snp_valid = 0;
    repeat (3) @(negedge clk);
    check(acks == a0 + 2, "one acknowledgement per broadcast");
    check(!hdata.exists(C) && stats.peer_bisnp == 1, "peer BISnpInv of the host copy");
    check(stats.peer_vat_drops == 1, "peer dropped the view");
    hreq(MEM_LD, {SEG_CTXNL, dline_t'(C + 1)}, '0, q);
    check(q == '0 && stats.vf_false_pos == 1, "dropped view: EMS value, VF false positive");

    // overflow -> irq -> new table + restart
    parked_at = -1;
    for (int i = 0; i < 40 && parked_at < 0; i++) begin
      hreq(MEM_ST, {SEG_CTXNL, dline_t'(28'h0500000 + i * 13)}, {16{32'(i)}}, q);
      if (stats.parked != 0) parked_at = i;
    end
    check(parked_at >= 0, "overflow");
    @(negedge clk);
    check(irq, "irq on overflow");
    cfg(dline_t'(16'h1000), line_t'({1'b1, 35'd0, TB1}));
    cfg(dline_t'(16'h1020), line_t'(1));
    repeat (100) @(negedge clk);
    check(!irq, "irq cleared after restart");
    hreq(MEM_LD, {SEG_HWCFG, dline_t'(16'h1020)}, '0, q);
    check(q[1:0] == 2'b00, "status clear");

    // vanilla
    hreq(MEM_LD, {SEG_VANILLA, 28'h0000042}, '0, q);
    check(q == {16{32'h0bad_cafe}}, "vanilla path");

    check(stats.gsync == 2 && stats.req_bisnp == 1, "requester counters");
    check(stats.snoops == 2 && stats.vat_hits == 1, "peer / load counters");
    check(stats.seg_vanilla == 1 && stats.kicks > 0 && stats.fails == 1, "other counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
