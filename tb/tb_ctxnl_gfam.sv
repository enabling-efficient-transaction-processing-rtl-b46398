// tb_ctxnl_gfam: end-to-end test of the G-FAM device with 4 nodes and small
// VAT tables (2 ways x 16 entries, 8 displacements), so that table overflow
// and the runtime's resize happen in a short run.
//
// Around the device the testbench models what the paper leaves to the host and
// to vendor IP: one shared DRAM, and per node a host with a cache (answering
// CXL.BI back-invalidations with its dirty or clean copy), the host memory
// that holds the work and completion queues, the CXL-vanilla coherent path,
// the user library (L-Ld, L-St as dirty write-back, GSync/Wd posted to the
// work queue) and the runtime thread (configuration, VAT resize on interrupt).
//
// The scenario, with a check after each step:
//   1. the runtime of every node programs its VAT table, work and completion
//      queues through the configuration segment;
//   2. view isolation: node 0 loads X, modifies and writes it back; the EMS
//      keeps the old value and node 1 still loads the old value; node 0 loads
//      its own view back from the VMS;
//   3. publication: node 0 modifies X again and GSyncs it: node 1's cached copy
//      is back-invalidated by its CTHW, node 0's dirty copy is pulled and
//      written to the EMS, and node 1 now loads the new value;
//   4. VMS merge: node 2 writes Y back (view goes to its VMS) and GSyncs it;
//      the view is copied from the VMS to the EMS;
//   5. peer drop: node 3 writes Z back, node 2 GSyncs Z: node 3's view is
//      discarded; node 3's next load of Z passes its VMS filter, misses its VAT
//      (a false positive) and reads the EMS;
//   6. withdraw: node 1 writes W back and withdraws it: EMS unchanged, view gone;
//   7. two GSyncs at the same time from nodes 1 and 2 contend for the bus;
//   8. node 0 writes back lines of two 4 MB regions until its VAT table
//      overflows and the interrupt rises; the runtime moves one region to a
//      second table (copying its entries through the configuration segment),
//      updates the LUT and occupancy, and restarts the parked insertion; every
//      line is then loaded back with its own view;
//   9. a CXL-vanilla access and an access outside the three segments.
// Each mechanism is counted (from the CTHW counters and the bus) and one that
// never happened counts as a failure.
module tb_ctxnl_gfam;
  import ctxnl_pkg::*;

  localparam int unsigned N  = 4;
  localparam int unsigned W  = 4;
  localparam int unsigned MR = 8;
  localparam int unsigned MT = 4;
  localparam dline_t WQB = 28'h0001000;   // host memory addresses of the queues
  localparam dline_t CQL = 28'h0000800;
  localparam int unsigned VATE_LINES = 2 ** (W - 2);

  typedef struct {
    bit    dirty;
    line_t data;
  } cl_t;

  logic clk, rst_n;
  logic      h_req_valid [N];
  logic      h_req_ready [N];
  mem_req_t  h_req       [N];
  logic      h_rsp_valid [N];
  logic      h_rsp_ready [N];
  mem_rsp_t  h_rsp       [N];
  logic      van_req_valid [N];
  logic      van_req_ready [N];
  mem_req_t  van_req       [N];
  logic      van_rsp_valid [N];
  logic      van_rsp_ready [N];
  mem_rsp_t  van_rsp       [N];
  logic      bi_req_valid [N];
  logic      bi_req_ready [N];
  bi_req_t   bi_req       [N];
  logic      bi_rsp_valid [N];
  bi_rsp_t   bi_rsp       [N];
  logic      cc_req_valid [N];
  logic      cc_req_ready [N];
  dram_req_t cc_req       [N];
  logic      cc_rsp_valid [N];
  dram_rsp_t cc_rsp       [N];
  logic      dram_req_valid, dram_req_ready, dram_rsp_valid;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;
  logic      irq [N];
  cthw_stats_t stats [N];
  logic [31:0] n_broadcasts;
  logic [$clog2(N)-1:0] snp_src;

  ctxnl_gfam #(.N_NODES(N), .MAX_TABLES(MT), .WAY_IDX_W(W), .MAX_RETRY(MR),
               .POLL_GAP(4)) dut (.*);

  int checks, failures;
  line_t dram [dline_t];
  cl_t   hc [N][dline_t];       // host caches
  line_t hm [N][dline_t];       // host memories (queues)
  int    wq_head [N];
  int    bus_contention, lock_contention, irq_seen, van_done, bi_seen [N];

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rdm(dline_t a);
    return dram.exists(a) ? dram[a] : '0;
  endfunction

  function automatic line_t ems0(dline_t a);
    return {16{4'h7, a}};
  endfunction

  // ---- shared DRAM ---------------------------------------------------------------
  logic dbusy; dram_req_t dreq; int dwait;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dbusy <= 0; dram_rsp_valid <= 0; dram_rsp <= '0; dreq <= '0; dwait <= 0; end
    else begin
      dram_rsp_valid <= 0;
      if (dram_req_valid && dram_req_ready) begin
        dbusy <= 1; dreq <= dram_req; dwait <= $urandom_range(2);
      end else if (dbusy) begin
        if (dwait == 0) begin
          line_t cur;
          cur = rdm(dreq.addr);
          if (dreq.we) begin
            for (int b = 0; b < 64; b++) if (dreq.wmask[b]) cur[b*8 +: 8] = dreq.wdata[b*8 +: 8];
            dram[dreq.addr] = cur;
          end
          dbusy <= 0; dram_rsp_valid <= 1; dram_rsp.rdata <= cur;
        end else dwait <= dwait - 1;
      end
    end
  end
  assign dram_req_ready = !dbusy;

  // ---- per-node host side: BI responder, queue memory, vanilla path ----------
  for (genvar g = 0; g < N; g++) begin : g_host
    logic bpend; dline_t bline;
    logic cpend; dram_req_t creq;
    logic vpend; mem_req_t vreq;
    assign bi_req_ready[g]  = !bpend;
    assign cc_req_ready[g]  = !cpend;
    assign van_req_ready[g] = !vpend;
    assign h_rsp_ready[g]   = 1'b1;
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        bpend <= 0; bline <= '0; bi_rsp_valid[g] <= 0; bi_rsp[g] <= '0;
        cpend <= 0; creq <= '0; cc_rsp_valid[g] <= 0; cc_rsp[g] <= '0;
        vpend <= 0; vreq <= '0; van_rsp_valid[g] <= 0; van_rsp[g] <= '0;
      end else begin
        bi_rsp_valid[g] <= 0;
        cc_rsp_valid[g] <= 0;
        if (bi_req_valid[g] && !bpend) begin bpend <= 1; bline <= bi_req[g].addr; end
        else if (bpend && $urandom_range(1)) begin
          bpend <= 0; bi_rsp_valid[g] <= 1;
          bi_seen[g]++;
          if (hc[g].exists(bline)) begin
            bi_rsp[g].dirty <= hc[g][bline].dirty;
            bi_rsp[g].data  <= hc[g][bline].data;
            hc[g].delete(bline);
          end else begin
            bi_rsp[g].dirty <= 0; bi_rsp[g].data <= '0;
          end
        end
        if (cc_req_valid[g] && !cpend) begin cpend <= 1; creq <= cc_req[g]; end
        else if (cpend && $urandom_range(1)) begin
          cpend <= 0; cc_rsp_valid[g] <= 1;
          cc_rsp[g].rdata <= hm[g].exists(creq.addr) ? hm[g][creq.addr] : '0;
          if (creq.we) hm[g][creq.addr] = creq.wdata;
        end
        if (van_req_valid[g] && !vpend) begin vpend <= 1; vreq <= van_req[g]; end
        else if (vpend && !van_rsp_valid[g]) begin
          van_rsp_valid[g] <= 1;
          van_rsp[g].op <= vreq.op; van_rsp[g].tag <= vreq.tag;
          van_rsp[g].data <= {16{32'hfeed_0000 | 32'(g)}};
        end else if (van_rsp_valid[g] && van_rsp_ready[g]) begin
          van_rsp_valid[g] <= 0; vpend <= 0; van_done++;
        end
      end
    end
    always @(posedge clk) if (rst_n && $countones(dut.g_node[g].u_cthw.lreq) > 1) lock_contention++;
  end

  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.sb_req_valid) > 1) bus_contention++;
    for (int i = 0; i < N; i++) if (irq[i]) irq_seen++;
  end

  // ---- host request port -------------------------------------------------------
  task automatic hreq(int n, mem_op_e op, paline_t a, line_t d, output line_t q);
    @(negedge clk);
    h_req_valid[n] = 1; h_req[n].op = op; h_req[n].addr = a; h_req[n].data = d;
    h_req[n].tag = TAGID_W'($urandom);
    #1;
    while (!h_req_ready[n]) begin @(negedge clk); #1; end
    @(negedge clk);
    h_req_valid[n] = 0;
    while (!h_rsp_valid[n]) @(negedge clk);
    check(h_rsp[n].tag == h_req[n].tag && h_rsp[n].op == op, "response tag");
    q = h_rsp[n].data;
    @(posedge clk);
  endtask

  function automatic paline_t seg(seg_e s, dline_t l);
    return {s, l};
  endfunction

  // user library: L-Ld fills the host cache, L-St is a dirty write-back
  task automatic lld(int n, dline_t l, output line_t q);
    hreq(n, MEM_LD, seg(SEG_CTXNL, l), '0, q);
    hc[n][l] = '{dirty: 0, data: q};
  endtask
  task automatic modify(int n, dline_t l, line_t d);
    hc[n][l] = '{dirty: 1, data: d};
  endtask
  task automatic evict(int n, dline_t l);
    line_t q;
    if (hc[n].exists(l)) begin
      if (hc[n][l].dirty) hreq(n, MEM_ST, seg(SEG_CTXNL, l), hc[n][l].data, q);
      hc[n].delete(l);
    end
  endtask
  task automatic sync(int n, dline_t l, bit wd);
    int h;
    line_t cq;
    h = wq_head[n];
    cq = hm[n].exists(CQL) ? hm[n][CQL] : '0;
    hm[n][WQB + dline_t'(h)] = line_t'({1'b1, wd, 34'd0, l});
    wq_head[n] = (h + 1) % WQ_DEPTH;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      if (hm[n].exists(CQL) && hm[n][CQL][h] != cq[h]) break;
    end
    check(hm[n].exists(CQL) && hm[n][CQL][h] != cq[h], "GSync/Wd completion");
  endtask

  // runtime: configuration registers and raw lines
  task automatic cfg_wr(int n, dline_t a, line_t v);
    line_t q;
    hreq(n, MEM_ST, seg(SEG_HWCFG, a), v, q);
  endtask
  task automatic cfg_rd(int n, dline_t a, output line_t q);
    hreq(n, MEM_LD, seg(SEG_HWCFG, a), '0, q);
  endtask

  function automatic dline_t tbase(int n, int t);
    return dline_t'(28'h0100000 + n * 28'h10000 + t * 28'h1000);
  endfunction

  initial begin
    line_t q, v0, v1;
    dline_t X, Y, Z, Wl;
    dline_t lines [$];
    line_t  views [dline_t];
    int parked_at;

    checks = 0; failures = 0; bus_contention = 0; lock_contention = 0; irq_seen = 0;
    van_done = 0;
    rst_n = 0;
    for (int i = 0; i < N; i++) begin
      h_req_valid[i] = 0; h_req[i] = '0; wq_head[i] = 0; bi_seen[i] = 0;
    end
    X = 28'h0010040; Y = 28'h0020080; Z = 28'h00300c0; Wl = 28'h0040100;
    foreach (lines[i]) ;
    dram[X] = ems0(X); dram[Y] = ems0(Y); dram[Z] = ems0(Z); dram[Wl] = ems0(Wl);
    repeat (5) @(negedge clk);
    rst_n = 1;

    // 1. configuration
    for (int n = 0; n < N; n++) begin
      cfg_wr(n, dline_t'(16'h1000), line_t'({1'b1, 35'd0, tbase(n, 0)}));
      cfg_wr(n, dline_t'(16'h1021), line_t'(WQB));
      cfg_wr(n, dline_t'(16'h1022), line_t'(CQL));
      cfg_wr(n, dline_t'(16'h1023), line_t'(1));
      cfg_rd(n, dline_t'(16'h1000), q);
      check(q[63:0] == {1'b1, 35'd0, tbase(n, 0)}, "descriptor read-back");
    end

    // 2. view isolation
    lld(0, X, q);
    check(q == ems0(X), "first load reads the EMS");
    modify(0, X, {16{32'h0000_a001}});
    evict(0, X);
    check(rdm(X) == ems0(X), "write-back must not reach the EMS");
    lld(1, X, q);
    check(q == ems0(X), "other node sees the published value only");
    lld(0, X, q);
    check(q == {16{32'h0000_a001}}, "node sees its own view from the VMS");

    // 3. publication
    modify(0, X, {16{32'h0000_a002}});
    sync(0, X, 0);
    check(rdm(X) == {16{32'h0000_a002}}, "GSync published the dirty host line");
    check(!hc[1].exists(X), "peer host copy back-invalidated");
    check(!hc[0].exists(X), "requester host copy pulled");
    lld(1, X, q);
    check(q == {16{32'h0000_a002}}, "other node loads the published value");

    // 4. VMS merge
    lld(2, Y, q);
    modify(2, Y, {16{32'h0000_b001}});
    evict(2, Y);
    sync(2, Y, 0);
    check(rdm(Y) == {16{32'h0000_b001}}, "GSync merged the VMS view");

    // 5. peer drop and VMS filter false positive
    lld(3, Z, q);
    modify(3, Z, {16{32'h0000_c003}});
    evict(3, Z);
    lld(2, Z, q);
    modify(2, Z, {16{32'h0000_c002}});
    sync(2, Z, 0);
    check(rdm(Z) == {16{32'h0000_c002}}, "GSync of Z");
    lld(3, Z, q);
    check(q == {16{32'h0000_c002}}, "peer view discarded, published value seen");

    // 6. withdraw
    lld(1, Wl, q);
    modify(1, Wl, {16{32'h0000_d001}});
    evict(1, Wl);
    sync(1, Wl, 1);
    check(rdm(Wl) == ems0(Wl), "Wd leaves the EMS alone");
    lld(1, Wl, q);
    check(q == ems0(Wl), "Wd dropped the view");

    // 7. concurrent GSyncs
    lld(1, 28'h0050000, q); modify(1, 28'h0050000, '1);
    lld(2, 28'h0060000, q); modify(2, 28'h0060000, {16{32'h1}});
    fork
      sync(1, 28'h0050000, 0);
      sync(2, 28'h0060000, 0);
    join
    check(rdm(28'h0050000) == '1 && rdm(28'h0060000) == {16{32'h1}}, "concurrent GSyncs");

    // 8. overflow of node 0's table, resize by the runtime
    parked_at = -1;
    for (int i = 0; i < 40 && parked_at < 0; i++) begin
      dline_t l;
      line_t d;
      l = {12'((i % 2) + 1), 16'(i * 7 + 3)};      // regions 1 and 2
      d = {16{32'(i) | 32'h5000_0000}};
      hreq(0, MEM_ST, seg(SEG_CTXNL, l), d, q);
      lines.push_back(l);
      views[l] = d;
      if (stats[0].parked != 0) parked_at = i;
    end
    check(parked_at >= 0, "table never overflowed");
    @(negedge clk);
    check(irq[0], "overflow interrupt");
    cfg_rd(0, dline_t'(16'h1020), q);
    check(q[1:0] == 2'b11, "status shows error and blocked");
    begin
      // move every entry of region 2 to table 1, same positions
      int moved, kept;
      line_t old_l, new_l;
      moved = 0; kept = 0;
      for (int li = 0; li < VATE_LINES; li++) begin
        cfg_rd(0, tbase(0, 0) + dline_t'(li), old_l);
        new_l = '0;
        for (int w = 0; w < 8; w++) begin
          logic [63:0] e;
          e = old_l[w*64 +: 64];
          if (e[63]) begin
            if (e[51:40] == 12'd2) begin
              int f;
              f = li * 8 + w;
              cfg_rd(0, tbase(0, 0) + dline_t'(VATE_LINES + f), q);
              cfg_wr(0, tbase(0, 1) + dline_t'(VATE_LINES + f), q);
              new_l[w*64 +: 64] = e;
              old_l[w*64 +: 64] = '0;
              moved++;
            end else kept++;
          end
        end
        cfg_wr(0, tbase(0, 0) + dline_t'(li), old_l);
        cfg_wr(0, tbase(0, 1) + dline_t'(li), new_l);
      end
      check(moved > 0 && kept > 0, "both regions present before the split");
      cfg_wr(0, dline_t'(16'h1001), line_t'({1'b1, 35'd0, tbase(0, 1)}));
      cfg_wr(0, dline_t'(2), line_t'(1));             // LUT: region 2 -> table 1
      cfg_wr(0, dline_t'(16'h1010), line_t'(kept));
      cfg_wr(0, dline_t'(16'h1011), line_t'(moved));
      cfg_wr(0, dline_t'(16'h1020), line_t'(1));      // restart the parked insert
      for (int t = 0; t < 200; t++) begin
        cfg_rd(0, dline_t'(16'h1020), q);
        if (q[1:0] == 2'b00) break;
      end
      check(q[1:0] == 2'b00 && !irq[0], "unblocked after resize");
      cfg_rd(0, dline_t'(16'h1010), v0);
      cfg_rd(0, dline_t'(16'h1011), v1);
      check(v0[31:0] + v1[31:0] == 32'(lines.size()), "occupancy after resize");
    end
    foreach (lines[i]) begin
      lld(0, lines[i], q);
      check(q == views[lines[i]], "view survives the resize");
    end

    // 9. other segments
    hreq(1, MEM_LD, seg(SEG_VANILLA, 28'h0000123), '0, q);
    check(q == {16{32'hfeed_0001}}, "vanilla access answered by the coherent path");
    hreq(2, MEM_LD, seg(SEG_NONE, 28'h0000123), '0, q);
    check(q == '0, "unmapped access reads zero");

    // mechanism coverage
    begin
      cthw_stats_t s;
      s = '0;
      for (int n = 0; n < N; n++) begin
        s.loads += stats[n].loads; s.stores += stats[n].stores;
        s.vf_hits += stats[n].vf_hits; s.vat_hits += stats[n].vat_hits;
        s.vf_false_pos += stats[n].vf_false_pos; s.parked += stats[n].parked;
        s.kicks += stats[n].kicks; s.fails += stats[n].fails;
        s.gsync += stats[n].gsync; s.wd += stats[n].wd;
        s.req_bisnp += stats[n].req_bisnp; s.vms_copy += stats[n].vms_copy;
        s.snoops += stats[n].snoops; s.peer_vat_drops += stats[n].peer_vat_drops;
        s.peer_bisnp += stats[n].peer_bisnp; s.seg_vanilla += stats[n].seg_vanilla;
        s.seg_hwcfg += stats[n].seg_hwcfg; s.seg_none += stats[n].seg_none;
      end
      $display("L-Ld %0d  L-St %0d  VF hits %0d  VAT hits %0d  VF false pos %0d",
               s.loads, s.stores, s.vf_hits, s.vat_hits, s.vf_false_pos);
      $display("kicks %0d  insert failures %0d  parked %0d  GSync %0d  Wd %0d",
               s.kicks, s.fails, s.parked, s.gsync, s.wd);
      $display("requester BISnpInv %0d  VMS copies %0d  snoops %0d  peer drops %0d  peer BISnpInv %0d",
               s.req_bisnp, s.vms_copy, s.snoops, s.peer_vat_drops, s.peer_bisnp);
      $display("broadcasts %0d  bus contention %0d  lock contention %0d  irq cycles %0d",
               n_broadcasts, bus_contention, lock_contention, irq_seen);
      check(s.loads > 0, "mechanism L-Ld");
      check(s.stores > 0, "mechanism L-St");
      check(s.vf_hits > 0, "mechanism VMS filter hit");
      check(s.vat_hits > 0, "mechanism VAT hit (load from VMS)");
      check(s.vf_false_pos > 0, "mechanism VMS filter false positive");
      check(s.kicks > 0, "mechanism cuckoo displacement");
      check(s.fails > 0 && s.parked > 0, "mechanism insert failure / park");
      check(irq_seen > 0, "mechanism resize interrupt");
      check(s.gsync > 0, "mechanism GSync");
      check(s.wd > 0, "mechanism Wd");
      check(s.req_bisnp > 0, "mechanism requester BISnpInv");
      check(s.vms_copy > 0, "mechanism VMS to EMS copy");
      check(s.snoops > 0 && n_broadcasts > 0, "mechanism snoop broadcast");
      check(s.peer_vat_drops > 0, "mechanism peer view drop");
      check(s.peer_bisnp > 0, "mechanism peer BISnpInv");
      check(bus_contention > 0, "mechanism snoop bus contention");
      check(lock_contention > 0, "mechanism shared-resource lock contention");
      check(s.seg_vanilla > 0 && van_done > 0, "mechanism CXL-vanilla segment");
      check(s.seg_hwcfg > 0, "mechanism configuration segment");
      check(s.seg_none > 0, "mechanism unmapped access");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
