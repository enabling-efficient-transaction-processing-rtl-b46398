// tb_ctxnl_gfam_full: one complete publish operation on the device at its
// full default size: 16 nodes, 16 tables of 2 x 2^19 VAT entries, 4096-bit
// VMS filters, 16 KB VMS back filters, 64 cuckoo retries, 8-cycle queue poll.
//
// The same host, host-memory, CXL.BI and DRAM models as the end-to-end test
// surround the device. The runtime of nodes 0 and 1 programs one VAT table,
// the work queue and the completion queue of its CTHW; then
//   - node 0 loads X (from the EMS), modifies it and writes it back: the
//     write-back becomes a view in node 0's VMS, the EMS is unchanged and
//     node 1 still loads the published value;
//   - node 0 loads X back and gets its own view (VMS filter and VAT hit);
//   - node 0 modifies X again and posts a GSync: node 1's cached copy is
//     back-invalidated through the snoop bus, node 0's dirty copy is pulled
//     into the EMS, and node 1 then loads the new value.
// Every other node is idle but still answers the broadcast. The test also
// checks that each of the 16 CTHWs serves a configuration read with its own
// node's registers, and that the broadcast count and counters add up.
module tb_ctxnl_gfam_full;
  import ctxnl_pkg::*;

  localparam int unsigned N  = 16;
  localparam dline_t WQB = 28'h0001000;   // host memory addresses of the queues
  localparam dline_t CQL = 28'h0000800;

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

  ctxnl_gfam dut (.*);

  int checks, failures;
  line_t dram [dline_t];
  cl_t   hc [N][dline_t];       // host caches
  line_t hm [N][dline_t];       // host memories (queues)
  int    wq_head [N];
  int    irq_seen, van_done, bi_seen [N];

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
    repeat (200000) @(posedge clk);
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
  end

  always @(posedge clk) if (rst_n) begin
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
    line_t q;
    dline_t X;

    checks = 0; failures = 0; irq_seen = 0;
    van_done = 0;
    rst_n = 0;
    for (int i = 0; i < N; i++) begin
      h_req_valid[i] = 0; h_req[i] = '0; wq_head[i] = 0; bi_seen[i] = 0;
    end
    X = 28'h0010040;
    dram[X] = ems0(X);
    repeat (5) @(negedge clk);
    rst_n = 1;

    // 1. configuration
    for (int n = 0; n < 2; n++) begin
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

    // every CTHW answers the configuration segment with its own registers
    for (int n = 2; n < N; n++) begin
      cfg_wr(n, dline_t'(16'h1000), line_t'({1'b1, 35'd0, tbase(n, 0)}));
      cfg_rd(n, dline_t'(16'h1000), q);
      check(q[63:0] == {1'b1, 35'd0, tbase(n, 0)}, "per-node descriptor");
    end
    cfg_rd(0, dline_t'(16'h1000), q);
    check(q[63:0] == {1'b1, 35'd0, tbase(0, 0)}, "node 0 descriptor kept");

    check(stats[0].stores == 1 && stats[0].vat_hits == 1, "node 0 counters");
    check(stats[0].gsync == 1 && stats[0].req_bisnp >= 1, "node 0 GSync counters");
    check(n_broadcasts == 1, "one broadcast");
    begin
      int sn;
      sn = 0;
      for (int n = 0; n < N; n++) sn += stats[n].snoops;
      check(sn == N - 1, "every other node served the broadcast");
    end
    check(stats[1].peer_bisnp >= 1, "node 1 back-invalidated its host copy");
    $display("broadcasts %0d  node-0 loads %0d stores %0d VAT hits %0d  GSync %0d",
             n_broadcasts, stats[0].loads, stats[0].stores, stats[0].vat_hits, stats[0].gsync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
