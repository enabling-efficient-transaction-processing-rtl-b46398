// tb_cc_agent: self-checking test of the GSync / Wd requester (CC agent).
//
// Host memory (work queue and completion queue), the snoop bus, the lock, the
// two filters, the VAT, the CXL.BI port to the host and the DRAM are all
// testbench models. The host posts work queue elements covering each case of
// the synchronisation datapath:
//   A  GSync, host holds the line dirty         -> BISnpInv, host data to EMS
//   B  GSync, view only in the VMS              -> VAT lookup, VMS slot to EMS,
//                                                  VATE removed
//   C  GSync, host clean copy and a VMS view    -> BISnpInv, then VMS copy
//   D  GSync of a line nobody touched           -> broadcast only
//   E  Wd, host copy and a VMS view             -> BISnpInv with data dropped,
//                                                  VATE removed, EMS untouched
//   F  GSync, host dirty and an older VMS view  -> host data to EMS, VATE
//                                                  removed without a copy
// followed by random GSyncs. The testbench checks the EMS contents, the VAT
// and filter state, that each GSync (and no Wd) was broadcast on the snoop bus
// with its line before the merge, that the lock is not held while waiting for
// the bus, that each element is cleared in the work queue and its completion
// bit toggled in the completion queue, and the counters.
module tb_cc_agent;
  import ctxnl_pkg::*;

  localparam node_t  NODE = 4'd2;
  localparam dline_t WQB  = 28'h0001000;
  localparam dline_t CQL  = 28'h0000800;

  logic clk, rst_n, enable;
  logic cc_req_valid, cc_req_ready, cc_rsp_valid;
  dram_req_t cc_req;
  dram_rsp_t cc_rsp;
  logic sb_req_valid, sb_done, lock_req, lock_gnt;
  dline_t sb_req_line;
  res_req_t res;
  res_rsp_t res_in;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;
  logic [31:0] n_gsync, n_wd, n_bisnp, n_vms_copy;

  int checks, failures;
  line_t host [dline_t];        // coherent host memory (queues)
  line_t dram [dline_t];        // shared DRAM (EMS lines and VMS slots)
  bit    vf   [dline_t];
  int    vbf  [dline_t];
  bit    hdirty [dline_t];      // host holds the line modified
  line_t hdata  [dline_t];
  dline_t vat [dline_t];        // line -> VMS slot
  dline_t bcast [$];
  int    bi_count;

  cc_agent #(.POLL_GAP(4)) dut (.node_id(NODE), .wq_base(WQB), .cq_line(CQL), .*);

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

  function automatic line_t rdm(ref line_t m [dline_t], input dline_t a);
    return m.exists(a) ? m[a] : '0;
  endfunction

  // host coherent port
  logic hbusy; dram_req_t hreq;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin hbusy <= 0; cc_rsp_valid <= 0; cc_rsp <= '0; hreq <= '0; end
    else begin
      cc_rsp_valid <= 0;
      if (cc_req_valid && cc_req_ready) begin hbusy <= 1; hreq <= cc_req; end
      else if (hbusy && $urandom_range(1)) begin
        hbusy <= 0; cc_rsp_valid <= 1;
        cc_rsp.rdata <= rdm(host, hreq.addr);
        if (hreq.we) host[hreq.addr] = hreq.wdata;
      end
    end
  end
  assign cc_req_ready = !hbusy;

  // snoop bus: done a few cycles after the request; lock must not be held
  int sb_wait;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin sb_done <= 0; sb_wait <= 0; end
    else begin
      sb_done <= 0;
      if (sb_req_valid && !sb_done) begin
        check(!lock_req, "lock held while waiting for the snoop bus");
        if (sb_wait == 0) begin
          sb_wait <= -1;
          bcast.push_back(sb_req_line);
        end else if (sb_wait < 0) begin
          sb_wait <= 0; sb_done <= 1;
        end else sb_wait <= sb_wait - 1;
      end
    end
  end

  // lock
  always @(posedge clk or negedge rst_n)
    if (!rst_n) lock_gnt <= 0;
    else lock_gnt <= lock_req && ($urandom_range(1) || lock_gnt);

  // BI port, VAT model
  logic bi_pend, vat_busy, vat_done, vat_hit;
  dline_t bi_line;
  res_req_t vop;
  dline_t vat_slot;
  int vat_wait;
  logic bi_rsp_valid;
  bi_rsp_t bi_rsp;
  always_comb begin
    res_in = '0;
    res_in.vf_hit  = vf.exists(res.vf_qkey);
    res_in.vbf_hit = vbf.exists(res.vbf_qkey) && vbf[res.vbf_qkey] > 0;
    res_in.vat_ready = !vat_busy;
    res_in.vat_done  = vat_done;
    res_in.vat_hit   = vat_hit;
    res_in.vat_slot  = vat_slot;
    res_in.vat_way   = vat_slot[0];
    res_in.vat_idx   = 32'(vat_slot);
    res_in.bi_ready  = !bi_pend;
    res_in.bi_rsp_valid = bi_rsp_valid;
    res_in.bi_rsp    = bi_rsp;
  end
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bi_pend <= 0; bi_rsp_valid <= 0; bi_rsp <= '0; bi_line <= '0;
      vat_busy <= 0; vat_done <= 0; vat_hit <= 0; vop <= '0; vat_slot <= '0; vat_wait <= 0;
    end else begin
      bi_rsp_valid <= 0;
      vat_done <= 0;
      if (res.bi_valid && !bi_pend) begin
        check(lock_gnt, "BI without lock");
        bi_pend <= 1; bi_line <= res.bi.addr; bi_count++;
      end else if (bi_pend && $urandom_range(1)) begin
        bi_pend <= 0; bi_rsp_valid <= 1;
        bi_rsp.dirty <= hdirty.exists(bi_line);
        bi_rsp.data  <= rdm(hdata, bi_line);
        hdirty.delete(bi_line);
      end
      if (lock_gnt && res.vbf_rem && vbf.exists(res.vbf_rem_key) && vbf[res.vbf_rem_key] > 0)
        vbf[res.vbf_rem_key]--;
      if (res.vat_valid && !vat_busy) begin
        check(lock_gnt, "VAT without lock");
        check(res.vat_ind == make_ind(NODE, dline_t'(res.vat_ind[DRAM_LINE_W-1:0])), "indicator node");
        vat_busy <= 1; vop <= res; vat_wait <= $urandom_range(1, 4);
      end else if (vat_busy) begin
        if (vat_wait == 0) begin
          dline_t l;
          l = vop.vat_ind[DRAM_LINE_W-1:0];
          vat_busy <= 0; vat_done <= 1; vat_hit <= 0;
          if (vop.vat_op == VAT_LOOKUP && vat.exists(l)) begin vat_hit <= 1; vat_slot <= vat[l]; end
          if (vop.vat_op == VAT_REMOVE) begin
            check(vat.exists(l) && vop.vat_idx == 32'(vat[l]), "remove position");
            vat.delete(l);
          end
          check(vop.vat_op != VAT_INSERT, "requester inserted into the VAT");
        end else vat_wait <= vat_wait - 1;
      end
    end
  end

  // DRAM
  logic dbusy; dram_req_t dreq;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dbusy <= 0; dram_rsp_valid <= 0; dram_rsp <= '0; dreq <= '0; end
    else begin
      dram_rsp_valid <= 0;
      if (dram_req_valid && dram_req_ready) begin dbusy <= 1; dreq <= dram_req; end
      else if (dbusy && $urandom_range(1)) begin
        dbusy <= 0; dram_rsp_valid <= 1;
        dram_rsp.rdata <= rdm(dram, dreq.addr);
        if (dreq.we) dram[dreq.addr] = dreq.wdata;
      end
    end
  end
  assign dram_req_ready = !dbusy;

  function automatic line_t ones(int n);
    return (line_t'(1) << n) - line_t'(1);
  endfunction

  function automatic line_t pat(int k);
    return {16{32'(k) ^ 32'h3c3c_0000}};
  endfunction

  initial begin
    localparam dline_t A = 28'h00a0000, B = 28'h00b0000, C = 28'h00c0000,
                       D = 28'h00d0000, E = 28'h00e0000, F = 28'h00f0000;
    dline_t lines [$];
    bit     is_wd [$];
    int     nw, ng, ncopy;
    line_t  cq0;

    checks = 0; failures = 0; bi_count = 0;
    rst_n = 0; enable = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // scenario set-up
    vbf[A] = 1; hdirty[A] = 1; hdata[A] = pat(1);
    vf[B] = 1; vat[B] = 28'h0800010; dram[28'h0800010] = pat(2);
    vbf[C] = 1; hdata[C] = pat(30); vf[C] = 1; vat[C] = 28'h0800020; dram[28'h0800020] = pat(3);
    vbf[E] = 1; hdirty[E] = 1; hdata[E] = pat(4); vf[E] = 1; vat[E] = 28'h0800030;
    dram[28'h0800030] = pat(5);
    vbf[F] = 1; hdirty[F] = 1; hdata[F] = pat(6); vf[F] = 1; vat[F] = 28'h0800040;
    dram[28'h0800040] = pat(7);
    lines = '{A, B, C, D, E, F};
    is_wd = '{0, 0, 0, 0, 1, 0};
    for (int i = 0; i < 30; i++) begin
      lines.push_back(dline_t'(28'h0100000 + i));
      is_wd.push_back(0);
    end
    foreach (lines[i])
      host[WQB + dline_t'(i)] = line_t'({1'b1, is_wd[i], 34'd0, lines[i]});
    @(negedge clk); enable = 1;

    wait (n_gsync + n_wd == 32'(lines.size()));
    // last completion write still in flight: wait until the CQ holds all bits
    for (int t = 0; t < 1000 && rdm(host, CQL) != ones(lines.size()); t++)
      @(negedge clk);
    repeat (20) @(negedge clk);

    check(rdm(dram, A) == pat(1), "A: host dirty data to EMS");
    check(rdm(dram, B) == pat(2) && !vat.exists(B), "B: VMS view merged, VATE removed");
    check(rdm(dram, C) == pat(3) && !vat.exists(C), "C: clean host, VMS view merged");
    check(!dram.exists(D), "D: nothing written");
    check(!dram.exists(E) && !vat.exists(E), "E: Wd drops host and VMS copies");
    check(rdm(dram, F) == pat(6) && !vat.exists(F), "F: host data wins, VATE removed");
    check(vbf[A] == 0 && vbf[C] == 0 && vbf[E] == 0 && vbf[F] == 0, "VBF forgets invalidated lines");
    check(bi_count == 4 && n_bisnp == 4, "BISnpInv count");
    check(n_vms_copy == 2, "VMS copy count");
    ng = 0; nw = 0;
    foreach (is_wd[i]) if (is_wd[i]) nw++; else ng++;
    check(n_gsync == 32'(ng) && n_wd == 32'(nw), "GSync/Wd counts");
    check(bcast.size() == ng, "one broadcast per GSync");
    begin
      int j;
      j = 0;
      foreach (lines[i]) if (!is_wd[i]) begin
        check(j < bcast.size() && bcast[j] == lines[i], "broadcast line/order");
        j++;
      end
    end
    foreach (lines[i]) check(rdm(host, WQB + dline_t'(i)) == '0, "WQE cleared");
    cq0 = rdm(host, CQL);
    check(cq0 == ones(lines.size()), "completion bits toggled");

    // second round on the same queue slots toggles the bits back
    for (int i = 0; i < 4; i++)
      host[WQB + dline_t'(lines.size() + i)] = line_t'({1'b1, 1'b0, 34'd0, dline_t'(28'h0200000 + i)});
    for (int t = 0; t < 5000 && n_gsync != 32'(ng + 4); t++) @(negedge clk);
    repeat (40) @(negedge clk);
    check(rdm(host, CQL) == ones(lines.size() + 4), "later completions");
    ncopy = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
