// tb_snoop_peer: self-checking test of the peer side of a GSync broadcast.
//
// The snoop bus, lock, filters, VAT and CXL.BI port are testbench models.
// Broadcast lines are chosen from four kinds: a line with a view in this
// node's VMS (VMS filter and VAT hit), a VMS filter false positive (VAT miss),
// a line the host may cache (back filter hit), and a line nobody holds. The
// testbench checks that a view is discarded (its VATE removed at the position
// the lookup gave, its data never copied anywhere), that a host copy is
// back-invalidated and then forgotten by the back filter whatever the host
// returned, that nothing else happens for the other lines, that every
// broadcast gets exactly one acknowledgement, that resources are used only
// under the lock, and the counters. With the lock free and no filter hit the
// acknowledgement comes 5 cycles after the broadcast appears (one of them
// is the registered lock grant).
module tb_snoop_peer;
  import ctxnl_pkg::*;

  localparam node_t NODE = 4'd9;

  logic clk, rst_n, snp_valid, snp_ack, lock_req, lock_gnt;
  dline_t snp_line;
  res_req_t res;
  res_rsp_t res_in;
  logic [31:0] n_snoops, n_vat_drops, n_bisnp;

  int checks, failures;
  bit vf [dline_t];
  int vbf [dline_t];
  dline_t vat [dline_t];
  int bi_count, acks;
  bit slow_lock;

  snoop_peer dut (.node_id(NODE), .*);

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

  always @(posedge clk or negedge rst_n)
    if (!rst_n) lock_gnt <= 0;
    else lock_gnt <= lock_req && (!slow_lock || $urandom_range(1) || lock_gnt);

  logic bi_pend, vat_busy, vat_done, vat_hit, bi_rsp_valid;
  dline_t bi_line, vat_slot;
  res_req_t vop;
  int vat_wait;
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
        check(res.bi.addr == snp_line, "BI line");
        bi_pend <= 1; bi_line <= res.bi.addr; bi_count++;
      end else if (bi_pend && $urandom_range(1)) begin
        bi_pend <= 0; bi_rsp_valid <= 1;
        bi_rsp.dirty <= $urandom_range(1);
        bi_rsp.data  <= {16{32'($urandom)}};
      end
      if (lock_gnt && res.vbf_rem && vbf.exists(res.vbf_rem_key) && vbf[res.vbf_rem_key] > 0)
        vbf[res.vbf_rem_key]--;
      check(!(res.vf_ins || res.vbf_ins), "peer inserted into a filter");
      if (res.vat_valid && !vat_busy) begin
        check(lock_gnt, "VAT without lock");
        check(res.vat_ind == make_ind(NODE, snp_line), "indicator");
        check(res.vat_op != VAT_INSERT, "peer inserted into the VAT");
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
        end else vat_wait <= vat_wait - 1;
      end
    end
  end

  always @(posedge clk) if (rst_n && snp_ack) acks++;

  // present one broadcast and wait for the acknowledgement; returns cycles
  task automatic snoop(dline_t l, output int cyc);
    int a0;
    a0 = acks;
    @(negedge clk);
    snp_valid = 1; snp_line = l; cyc = 0;
    do begin @(negedge clk); cyc++; end while (!snp_ack && cyc < 1000);
    snp_valid = 0;
    @(negedge clk);
    check(acks == a0 + 1, "exactly one acknowledgement");
  endtask

  initial begin
    int cyc, e_drop, e_bi, e_sn, vbf_before;
    dline_t l;
    checks = 0; failures = 0; bi_count = 0; acks = 0; slow_lock = 0;
    e_drop = 0; e_bi = 0; e_sn = 0;
    rst_n = 0; snp_valid = 0; snp_line = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // latency with nothing to do and a free lock
    snoop(28'h0000123, cyc); e_sn++;
    check(cyc == 5, $sformatf("idle peer acknowledged after %0d cycles", cyc));

    slow_lock = 1;
    for (int n = 0; n < 300; n++) begin
      int kind;
      kind = $urandom_range(3);
      l = dline_t'($urandom);
      case (kind)
        0: begin vf[l] = 1; vat[l] = dline_t'(28'h0900000 + n); end
        1: vf[l] = 1;
        2: vbf[l] = $urandom_range(1, 3);
        default: ;
      endcase
      if ($urandom_range(3) == 0 && kind != 2) vbf[l] = 1;
      vbf_before = vbf.exists(l) ? vbf[l] : 0;
      snoop(l, cyc); e_sn++;
      if (kind == 0) begin
        e_drop++;
        check(!vat.exists(l), "peer view not discarded");
      end else check(cyc < 40, "too slow for a line with nothing to drop");
      if (vbf_before > 0) begin
        e_bi++;
        check(vbf[l] == vbf_before - 1, "back filter did not forget the line");
      end
    end
    check(n_snoops == 32'(e_sn), "snoop count");
    check(n_vat_drops == 32'(e_drop), "view drop count");
    check(n_bisnp == 32'(bi_count) && 32'(e_bi) == n_bisnp, "BISnpInv count");
    $display("snoops %0d drops %0d bisnp %0d", e_sn, e_drop, e_bi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
