// tb_xlate_flow: self-checking test of the view address translation flow.
//
// The CTHW resources the flow uses are replaced by small testbench models:
// the VMS filter and back filter are exact sets/counters (plus a set of lines
// that give a false positive), the VAT is a map from indicator to a VMS slot
// that answers 2-5 cycles after an operation and can be told to fail the next
// insert, the lock is granted after a random delay, and the DRAM is a memory
// whose EMS lines hold a pattern derived from the address. Random loads and
// dirty write-backs (stores) are issued; the testbench checks:
//   - a store never writes DRAM, inserts the line with its data into the VAT
//     under this node's indicator, removes it from the back filter, and enters
//     it in the VMS filter once the VAT is done;
//   - a load of a line with a view in the VMS returns that view and removes the
//     VATE at the position the lookup returned; other loads return EMS data
//     (including VMS filter false positives), and every load enters the line
//     in the back filter;
//   - resources are only used while the lock is held; tags come back intact;
//   - the event counters.
module tb_xlate_flow;
  import ctxnl_pkg::*;

  localparam node_t NODE = 4'd6;

  logic clk, rst_n;
  logic req_valid, req_ready, rsp_valid, rsp_ready, lock_req, lock_gnt;
  mem_req_t req;
  mem_rsp_t rsp;
  res_req_t res;
  res_rsp_t res_in;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;
  logic [31:0] n_loads, n_stores, n_vf_hits, n_vat_hits, n_vf_false_pos, n_parked;

  int checks, failures;
  bit    vf [dline_t];
  bit    fp [dline_t];
  int    vbf [dline_t];
  dline_t vat_slot_of [ind_t];
  line_t  slot_data [dline_t];
  int    next_slot;
  bit    fail_next;
  int    e_ld, e_st, e_vfh, e_vath, e_fp, e_park;

  xlate_flow dut (.node_id(NODE), .*);

  initial clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic line_t ems(dline_t a);
    return {16{4'ha, a}};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // lock: grant after a random delay, drop when released
  int lock_wait;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin lock_gnt <= 0; lock_wait <= 0; end
    else if (!lock_req) lock_gnt <= 0;
    else if (!lock_gnt) begin
      if (lock_wait == 0) begin lock_gnt <= 1; lock_wait <= $urandom_range(4); end
      else lock_wait <= lock_wait - 1;
    end
  end

  // filters (combinational answers)
  always_comb begin
    res_in = '0;
    res_in.vf_hit  = vf.exists(res.vf_qkey) || fp.exists(res.vf_qkey);
    res_in.vbf_hit = vbf.exists(res.vbf_qkey) && vbf[res.vbf_qkey] > 0;
    res_in.vat_ready = !vat_busy;
    res_in.vat_done  = vat_done;
    res_in.vat_hit   = vat_hit;
    res_in.vat_ok    = vat_ok;
    res_in.vat_way   = vat_way;
    res_in.vat_idx   = vat_idx;
    res_in.vat_slot  = vat_slot;
  end

  // VAT model
  logic vat_busy, vat_done, vat_hit, vat_ok, vat_way;
  logic [31:0] vat_idx;
  dline_t vat_slot;
  int vat_wait;
  res_req_t vop;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vat_busy <= 0; vat_done <= 0; vat_hit <= 0; vat_ok <= 0; vat_way <= 0;
      vat_idx <= 0; vat_slot <= '0; vat_wait <= 0; vop <= '0;
    end else begin
      vat_done <= 0;
      if (lock_gnt) begin
        if (res.vf_ins) vf[res.vf_ins_key] = 1;
        if (res.vbf_ins) vbf[res.vbf_ins_key] = vbf.exists(res.vbf_ins_key) ? vbf[res.vbf_ins_key] + 1 : 1;
        if (res.vbf_rem && vbf.exists(res.vbf_rem_key) && vbf[res.vbf_rem_key] > 0)
          vbf[res.vbf_rem_key]--;
      end
      if (res.vat_valid && !vat_busy) begin
        check(lock_gnt, "VAT used without the lock");
        check(res.vat_ind == make_ind(NODE, dline_t'(req_line_q)), "indicator");
        vat_busy <= 1; vop <= res; vat_wait <= $urandom_range(2, 5);
      end else if (vat_busy) begin
        if (vat_wait == 0) begin
          vat_busy <= 0; vat_done <= 1;
          vat_hit <= 0; vat_ok <= 1;
          unique case (vop.vat_op)
            VAT_LOOKUP: if (vat_slot_of.exists(vop.vat_ind)) begin
              vat_hit <= 1;
              vat_slot <= vat_slot_of[vop.vat_ind];
              vat_way <= vat_slot_of[vop.vat_ind][0];
              vat_idx <= 32'(vat_slot_of[vop.vat_ind]);
            end
            VAT_INSERT: if (fail_next) begin
              vat_ok <= 0; fail_next = 0;
            end else begin
              if (!vat_slot_of.exists(vop.vat_ind)) begin
                vat_slot_of[vop.vat_ind] = dline_t'(28'h0800000 + next_slot);
                next_slot++;
              end
              slot_data[vat_slot_of[vop.vat_ind]] = vop.vat_data;
            end
            VAT_REMOVE: begin
              check(vat_slot_of.exists(vop.vat_ind), "remove of absent entry");
              if (vat_slot_of.exists(vop.vat_ind)) begin
                check(vop.vat_idx == 32'(vat_slot_of[vop.vat_ind]) &&
                      vop.vat_way == vat_slot_of[vop.vat_ind][0], "remove position");
                vat_slot_of.delete(vop.vat_ind);
              end
            end
            default: check(0, "bad VAT op");
          endcase
        end else vat_wait <= vat_wait - 1;
      end
    end
  end

  // DRAM model: reads only
  logic dbusy;
  dline_t daddr;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dbusy <= 0; dram_rsp_valid <= 0; dram_rsp <= '0; daddr <= '0; end
    else begin
      dram_rsp_valid <= 0;
      if (dram_req_valid && dram_req_ready) begin
        check(!dram_req.we, "translation flow wrote DRAM");
        dbusy <= 1; daddr <= dram_req.addr;
      end else if (dbusy && $urandom_range(2) == 0) begin
        dbusy <= 0; dram_rsp_valid <= 1;
        dram_rsp.rdata <= slot_data.exists(daddr) ? slot_data[daddr] : ems(daddr);
      end
    end
  end
  assign dram_req_ready = !dbusy;

  logic [27:0] req_line_q;

  initial begin
    dline_t lines [8];
    line_t view [dline_t];
    checks = 0; failures = 0; next_slot = 0; fail_next = 0;
    e_ld = 0; e_st = 0; e_vfh = 0; e_vath = 0; e_fp = 0; e_park = 0;
    rst_n = 0; req_valid = 0; req = '0; rsp_ready = 0; req_line_q = '0;
    foreach (lines[i]) lines[i] = dline_t'($urandom);
    fp[lines[7]] = 1;                         // a VMS filter false positive
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int li;
      bit is_st, vf_before;
      line_t d;
      li = $urandom_range(7);
      is_st = ($urandom_range(2) == 0) || (n == 200);
      d = {16{32'($urandom)}};
      if (n == 200) fail_next = 1;
      @(negedge clk);
      req_valid = 1;
      req.op   = is_st ? MEM_ST : MEM_LD;
      req.addr = paline_t'(lines[li]);
      req.tag  = TAGID_W'(n);
      req.data = d;
      req_line_q = lines[li];
      vf_before = vf.exists(lines[li]) || fp.exists(lines[li]);
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      req_valid = 0;
      rsp_ready = 1;
      while (!rsp_valid) @(negedge clk);
      while ($urandom_range(2) == 0) begin rsp_ready = 0; @(negedge clk); end
      rsp_ready = 1;
      check(rsp.tag == TAGID_W'(n) && rsp.op == req.op, "response tag/op");
      if (is_st) begin
        e_st++;
        if (n == 200) e_park++;
        else begin
          view[lines[li]] = d;
          check(vf.exists(lines[li]), "store not entered in VF");
        end
      end else begin
        e_ld++;
        if (vf_before) e_vfh++;
        if (view.exists(lines[li])) begin
          e_vath++;
          check(rsp.data == view[lines[li]], "load did not return the view");
          view.delete(lines[li]);
          check(!vat_slot_of.exists(make_ind(NODE, lines[li])), "VATE not removed after load");
        end else begin
          if (vf_before) e_fp++;
          check(rsp.data == ems(lines[li]), "load did not return EMS data");
        end
        check(vbf.exists(lines[li]) && vbf[lines[li]] > 0, "load not entered in VBF");
      end
      @(negedge clk);
      rsp_ready = 0;
    end
    check(n_loads == 32'(e_ld) && n_stores == 32'(e_st), "load/store counters");
    check(n_vf_hits == 32'(e_vfh) && n_vat_hits == 32'(e_vath), "hit counters");
    check(n_vf_false_pos == 32'(e_fp) && n_parked == 32'(e_park), "fp/parked counters");
    check(e_fp > 0 && e_vath > 0 && e_park == 1, "all paths exercised");
    $display("loads %0d stores %0d view-hits %0d false-pos %0d (dut fp %0d parked %0d)", e_ld, e_st, e_vath, e_fp, n_vf_false_pos, n_parked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
