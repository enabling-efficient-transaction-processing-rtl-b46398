// tb_vat_engine: self-checking test of the cuckoo-hash view address table.
//
// Runs at a reduced size (2 ways x 16 entries, 8 displacements) so that the
// table fills and an insertion fails within a short run. The DRAM behind the
// engine is a behavioural memory with a random 1-4 cycle answer delay; the LUT
// is modelled by the testbench as a single table whose base and valid bit it
// controls. The testbench keeps its own map from key to line and checks:
//   - every inserted key is found afterwards, and its data slot in DRAM holds
//     the line last written for it (re-inserting a key updates it in place);
//   - keys never inserted, and removed keys, miss;
//   - a lookup costs exactly one DRAM read when the key is in way 0 and at
//     most two otherwise (the bound the two-way table exists to give);
//   - the occupancy strobes add up to the number of valid entries in DRAM;
//   - when the table overflows, the insert returns not-ok, the engine blocks
//     and raises resize_err, exactly one key (the parked one) is missing from
//     DRAM, and after the runtime model points the LUT at a fresh table and
//     pulses retry, that key is placed there with its own line;
//   - an insert through an invalid table descriptor fails the same way.
module tb_vat_engine;
  import ctxnl_pkg::*;

  localparam int unsigned MT = 4;
  localparam int unsigned W  = 4;
  localparam int unsigned MR = 8;
  localparam dline_t BASE0 = 28'h0100000;
  localparam dline_t BASE1 = 28'h0200000;

  logic clk, rst_n;
  logic op_valid, op_ready, op_way, done, res_hit, res_ok, res_way;
  logic [1:0] op;
  ind_t op_ind, lut_ind;
  line_t op_data;
  logic [W-1:0] op_idx, res_idx;
  dline_t res_slot, lut_base;
  logic [$clog2(MT)-1:0] lut_tid, occ_tid;
  logic lut_valid, occ_inc, occ_dec, blocked, resize_err, retry, hold;
  logic [31:0] n_kicks, n_fails;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;

  int checks, failures;
  line_t mem [dline_t];
  line_t model [ind_t];
  int reads, occ_count;

  vat_engine #(.MAX_TABLES(MT), .WAY_IDX_W(W), .MAX_RETRY(MR)) dut (.*);

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

  // LUT model: one table
  dline_t cur_base;
  logic   cur_valid;
  assign lut_tid   = '0;
  assign lut_base  = cur_base;
  assign lut_valid = cur_valid;

  // DRAM model
  logic      busy;
  int        wait_c;
  dram_req_t held;
  assign dram_req_ready = !busy;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; dram_rsp_valid <= 0; dram_rsp <= '0; wait_c <= 0; held <= '0;
    end else begin
      dram_rsp_valid <= 0;
      if (dram_req_valid && dram_req_ready) begin
        busy <= 1; held <= dram_req; wait_c <= $urandom_range(3);
        if (!dram_req.we) reads++;
      end else if (busy) begin
        if (wait_c == 0) begin
          line_t cur;
          cur = mem.exists(held.addr) ? mem[held.addr] : '0;
          if (held.we) begin
            for (int b = 0; b < 64; b++) if (held.wmask[b]) cur[b*8 +: 8] = held.wdata[b*8 +: 8];
            mem[held.addr] = cur;
          end
          dram_rsp.rdata <= cur;
          dram_rsp_valid <= 1;
          busy <= 0;
        end else wait_c <= wait_c - 1;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (occ_inc) occ_count++;
    if (occ_dec) occ_count--;
  end

  // one operation; returns hit, ok and slot
  task automatic do_op(logic [1:0] o, ind_t k, line_t d, logic w, logic [W-1:0] i,
                       output bit hit, output bit ok, output dline_t slot,
                       output logic wy, output logic [W-1:0] ix);
    @(negedge clk);
    op_valid = 1; op = o; op_ind = k; op_data = d; op_way = w; op_idx = i;
    @(posedge clk);
    while (!op_ready) @(posedge clk);
    @(negedge clk);
    op_valid = 0;
    while (!done) @(negedge clk);
    hit = res_hit; ok = res_ok; slot = res_slot; wy = res_way; ix = res_idx;
  endtask

  function automatic line_t rd(dline_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic logic [63:0] vate_at(dline_t b, logic w, logic [W-1:0] i);
    int f;
    f = int'({w, i});
    return rd(b + dline_t'(f / 8))[(f % 8) * 64 +: 64];
  endfunction

  // whether key k is stored in table b, and where its slot is
  function automatic bit present(dline_t b, ind_t k, output dline_t slot);
    for (int w = 0; w < 2; w++)
      for (int i = 0; i < 2 ** W; i++) begin
        logic [63:0] v;
        v = vate_at(b, w[0], W'(i));
        if (v[63] && v[IND_W-1:0] == k) begin
          slot = b + dline_t'(2 ** (W - 2)) + dline_t'(int'({w[0], W'(i)}));
          return 1;
        end
      end
    return 0;
  endfunction

  function automatic int valid_count(dline_t b);
    int c;
    c = 0;
    for (int w = 0; w < 2; w++)
      for (int i = 0; i < 2 ** W; i++) if (vate_at(b, w[0], W'(i))[63]) c++;
    return c;
  endfunction

  initial begin
    ind_t keys [$];
    ind_t k;
    line_t d;
    bit hit, ok;
    dline_t slot, s2;
    logic wy;
    logic [W-1:0] ix;
    int r0, parked_seen;
    ind_t parked_key;
    bit found_parked;

    checks = 0; failures = 0; reads = 0; occ_count = 0;
    rst_n = 0; op_valid = 0; op = '0; op_ind = '0; op_data = '0; op_way = 0; op_idx = '0;
    retry = 0; hold = 0; cur_base = BASE0; cur_valid = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // fill to half load
    for (int n = 0; n < 16; n++) begin
      k = make_ind(4'd1, dline_t'($urandom));
      d = {16{32'($urandom)}};
      do_op(VAT_INSERT, k, d, 0, '0, hit, ok, slot, wy, ix);
      check(ok, "insert at half load failed");
      model[k] = d;
      keys.push_back(k);
    end
    check(occ_count == valid_count(BASE0) && occ_count == 16, "occupancy after fill");

    // lookups: all present, data right, read count bound
    foreach (keys[j]) begin
      r0 = reads;
      do_op(VAT_LOOKUP, keys[j], '0, 0, '0, hit, ok, slot, wy, ix);
      check(hit, "lookup of inserted key missed");
      check(rd(slot) == model[keys[j]], "slot data");
      check(reads - r0 == (wy ? 2 : 1), $sformatf("lookup reads %0d in way %0d", reads - r0, wy));
    end
    for (int n = 0; n < 20; n++) begin
      r0 = reads;
      do_op(VAT_LOOKUP, make_ind(4'd1, dline_t'($urandom)), '0, 0, '0, hit, ok, slot, wy, ix);
      check(!hit && reads - r0 == 2, "absent key: miss with two reads");
    end

    // update in place
    d = {16{32'h5a5a_0001}};
    do_op(VAT_INSERT, keys[3], d, 0, '0, hit, ok, slot, wy, ix);
    check(hit && ok && rd(slot) == d, "re-insert updates in place");
    model[keys[3]] = d;
    check(occ_count == 16, "re-insert does not count");

    // runtime hold: no operation is accepted until it is released
    @(negedge clk); hold = 1;
    fork
      do_op(VAT_LOOKUP, keys[3], '0, 0, '0, hit, ok, slot, wy, ix);
      begin
        int held;
        held = 0;
        repeat (12) begin
          @(negedge clk);
          if (!op_ready && !done) held++;
        end
        check(held == 12, $sformatf("operation accepted during hold (%0d of 12 cycles held)", held));
        hold = 0;
      end
    join
    check(hit && rd(slot) == d, "lookup after hold released");

    // remove two keys (lookup gives the position, as the flows do)
    for (int j = 0; j < 2; j++) begin
      do_op(VAT_LOOKUP, keys[j], '0, 0, '0, hit, ok, slot, wy, ix);
      do_op(VAT_REMOVE, keys[j], '0, wy, ix, hit, ok, slot, wy, ix);
      do_op(VAT_LOOKUP, keys[j], '0, 0, '0, hit, ok, slot, wy, ix);
      check(!hit, "removed key still found");
      model.delete(keys[j]);
    end
    void'(keys.pop_front()); void'(keys.pop_front());
    check(occ_count == 14 && valid_count(BASE0) == 14, "occupancy after remove");

    // overfill until an insert fails
    parked_seen = 0;
    for (int n = 0; n < 40 && parked_seen == 0; n++) begin
      k = make_ind(4'd1, dline_t'($urandom));
      d = {16{32'($urandom)}};
      do_op(VAT_INSERT, k, d, 0, '0, hit, ok, slot, wy, ix);
      model[k] = d;
      keys.push_back(k);
      if (!ok) parked_seen = 1;
    end
    check(parked_seen == 1, "table never overflowed");
    @(negedge clk);
    check(blocked && resize_err && !op_ready, "blocked after overflow");
    check(n_kicks >= MR, "displacements before failure");
    // exactly one key is homeless
    found_parked = 0;
    foreach (keys[j]) if (!present(BASE0, keys[j], s2)) begin
      check(!found_parked, "more than one key lost");
      found_parked = 1; parked_key = keys[j];
    end
    check(found_parked, "no parked key");
    foreach (keys[j]) if (keys[j] != parked_key) begin
      check(present(BASE0, keys[j], s2) && rd(s2) == model[keys[j]], "key kept with its line");
    end
    check(occ_count == valid_count(BASE0), "occupancy after overflow");

    // runtime: new table, then retry; done must not pulse for the retry
    cur_base = BASE1;
    @(negedge clk); retry = 1;
    @(negedge clk); retry = 0;
    fork
      begin
        while (blocked) begin
          @(negedge clk);
          if (done) check(0, "done pulsed for a retried insert");
        end
      end
    join
    check(!resize_err && op_ready, "unblocked after retry");
    check(present(BASE1, parked_key, s2) && rd(s2) == model[parked_key], "parked key placed");
    check(valid_count(BASE1) == 1, "new table holds exactly the parked key");

    // invalid descriptor: insert fails and parks
    cur_valid = 0;
    k = make_ind(4'd1, 28'h0000abc);
    do_op(VAT_INSERT, k, '1, 0, '0, hit, ok, slot, wy, ix);
    @(negedge clk);
    check(!ok && blocked && resize_err, "invalid table parks the insert");
    cur_valid = 1;
    @(negedge clk); retry = 1;
    @(negedge clk); retry = 0;
    while (blocked) @(negedge clk);
    check(present(BASE1, k, s2) && rd(s2) == '1, "parked key placed after descriptor fixed");
    do_op(VAT_LOOKUP, make_ind(4'd1, 28'h0000abc), '0, 0, '0, hit, ok, slot, wy, ix);
    check(hit, "lookup after retry");
    check(n_fails == 2, "failure count");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
