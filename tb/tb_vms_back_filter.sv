// tb_vms_back_filter: self-checking test of the VMS back filter (counting
// bloom filter) at its full 16 KB, 4-bit-counter, two-hash size.
//
// The testbench keeps its own copy of both counter banks, updated by the same
// rules the filter promises (increment on insert, decrement on remove, no
// underflow, a saturated counter sticks, insert and remove of one counter in
// one cycle cancel) and compares the hit output with it after every step of a
// random insert/remove sequence. It also checks the property the CTHW relies
// on: a line inserted more often than removed always hits (no false
// negatives), and a line whose inserts were all removed misses when no other
// line shares its counters.
module tb_vms_back_filter;
  import ctxnl_pkg::*;

  localparam int unsigned BYTES = 16384;
  localparam int unsigned CNT_W = 4;
  localparam int unsigned BANK  = BYTES * 8 / CNT_W / 2;
  localparam int unsigned IW    = $clog2(BANK);

  logic   clk, rst_n;
  dline_t q_key, ins_key, rem_key;
  logic   q_hit, ins_valid, rem_valid;

  int checks, failures;
  int unsigned c0 [BANK];
  int unsigned c1 [BANK];
  int          live [dline_t];   // outstanding inserts per key

  vms_back_filter #(.BYTES(BYTES), .CNT_W(CNT_W)) dut (.*);

  initial clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int unsigned stepc(int unsigned c, bit inc, bit dec);
    if (c == 15)      return c;
    if (inc && !dec)  return c + 1;
    if (dec && !inc)  return (c == 0) ? 0 : c - 1;
    return c;
  endfunction

  function automatic bit ref_hit(dline_t k);
    return c0[IW'(bf_hash0(64'(k), IW))] != 0 && c1[IW'(bf_hash1(64'(k), IW))] != 0;
  endfunction

  // apply one cycle of insert/remove to the DUT and the reference
  task automatic cyc(bit iv, dline_t ik, bit rv, dline_t rk);
    int unsigned a0, a1, r0, r1;
    @(negedge clk);
    ins_valid = iv; ins_key = ik; rem_valid = rv; rem_key = rk;
    a0 = IW'(bf_hash0(64'(ik), IW)); a1 = IW'(bf_hash1(64'(ik), IW));
    r0 = IW'(bf_hash0(64'(rk), IW)); r1 = IW'(bf_hash1(64'(rk), IW));
    if (iv && rv && a0 == r0) c0[a0] = stepc(c0[a0], 1, 1);
    else begin
      if (iv) c0[a0] = stepc(c0[a0], 1, 0);
      if (rv) c0[r0] = stepc(c0[r0], 0, 1);
    end
    if (iv && rv && a1 == r1) c1[a1] = stepc(c1[a1], 1, 1);
    else begin
      if (iv) c1[a1] = stepc(c1[a1], 1, 0);
      if (rv) c1[r1] = stepc(c1[r1], 0, 1);
    end
    @(negedge clk);
    ins_valid = 1'b0; rem_valid = 1'b0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dline_t pool [64];
    dline_t k, k2;
    checks = 0; failures = 0;
    rst_n = 1'b0; q_key = '0; ins_key = '0; rem_key = '0;
    ins_valid = 1'b0; rem_valid = 1'b0;
    for (int i = 0; i < BANK; i++) begin c0[i] = 0; c1[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // single line: insert twice, remove twice -> hit, hit, miss; extra remove harmless
    k = 28'h0123456;
    cyc(1, k, 0, '0); q_key = k; #1 check(q_hit, "hit after insert");
    cyc(1, k, 0, '0); q_key = k; #1 check(q_hit, "hit after 2nd insert");
    cyc(0, '0, 1, k); q_key = k; #1 check(q_hit, "hit with one insert left");
    cyc(0, '0, 1, k); q_key = k; #1 check(!q_hit, "miss after all removed");
    cyc(0, '0, 1, k); q_key = k; #1 check(!q_hit, "no underflow");
    cyc(1, k, 0, '0); q_key = k; #1 check(q_hit, "hit after re-insert (no wrap)");
    // insert and remove of the same line in one cycle cancel
    cyc(1, k, 1, k);  q_key = k; #1 check(q_hit, "simultaneous ins/rem keep count");
    cyc(0, '0, 1, k); q_key = k; #1 check(!q_hit, "count was exactly one");

    // saturation is sticky: 15 inserts then 20 removes still hit
    k2 = 28'h0abcdef;
    repeat (15) cyc(1, k2, 0, '0);
    repeat (20) cyc(0, '0, 1, k2);
    q_key = k2; #1 check(q_hit, "saturated counter must stick");

    // random traffic against the reference
    foreach (pool[i]) pool[i] = dline_t'($urandom);
    for (int n = 0; n < 20000; n++) begin
      int unsigned pi, pr;
      bit iv, rv;
      pi = $urandom_range(63); pr = $urandom_range(63);
      iv = $urandom_range(1);
      rv = $urandom_range(1) && live.exists(pool[pr]) && live[pool[pr]] > 0;
      cyc(iv, pool[pi], rv, pool[pr]);
      if (iv) live[pool[pi]] = live.exists(pool[pi]) ? live[pool[pi]] + 1 : 1;
      if (rv) live[pool[pr]] = live[pool[pr]] - 1;
      q_key = pool[$urandom_range(63)];
      #1 check(q_hit == ref_hit(q_key), "mismatch with reference");
      foreach (live[key]) if (live[key] > 0) begin
        q_key = key;
        #1 if (!q_hit) check(0, "false negative");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
