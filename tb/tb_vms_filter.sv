// tb_vms_filter: self-checking test of the VMS filter at its full 512-byte,
// two-hash size.
//
// A reference copy of the two bit banks is kept in the testbench and updated
// from the package hash functions; after every insert the filter must report
// the key, and for random probes it must agree with the reference bit for bit.
// Loading 1400 keys (the capacity quoted for this size) must give a false
// positive rate of about one in four, measured over fresh random keys. The
// insert counter and the clear input are checked last. Query is combinational,
// an insert is visible one cycle later.
module tb_vms_filter;
  import ctxnl_pkg::*;

  localparam int unsigned BITS = 4096;
  localparam int unsigned BANK = BITS / 2;
  localparam int unsigned IW   = $clog2(BANK);
  localparam int unsigned N    = 1400;

  logic         clk, rst_n;
  dline_t       q_key, ins_key;
  logic         q_hit, ins_valid, clr;
  logic [31:0]  n_inserts;

  int checks, failures;
  bit ref0 [BANK];
  bit ref1 [BANK];
  dline_t keys [N];

  vms_filter #(.BITS(BITS)) dut (.*);

  initial clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic bit ref_hit(dline_t k);
    return ref0[IW'(bf_hash0(64'(k), IW))] && ref1[IW'(bf_hash1(64'(k), IW))];
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fp, probes;
    checks = 0; failures = 0;
    rst_n = 1'b0; q_key = '0; ins_key = '0; ins_valid = 1'b0; clr = 1'b0;
    for (int i = 0; i < BANK; i++) begin ref0[i] = 0; ref1[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // empty filter: nothing hits
    for (int i = 0; i < 64; i++) begin
      q_key = dline_t'($urandom);
      #1 check(q_hit == 1'b0, "empty filter hit");
    end

    // load N keys, each visible right after its insert
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      keys[i]   = dline_t'($urandom);
      ins_key   = keys[i];
      ins_valid = 1'b1;
      ref0[IW'(bf_hash0(64'(keys[i]), IW))] = 1;
      ref1[IW'(bf_hash1(64'(keys[i]), IW))] = 1;
      @(negedge clk);
      ins_valid = 1'b0;
      q_key     = keys[i];
      #1 check(q_hit, "inserted key misses");
    end
    check(n_inserts == N, "insert count");

    // no false negatives, and agreement with the reference on random keys
    foreach (keys[i]) begin
      q_key = keys[i];
      #1 if (!q_hit) check(0, "false negative");
    end
    checks++;
    fp = 0; probes = 4000;
    for (int i = 0; i < probes; i++) begin
      q_key = dline_t'($urandom);
      #1;
      if (q_hit != ref_hit(q_key)) check(0, "mismatch with reference");
      if (q_hit) fp++;
    end
    checks++;
    $display("false positives: %0d of %0d at %0d items", fp, probes, N);
    check(fp > probes * 15 / 100 && fp < probes * 35 / 100, "FP rate not ~25%");

    // clear
    @(negedge clk); clr = 1'b1;
    @(negedge clk); clr = 1'b0;
    check(n_inserts == 0, "count after clear");
    foreach (keys[i]) begin
      q_key = keys[i];
      #1 if (q_hit) check(0, "hit after clear");
    end
    checks++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
