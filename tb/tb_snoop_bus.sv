// tb_snoop_bus: self-checking test of the coherence snoop bus with 16 nodes.
//
// Each node is a small model that, at random times, requests a broadcast of a
// random line and holds the request until `done`, and that acknowledges every
// broadcast shown to it after a random delay. The testbench checks that a
// broadcast is shown to every node except its requester, with the requested
// line, that `done` reaches the requester only after all 15 peers have
// acknowledged, that broadcasts never overlap, that every request is served
// (round-robin: nobody starves) and the broadcast counter. With peers that
// acknowledge in the next cycle, `done` is seen two cycles after the request
// is raised; that timing is checked too.
module tb_snoop_bus;
  import ctxnl_pkg::*;

  localparam int unsigned N = 16;

  logic clk, rst_n;
  logic [N-1:0] req_valid, done, snp_valid, snp_ack;
  dline_t req_line [N];
  dline_t snp_line;
  logic [$clog2(N)-1:0] snp_src;
  logic [31:0] n_broadcasts;

  int checks, failures;
  int served [N];
  int requested;
  logic [N-1:0] acked;      // peers that acked the current broadcast
  int ack_delay [N];
  bit fast, timing_go, timing_ok;

  snoop_bus #(.N_NODES(N)) dut (.*);

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

  // peers: ack after a random delay, one pulse
  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      snp_ack[i] = 1'b0;
      if (rst_n && snp_valid[i] && !acked[i]) begin
        if (ack_delay[i] == 0) begin
          snp_ack[i] = 1'b1;
          ack_delay[i] = fast ? 0 : $urandom_range(6);
        end else ack_delay[i]--;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (snp_ack[i]) acked[i] <= 1'b1;
    if (snp_valid != '0) begin
      check(!snp_valid[snp_src], "requester snooped itself");
      check(req_valid[snp_src] && snp_line == req_line[snp_src], "broadcast line");
    end
    if (done != '0) begin
      check($onehot(done), "done to one node");
      check(done[snp_src], "done to the requester");
      check((acked | (N'(1) << snp_src)) == '1, "done before all peers acked");
      acked <= '0;
    end
  end

  // requesters
  for (genvar i = 0; i < N; i++) begin : g_req
    initial begin
      req_valid[i] = 1'b0;
      req_line[i]  = '0;
      wait (rst_n);
      for (int n = 0; n < 20; n++) begin
        @(negedge clk);
        repeat ($urandom_range(40)) @(negedge clk);
        req_line[i]  = dline_t'($urandom);
        req_valid[i] = 1'b1;
        requested++;
        @(posedge clk);
        while (!done[i]) @(posedge clk);
        served[i]++;
        @(negedge clk);
        req_valid[i] = 1'b0;
      end
      if (i == 0) begin
        int cyc;
        wait (timing_go);
        @(negedge clk);
        req_line[i]  = 28'h00c0ffe;
        req_valid[i] = 1'b1;
        cyc = 0;
        do begin
          @(negedge clk);
          cyc++;
        end while (!done[i] && cyc < 100);
        req_valid[i] = 1'b0;
        check(cyc == 2, $sformatf("broadcast latency %0d cycles, expected 2", cyc));
        timing_ok = 1;
      end
    end
  end

  initial begin
    int t0;
    checks = 0; failures = 0; requested = 0; fast = 0; timing_go = 0; timing_ok = 0;
    acked = '0; snp_ack = '0;
    foreach (served[i]) served[i] = 0;
    foreach (ack_delay[i]) ack_delay[i] = 0;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (requested == 20 * N);
    while (served.sum() != 20 * N) @(posedge clk);
    foreach (served[i]) check(served[i] == 20, "node served");
    check(n_broadcasts == 20 * N, "broadcast count");

    // timing with immediate acks: grant (cycle 1), acks (2), done (3)
    fast = 1;
    foreach (ack_delay[i]) ack_delay[i] = 0;
    repeat (5) @(negedge clk);
    timing_go = 1;
    wait (timing_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
