// tb_seg_router: self-checking test of the primitive segment router.
//
// Random host requests over all four quarters of the 48 GB (+ unused) window
// go in. Each output segment is modelled as a small server that accepts with a
// random ready, remembers what it got, and answers later with data derived
// from the request tag. The testbench checks that every request reached the
// segment named by the top two address bits with the in-segment line address
// and unchanged payload, that requests to the unused quarter are answered with
// zero data, that every response reaches the host exactly once, and the
// per-segment counters.
module tb_seg_router;
  import ctxnl_pkg::*;

  logic     clk, rst_n;
  logic     in_req_valid, in_req_ready, in_rsp_valid, in_rsp_ready;
  mem_req_t in_req;
  mem_rsp_t in_rsp;
  logic     out_req_valid [3];
  logic     out_req_ready [3];
  mem_req_t out_req       [3];
  logic     out_rsp_valid [3];
  logic     out_rsp_ready [3];
  mem_rsp_t out_rsp       [3];
  logic [31:0] n_per_seg  [4];

  int checks, failures;
  mem_req_t q [3][$];        // requests seen by each segment, not yet answered
  int       sent [4];
  int       outstanding [int];   // tag -> expected segment
  int       got;

  seg_router dut (.*);

  initial clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic line_t rsp_data(int seg, logic [TAGID_W-1:0] tag);
    return {16{8'(seg), 8'(tag), 16'hbeef}};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // segment servers
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 3; s++) begin
      if (out_rsp_valid[s] && out_rsp_ready[s]) void'(q[s].pop_front());
      if (out_req_valid[s] && out_req_ready[s]) begin
        check(out_req[s].addr[PA_LINE_W-1:DRAM_LINE_W] == '0, "address not localised");
        q[s].push_back(out_req[s]);
      end
    end
  end
  always @(negedge clk) begin
    for (int s = 0; s < 3; s++) begin
      out_req_ready[s] = rst_n && ($urandom_range(3) != 0);
      out_rsp_valid[s] = rst_n && (q[s].size() > 0) && ($urandom_range(1) == 1);
      if (q[s].size() > 0) begin
        out_rsp[s].op   = q[s][0].op;
        out_rsp[s].tag  = q[s][0].tag;
        out_rsp[s].data = rsp_data(s, q[s][0].tag);
      end else out_rsp[s] = '0;
    end
    in_rsp_ready = $urandom_range(3) != 0;
  end

  // host side: check responses
  always @(posedge clk) if (rst_n && in_rsp_valid && in_rsp_ready) begin
    int s;
    check(outstanding.exists(int'(in_rsp.tag)), "unexpected response tag");
    if (outstanding.exists(int'(in_rsp.tag))) begin
      s = outstanding[int'(in_rsp.tag)];
      check(in_rsp.data == ((s == 3) ? '0 : rsp_data(s, in_rsp.tag)), "response data");
      outstanding.delete(int'(in_rsp.tag));
    end
    got++;
  end

  initial begin
    checks = 0; failures = 0; got = 0;
    rst_n = 0; in_req_valid = 0; in_req = '0; in_rsp_ready = 0;
    for (int s = 0; s < 3; s++) begin out_req_ready[s] = 0; out_rsp_valid[s] = 0; out_rsp[s] = '0; end
    foreach (sent[i]) sent[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 256; n++) begin
      int s;
      dline_t l;
      @(negedge clk);
      s = $urandom_range(3);
      l = dline_t'($urandom);
      in_req.op   = mem_op_e'($urandom_range(1));
      in_req.addr = {2'(s), l};
      in_req.tag  = TAGID_W'(n);
      in_req.data = {16{32'($urandom)}};
      in_req_valid = 1;
      outstanding[n] = s;
      @(posedge clk);
      while (!in_req_ready) @(posedge clk);
      if (s < 3) begin
        #1;
        check(q[s].size() > 0 && q[s][$].tag == TAGID_W'(n) && q[s][$].addr == paline_t'(l)
              && q[s][$].data == in_req.data && q[s][$].op == in_req.op, "routed request");
      end
      sent[s]++;
      @(negedge clk); in_req_valid = 0;
      // keep the tags unique: wait for this one before reusing 8-bit tags
      if (n % 8 == 7) while (outstanding.size() > 0) @(negedge clk);
    end
    while (outstanding.size() > 0) @(negedge clk);
    check(got == 256, "all responses back");
    for (int s = 0; s < 4; s++) check(n_per_seg[s] == 32'(sent[s]), "segment counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
