// tb_cthw_csr: self-checking test of the CTHW configuration segment.
//
// The LUT, table descriptors and occupancy counters the registers front are
// modelled by the testbench (the LUT read-back answers from the index the
// block presents). Random register writes and reads are mixed with raw DRAM
// accesses above the register window. The testbench checks every write
// strobe (LUT entry, descriptor, occupancy overwrite, restart of a parked VAT
// insertion) and its fields, the read value of every register, that the
// queue/control registers hold what was written, that lines above the window
// reach DRAM unchanged with the in-segment line address, that `irq` follows
// the resize error, and that a register access answers exactly one cycle after
// it is accepted.
module tb_cthw_csr;
  import ctxnl_pkg::*;

  localparam int unsigned MT = 16;
  localparam int unsigned TW = 4;
  localparam int unsigned OW = 21;

  logic clk, rst_n;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t req;
  mem_rsp_t rsp;
  logic lut_we, tbl_we, tbl_valid, occ_clr, resize_err, vat_blocked, retry, irq, wq_enable, vat_hold;
  logic [11:0] lut_idx;
  logic [TW-1:0] lut_tid, tbl_id, occ_clr_tid, lut_rd_tid;
  dline_t tbl_base, wq_base, cq_line;
  logic [OW-1:0] occ_clr_val;
  logic [OW-1:0] occ [MT];
  dline_t tbl_base_rd [MT];
  logic   tbl_valid_rd [MT];
  logic [31:0] vf_inserts;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;

  int checks, failures;
  logic [TW-1:0] lut [4096];
  line_t dram [dline_t];
  int retries;

  cthw_csr #(.MAX_TABLES(MT), .OCC_W(OW)) dut (.*);

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

  // models of what the registers front
  assign lut_rd_tid = lut[lut_idx];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < MT; t++) begin occ[t] <= '0; tbl_base_rd[t] <= '0; tbl_valid_rd[t] <= 0; end
      retries <= 0;
    end else begin
      if (lut_we) lut[lut_idx] <= lut_tid;
      if (tbl_we) begin tbl_base_rd[tbl_id] <= tbl_base; tbl_valid_rd[tbl_id] <= tbl_valid; end
      if (occ_clr) occ[occ_clr_tid] <= occ_clr_val;
      if (retry) retries <= retries + 1;
    end
  end

  logic dbusy; dram_req_t dreq;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dbusy <= 0; dram_rsp_valid <= 0; dram_rsp <= '0; dreq <= '0; end
    else begin
      dram_rsp_valid <= 0;
      if (dram_req_valid && dram_req_ready) begin dbusy <= 1; dreq <= dram_req; end
      else if (dbusy && $urandom_range(1)) begin
        dbusy <= 0; dram_rsp_valid <= 1;
        dram_rsp.rdata <= dram.exists(dreq.addr) ? dram[dreq.addr] : '0;
        if (dreq.we) dram[dreq.addr] = dreq.wdata;
      end
    end
  end
  assign dram_req_ready = !dbusy;

  // one access; returns data and the cycles from acceptance to response
  task automatic acc(mem_op_e op, dline_t a, line_t d, output line_t q, output int lat);
    @(negedge clk);
    req_valid = 1; req.op = op; req.addr = paline_t'(a); req.data = d; req.tag = 8'h5c;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0; lat = 0;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    q = rsp.data;
    check(rsp.tag == 8'h5c && rsp.op == op, "response tag/op");
  endtask

  task automatic wr(dline_t a, logic [63:0] v);
    line_t q; int lat;
    acc(MEM_ST, a, line_t'(v), q, lat);
    if (a < 8192) check(lat == 0, "register write latency");
  endtask

  task automatic rd(dline_t a, output logic [63:0] v);
    line_t q; int lat;
    acc(MEM_LD, a, '0, q, lat);
    if (a < 8192) check(lat == 0, "register read latency");
    v = q[63:0];
  endtask

  initial begin
    logic [63:0] v;
    logic [TW-1:0] rlut [4096];
    dline_t rb [MT];
    bit rv [MT];
    line_t q;
    int lat;
    checks = 0; failures = 0;
    rst_n = 0; req_valid = 0; req = '0; rsp_ready = 1; resize_err = 0; vat_blocked = 0;
    vf_inserts = 32'd77;
    for (int i = 0; i < 4096; i++) begin lut[i] = '0; rlut[i] = '0; end
    foreach (rb[t]) begin rb[t] = '0; rv[t] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // LUT entries
    for (int n = 0; n < 100; n++) begin
      int i;
      i = $urandom_range(4095);
      rlut[i] = TW'($urandom);
      wr(dline_t'(i), 64'(rlut[i]));
    end
    for (int n = 0; n < 100; n++) begin
      int i;
      i = $urandom_range(4095);
      rd(dline_t'(i), v);
      check(v == 64'(rlut[i]), "LUT read-back");
    end
    // descriptors
    for (int t = 0; t < MT; t++) begin
      rb[t] = dline_t'($urandom); rv[t] = $urandom_range(1);
      wr(dline_t'(16'h1000 + t), {rv[t], 35'd0, rb[t]});
    end
    for (int t = 0; t < MT; t++) begin
      rd(dline_t'(16'h1000 + t), v);
      check(v == {rv[t], 35'd0, rb[t]}, "descriptor read-back");
    end
    // occupancy overwrite and read
    wr(dline_t'(16'h1013), 64'd1234);
    rd(dline_t'(16'h1013), v);
    check(v == 64'd1234, "occupancy register");
    // status, retry, irq
    @(negedge clk); resize_err = 1; vat_blocked = 1;
    #1 check(irq, "irq follows the resize error");
    rd(dline_t'(16'h1020), v);
    check(v == 64'd3, "status register");
    wr(dline_t'(16'h1020), 64'd0);
    check(retries == 0, "writing 0 must not restart");
    wr(dline_t'(16'h1020), 64'd1);
    @(negedge clk);
    check(retries == 1, "restart strobe");
    resize_err = 0; vat_blocked = 0;
    // queue and control registers
    wr(dline_t'(16'h1021), 64'h0abcdef);
    wr(dline_t'(16'h1022), 64'h0123456);
    wr(dline_t'(16'h1023), 64'd1);
    check(wq_base == 28'h0abcdef && cq_line == 28'h0123456 && wq_enable, "queue registers");
    rd(dline_t'(16'h1021), v); check(v == 64'h0abcdef, "WQ read");
    rd(dline_t'(16'h1022), v); check(v == 64'h0123456, "CQ read");
    rd(dline_t'(16'h1023), v); check(v == 64'd1 && !vat_hold, "CTL read");
    wr(dline_t'(16'h1023), 64'd3);
    rd(dline_t'(16'h1023), v); check(v == 64'd3 && vat_hold && wq_enable, "VAT hold set");
    wr(dline_t'(16'h1023), 64'd1);
    check(!vat_hold && wq_enable, "VAT hold released");
    rd(dline_t'(16'h1024), v); check(v == 64'd77, "VF insert count");
    // raw DRAM above the window
    for (int n = 0; n < 30; n++) begin
      dline_t a;
      line_t d;
      a = dline_t'(8192 + $urandom_range(100000));
      d = {16{32'($urandom)}};
      acc(MEM_ST, a, d, q, lat);
      check(dram.exists(a) && dram[a] == d, "DRAM write through");
      acc(MEM_LD, a, '0, q, lat);
      check(q == d, "DRAM read through");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
