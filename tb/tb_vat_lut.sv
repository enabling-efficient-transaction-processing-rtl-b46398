// tb_vat_lut: self-checking test of the VAT table lookup.
//
// Programs table descriptors and LUT entries through the write ports and
// checks that an indicator is mapped to the table named by the LUT entry of
// its 12-bit prefix, with that table's base and valid bit; that read-back
// ports agree; and that the per-table occupancy counters follow increment,
// decrement, simultaneous increment+decrement and runtime overwrite. The
// lookup is combinational, writes act on the next clock edge.
module tb_vat_lut;
  import ctxnl_pkg::*;

  localparam int unsigned MT = 16;
  localparam int unsigned TW = $clog2(MT);
  localparam int unsigned OW = 21;

  logic clk, rst_n;
  ind_t q_ind;
  logic [TW-1:0] q_tid, lut_tid, tbl_id, occ_inc_tid, occ_dec_tid, occ_clr_tid, rd_tid;
  dline_t q_base, tbl_base;
  logic q_valid, lut_we, tbl_we, tbl_valid, occ_inc, occ_dec, occ_clr;
  logic [11:0] lut_idx, rd_idx;
  logic [OW-1:0] occ_clr_val;
  logic [OW-1:0] occ [MT];
  dline_t tbase_o [MT];
  logic   tvalid_o [MT];

  int checks, failures;
  logic [TW-1:0] ref_lut [4096];
  dline_t        ref_base [MT];
  bit            ref_val  [MT];
  int            ref_occ  [MT];

  vat_lut #(.MAX_TABLES(MT), .OCC_W(OW)) dut (.*);

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    rst_n = 0; q_ind = '0; lut_we = 0; tbl_we = 0; occ_inc = 0; occ_dec = 0; occ_clr = 0;
    lut_idx = '0; lut_tid = '0; tbl_id = '0; tbl_base = '0; tbl_valid = 0;
    occ_inc_tid = '0; occ_dec_tid = '0; occ_clr_tid = '0; occ_clr_val = '0; rd_idx = '0;
    for (int i = 0; i < 4096; i++) ref_lut[i] = '0;
    for (int t = 0; t < MT; t++) begin ref_base[t] = '0; ref_val[t] = 0; ref_occ[t] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // after reset: everything maps to table 0, which is invalid
    q_ind = make_ind(4'd3, 28'h1234567);
    #1 check(q_tid == 0 && !q_valid, "reset state");

    // descriptors
    for (int t = 0; t < MT; t++) begin
      @(negedge clk);
      tbl_we = 1; tbl_id = TW'(t); tbl_base = dline_t'($urandom); tbl_valid = (t != 5);
      ref_base[t] = tbl_base; ref_val[t] = tbl_valid;
    end
    @(negedge clk); tbl_we = 0;
    // random LUT entries
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      lut_we = 1; lut_idx = 12'($urandom); lut_tid = TW'($urandom);
      ref_lut[lut_idx] = lut_tid;
    end
    @(negedge clk); lut_we = 0;

    for (int n = 0; n < 2000; n++) begin
      dline_t l;
      logic [TW-1:0] t;
      l = dline_t'($urandom);
      q_ind = make_ind(node_t'($urandom), l);
      rd_idx = 12'($urandom);
      #1;
      t = ref_lut[l[27:16]];
      check(q_tid == t && q_base == ref_base[t] && q_valid == ref_val[t], "lookup");
      check(rd_tid == ref_lut[rd_idx], "read-back");
    end
    foreach (tbase_o[t]) check(tbase_o[t] == ref_base[t] && tvalid_o[t] == ref_val[t], "descriptor out");

    // occupancy
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      occ_inc = $urandom_range(1); occ_inc_tid = TW'($urandom_range(3));
      occ_dec = $urandom_range(3) == 0; occ_dec_tid = TW'($urandom_range(3));
      if (ref_occ[occ_dec_tid] == 0) occ_dec = 0;
      occ_clr = $urandom_range(50) == 0; occ_clr_tid = TW'($urandom_range(3));
      occ_clr_val = OW'($urandom_range(100));
      for (int t = 0; t < 4; t++) begin
        if (occ_clr && occ_clr_tid == t) ref_occ[t] = occ_clr_val;
        else begin
          if (occ_inc && occ_inc_tid == t) ref_occ[t]++;
          if (occ_dec && occ_dec_tid == t) ref_occ[t]--;
        end
      end
      @(posedge clk); #1;
      for (int t = 0; t < 4; t++) check(occ[t] == OW'(ref_occ[t]), "occupancy");
    end
    @(negedge clk); occ_inc = 0; occ_dec = 0; occ_clr = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
