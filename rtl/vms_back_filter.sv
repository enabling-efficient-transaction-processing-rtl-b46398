// vms_back_filter: the VMS Back Filter (VBF), a counting bloom filter that
// tracks which CtXnL cachelines this node's host may hold in its caches.
//
// It works in reverse to the VMS filter: every load served to the host inserts
// the line, and every dirty write-back (or a back-invalidation that pulled the
// line out of the host) removes it. A GSync or a peer invalidation consults it
// to decide whether a CXL.BI BISnpInv must be sent to the host. A negative
// answer must therefore be exact, which is why removal needs counters.
//
// The paper gives 16 KB per node and two hashes, and points to elastic counting
// bloom filters without giving their insides. Here (own choice) the 16 KB hold
// 4-bit saturating counters, 32768 of them, in two banks of 16384, one per
// hash. A counter that saturates sticks (it is never decremented again), so
// removals can only ever make the filter more conservative. A decrement of a
// zero counter is ignored.
//
// Timing: `q_hit` is combinational; an insert or remove takes effect on the next
// cycle. An insert and a remove in the same cycle are both applied; where they
// address the same counter the net change is zero.
module vms_back_filter
  import ctxnl_pkg::*;
#(
  parameter int unsigned BYTES  = 16384,             // 16 KB
  parameter int unsigned CNT_W  = 4,
  parameter int unsigned KEY_W  = DRAM_LINE_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] q_key,
  output logic             q_hit,
  input  logic             ins_valid,
  input  logic [KEY_W-1:0] ins_key,
  input  logic             rem_valid,
  input  logic [KEY_W-1:0] rem_key
);
  localparam int unsigned CELLS = BYTES * 8 / CNT_W;
  localparam int unsigned BANK  = CELLS / 2;
  localparam int unsigned IW    = $clog2(BANK);
  localparam logic [CNT_W-1:0] CMAX = '1;

  logic [CNT_W-1:0] bank0 [BANK];
  logic [CNT_W-1:0] bank1 [BANK];

  logic [IW-1:0] qi0, qi1, ai0, ai1, ri0, ri1;

  always_comb begin
    qi0 = IW'(bf_hash0(64'(q_key), IW));
    qi1 = IW'(bf_hash1(64'(q_key), IW));
    ai0 = IW'(bf_hash0(64'(ins_key), IW));
    ai1 = IW'(bf_hash1(64'(ins_key), IW));
    ri0 = IW'(bf_hash0(64'(rem_key), IW));
    ri1 = IW'(bf_hash1(64'(rem_key), IW));
    q_hit = (bank0[qi0] != '0) && (bank1[qi1] != '0);
  end

  // Next value of one counter given whether it is incremented / decremented.
  function automatic logic [CNT_W-1:0] step(logic [CNT_W-1:0] c, logic inc, logic dec);
    if (c == CMAX)       return c;          // sticky saturation
    if (inc && !dec)     return c + 1'b1;
    if (dec && !inc)     return (c == '0) ? c : c - 1'b1;
    return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < BANK; i++) begin
        bank0[i] <= '0;
        bank1[i] <= '0;
      end
    end else begin
      if (ins_valid)
        bank0[ai0] <= step(bank0[ai0], 1'b1, rem_valid && (ri0 == ai0));
      if (rem_valid && !(ins_valid && (ri0 == ai0)))
        bank0[ri0] <= step(bank0[ri0], 1'b0, 1'b1);
      if (ins_valid)
        bank1[ai1] <= step(bank1[ai1], 1'b1, rem_valid && (ri1 == ai1));
      if (rem_valid && !(ins_valid && (ri1 == ai1)))
        bank1[ri1] <= step(bank1[ri1], 1'b0, 1'b1);
    end
  end
endmodule
