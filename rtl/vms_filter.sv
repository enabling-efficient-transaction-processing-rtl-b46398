// vms_filter: the VMS Filter (VF), an on-chip bloom filter that records which
// cachelines of this node have overflowed into the view memory store (VMS).
//
// A load queries the VF first and only walks the view address table (VAT) on a
// positive answer; a negative answer is exact, so the load can go straight to
// the exposed memory store (EMS). The paper sizes the VF at 512 bytes with two
// hash functions (4096 one-bit cells), and that is the default here. Its
// estimate of ~1.4K items at ~25% false positives matches one-bit cells.
//
// Organisation (this design's choice): the 4096 bits are split into two banks,
// one per hash, so that an insert writes one bit in each bank in one cycle.
// Entries are never cleared one by one: a stale bit only costs a VAT walk that
// misses (a false positive), never a wrong answer. `clr` empties the filter;
// it is only safe while the VAT holds no valid entry.
//
// Timing: `q_hit` is combinational from `q_key`; an insert is visible on the
// cycle after `ins_valid`.
module vms_filter
  import ctxnl_pkg::*;
#(
  parameter int unsigned BITS   = 4096,              // 512 B
  parameter int unsigned KEY_W  = DRAM_LINE_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] q_key,
  output logic             q_hit,
  input  logic             ins_valid,
  input  logic [KEY_W-1:0] ins_key,
  input  logic             clr,
  output logic [31:0]      n_inserts      // inserts since the last clear
);
  localparam int unsigned BANK = BITS / 2;
  localparam int unsigned IW   = $clog2(BANK);

  logic [BANK-1:0] bank0, bank1;
  logic [IW-1:0]   qi0, qi1, wi0, wi1;

  always_comb begin
    qi0 = IW'(bf_hash0(64'(q_key), IW));
    qi1 = IW'(bf_hash1(64'(q_key), IW));
    wi0 = IW'(bf_hash0(64'(ins_key), IW));
    wi1 = IW'(bf_hash1(64'(ins_key), IW));
    q_hit = bank0[qi0] & bank1[qi1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank0     <= '0;
      bank1     <= '0;
      n_inserts <= '0;
    end else if (clr) begin
      bank0     <= '0;
      bank1     <= '0;
      n_inserts <= '0;
    end else if (ins_valid) begin
      bank0[wi0] <= 1'b1;
      bank1[wi1] <= 1'b1;
      n_inserts  <= n_inserts + 32'd1;
    end
  end
endmodule
