// tlb: fully associative translation lookaside buffer of one core (CPU or
// MTTOP), 64 entries by default as in the simulated system.
//
// Lookup is combinational: the virtual page number is compared with every
// valid entry and the hit entry's physical page number and write permission
// come out in the same cycle. A fill (from the page table walker) writes the
// entry chosen by a round-robin victim pointer, or overwrites an entry that
// already holds the same page. flush clears every entry in one cycle; it is
// how a TLB shootdown reaches the core, and for MTTOP cores the paper flushes
// the whole TLB rather than selected entries. The entry count and the flush
// follow the paper; the 4 KB page size and the round-robin replacement are
// this design's choices.
module tlb
  import ccsvm_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic [VPN_W-1:0] lk_vpn,
  output logic             lk_hit,
  output logic [PPN_W-1:0] lk_ppn,
  output logic             lk_writable,
  // fill
  input  logic             fill_valid,
  input  logic [VPN_W-1:0] fill_vpn,
  input  logic [PPN_W-1:0] fill_ppn,
  input  logic             fill_writable,
  // shootdown
  input  logic             flush
);
  localparam int unsigned IW = $clog2(ENTRIES);

  logic             valid [ENTRIES];
  logic [VPN_W-1:0] vpn   [ENTRIES];
  logic [PPN_W-1:0] ppn   [ENTRIES];
  logic             wr    [ENTRIES];
  logic [IW-1:0]    victim;

  always_comb begin
    lk_hit      = 1'b0;
    lk_ppn      = '0;
    lk_writable = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      if (valid[i] && vpn[i] == lk_vpn) begin
        lk_hit      = 1'b1;
        lk_ppn      = ppn[i];
        lk_writable = wr[i];
      end
  end

  logic          fill_match;
  logic [IW-1:0] fill_idx;
  always_comb begin
    fill_match = 1'b0;
    fill_idx   = victim;
    for (int i = 0; i < ENTRIES; i++)
      if (valid[i] && vpn[i] == fill_vpn) begin
        fill_match = 1'b1;
        fill_idx   = IW'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) valid[i] <= 1'b0;
      victim <= '0;
    end else if (flush) begin
      for (int i = 0; i < ENTRIES; i++) valid[i] <= 1'b0;
    end else if (fill_valid) begin
      valid[fill_idx] <= 1'b1;
      if (!fill_match) victim <= (int'(victim) == ENTRIES - 1) ? '0 : victim + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid && !flush) begin
      vpn[fill_idx] <= fill_vpn;
      ppn[fill_idx] <= fill_ppn;
      wr[fill_idx]  <= fill_writable;
    end
  end
endmodule
