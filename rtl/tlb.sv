// tlb: translation lookaside buffer holding only translations that passed the access check.
//
// Each entry maps a virtual page to a physical page and carries two attributes the Stockade
// check can set: `abort` (the translation was replaced by one to the abort page, so reads see
// all ones and writes are dropped) and `xd` (execute disabled, given to non-ELRANGE pages
// touched by an ordinary enclave). Because SGX flushes the TLB on every switch between
// enclave and non-enclave mode, entries carry no enclave tag.
//
// Lookup is combinational on lk_vpn. A fill writes the entry of the same virtual page if one
// is present, otherwise the next entry of a round-robin pointer. `flush` clears every entry at
// the clock edge and takes priority over a fill in the same cycle. Fully associative, 64
// entries and round-robin replacement are this design's choices; the paper does not size it.
module tlb
  import stockade_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic clk,
  input  logic rst_n,
  // lookup
  input  vpn_t lk_vpn,
  output logic lk_hit,
  output ppn_t lk_ppn,
  output logic lk_xd,
  output logic lk_abort,
  // fill
  input  logic fill_en,
  input  vpn_t fill_vpn,
  input  ppn_t fill_ppn,
  input  logic fill_xd,
  input  logic fill_abort,
  // flush all
  input  logic flush
);

  localparam int unsigned PTR_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    vpn_t vpn;
    ppn_t ppn;
    logic xd;
    logic to_abort;
  } tlb_entry_t;

  tlb_entry_t           ent   [ENTRIES];
  logic [ENTRIES-1:0]   valid_q;
  logic [PTR_W-1:0]     rr_q;

  logic                 fill_match;
  logic [PTR_W-1:0]     fill_slot, match_slot;

  always_comb begin
    lk_hit   = 1'b0;
    lk_ppn   = '0;
    lk_xd    = 1'b0;
    lk_abort = 1'b0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && ent[i].vpn == lk_vpn) begin
        lk_hit   = 1'b1;
        lk_ppn   = ent[i].ppn;
        lk_xd    = ent[i].xd;
        lk_abort = ent[i].to_abort;
      end
    end
  end

  always_comb begin
    fill_match = 1'b0;
    match_slot = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && ent[i].vpn == fill_vpn) begin
        fill_match = 1'b1;
        match_slot = PTR_W'(i);
      end
    end
    fill_slot = fill_match ? match_slot : rr_q;
  end

  always_ff @(posedge clk) begin
    if (fill_en && !flush) ent[fill_slot] <= '{vpn: fill_vpn, ppn: fill_ppn, xd: fill_xd, to_abort: fill_abort};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rr_q    <= '0;
    end else if (flush) begin
      valid_q <= '0;
    end else if (fill_en) begin
      valid_q[fill_slot] <= 1'b1;
      if (!fill_match) rr_q <= (rr_q == PTR_W'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
    end
  end

endmodule
