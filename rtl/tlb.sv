// tlb: fully associative translation look-aside buffer of one core.
//
// The TLB holds virtual-page -> physical-frame translations together with
// the writable and dirty bits of the PTE they came from. A lookup is
// combinational: lk_hit/lk_pfn answer in the same cycle as lk_vpn. A write
// access only hits an entry that is both writable and already dirty, so a
// first write goes to the page walker, which sets the PTE dirty bit (or
// raises a protection fault) and refills the entry.
//
// Fills arrive from two sources in this design, the page walker after a
// successful walk and the MFOE after it has serviced a minor fault, and are
// merged by the enclosing core into the single fill port. A fill for a VPN
// that is already cached overwrites that entry; otherwise the first invalid
// entry is used, and when all are valid a round-robin pointer picks the
// victim. flush invalidates every entry in one cycle (CR3 write).
//
// The paper names the TLB but gives neither its size nor its organisation;
// the 64 entries, full associativity and round-robin replacement are this
// design's choices.
//
// Lint note: package constants this module does not need are reported
// unused.
module tlb
  import mfoe_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic [VPN_W-1:0] lk_vpn,
  input  logic             lk_write,
  output logic             lk_hit,
  output logic [PFN_W-1:0] lk_pfn,
  // fill
  input  logic             fill_valid,
  input  logic [VPN_W-1:0] fill_vpn,
  input  logic [PFN_W-1:0] fill_pfn,
  input  logic             fill_rw,
  input  logic             fill_dirty,
  // invalidate all
  input  logic             flush
);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic             valid;
    logic [VPN_W-1:0] vpn;
    logic [PFN_W-1:0] pfn;
    logic             rw;
    logic             dirty;
  } tlb_entry_t;

  tlb_entry_t       ent [ENTRIES];
  logic [IW-1:0]    rr_ptr;

  // lookup
  always_comb begin
    lk_hit = 1'b0;
    lk_pfn = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (ent[i].valid && ent[i].vpn == lk_vpn &&
          (!lk_write || (ent[i].rw && ent[i].dirty))) begin
        lk_hit = 1'b1;
        lk_pfn = ent[i].pfn;
      end
    end
  end

  // victim selection for a fill
  logic          match_found, free_found;
  logic [IW-1:0] match_idx, free_idx, fill_idx;
  always_comb begin
    match_found = 1'b0;
    free_found  = 1'b0;
    match_idx   = '0;
    free_idx    = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (ent[i].valid && ent[i].vpn == fill_vpn && !match_found) begin
        match_found = 1'b1;
        match_idx   = IW'(i);
      end
      if (!ent[i].valid && !free_found) begin
        free_found = 1'b1;
        free_idx   = IW'(i);
      end
    end
    fill_idx = match_found ? match_idx : (free_found ? free_idx : rr_ptr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ent[i] <= '0;
      rr_ptr <= '0;
    end else if (flush) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ent[i].valid <= 1'b0;
    end else if (fill_valid) begin
      ent[fill_idx] <= '{valid: 1'b1, vpn: fill_vpn, pfn: fill_pfn,
                         rw: fill_rw, dirty: fill_dirty};
      if (!match_found && !free_found)
        rr_ptr <= (rr_ptr == IW'(ENTRIES - 1)) ? '0 : rr_ptr + 1'b1;
    end
  end

endmodule
