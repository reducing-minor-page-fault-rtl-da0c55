// mfoe_pkg: types, field positions and constants shared by the Minor Fault
// Offload Engine (MFOE) and the x86-64 page walker / TLB subsystem it extends.
//
// What follows the paper:
//   * the PTE bit that marks an address as legal for offload ("MFOEable") is
//     bit 2, and the RW bit is bit 1; the kernel stores the TGID of the owning
//     process in the PFN field of the empty PTE;
//   * a PTE lock bit is taken from the software-available (AVL) bits;
//   * the CR9 control register carries a 34-bit PFN of the pre-allocation
//     table, a 16-bit entry count and an enable bit;
//   * pre-allocation table entries are 16 bytes; entry 0 is the header that
//     holds four 4-byte fields: head index, tail index, entry count, locks;
//     indices run from 1 to the entry count;
//   * an entry holds VA, TGID, PFN, a used bit and a valid bit, and the word
//     the engine reads first carries the valid bit.
// This design's own choices (the paper gives no bit positions for them):
//   * the lock bit is AVL bit 9;
//   * CR9 = {13'b0, enable[50], entries[49:34], pfn[33:0]};
//   * entry qword 0 = {tgid[63:36], pfn[35:2], used[1], valid[0]},
//     entry qword 1 = faulting virtual address;
//   * header qword 0 = {tail[63:32], head[31:0]}, qword 1 = {locks, entries}.
//   * memory is reached through 64-bit words with byte strobes so that the
//     consumer can rewrite the tail index without touching the head index.
//
// cr9_decode and pte_pfn take whole 64-bit register and PTE words and pick
// their fields, so the remaining bits of their arguments are unused.
package mfoe_pkg;

  // Address widths: 48-bit virtual (4-level paging), 34-bit PFN -> 46-bit PA.
  localparam int unsigned VA_W   = 48;
  localparam int unsigned PFN_W  = 34;
  localparam int unsigned PA_W   = PFN_W + 12;
  localparam int unsigned VPN_W  = VA_W - 12;
  localparam int unsigned TGID_W = 28;

  // x86-64 PTE bit positions.
  localparam int unsigned PTE_P     = 0;   // present
  localparam int unsigned PTE_RW    = 1;   // writable
  localparam int unsigned PTE_MFOE  = 2;   // MFOEable (re-purposed in an empty PTE)
  localparam int unsigned PTE_A     = 5;   // accessed
  localparam int unsigned PTE_D     = 6;   // dirty
  localparam int unsigned PTE_LOCK  = 9;   // AVL bit used as the PTE lock
  localparam int unsigned PTE_PFN_LO = 12;

  // One 64-bit word of memory traffic.
  typedef struct packed {
    logic [PA_W-1:0] addr;   // byte address, 8-byte aligned
    logic            we;     // 1 = write
    logic [63:0]     wdata;
    logic [7:0]      wstrb;  // byte enables for writes
    logic            lock;   // read that starts a locked read-modify-write
  } mem_req_t;

  // CR9 decoded.
  typedef struct packed {
    logic             enable;
    logic [15:0]      entries;
    logic [PFN_W-1:0] pfn;
  } cr9_t;

  // First qword of a pre-allocation table entry.
  typedef struct packed {
    logic [TGID_W-1:0] tgid;
    logic [PFN_W-1:0]  pfn;
    logic              used;
    logic              valid;
  } pat_word_t;

  // Why a translation request ends in an exception to the kernel.
  typedef enum logic [2:0] {
    FLT_NONE      = 3'd0,
    FLT_NONLEAF   = 3'd1,  // an upper-level entry is not present
    FLT_PROT      = 3'd2,  // write to a read-only page
    FLT_NOT_MFOE  = 3'd3,  // leaf not present and not MFOEable
    FLT_DISABLED  = 3'd4,  // MFOE switched off in CR9
    FLT_EMPTY     = 3'd5   // pre-allocation table has no valid entry
  } fault_e;

  function automatic cr9_t cr9_decode(input logic [63:0] r);
    cr9_t c;
    c.pfn     = r[PFN_W-1:0];
    c.entries = r[49:34];
    c.enable  = r[50];
    return c;
  endfunction

  function automatic logic [PFN_W-1:0] pte_pfn(input logic [63:0] pte);
    return pte[PTE_PFN_LO +: PFN_W];
  endfunction

endpackage
