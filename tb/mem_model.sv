// mem_model: behavioural model of main memory together with the kernel-side
// work on it that the MFOE relies on. Not synthesizable; testbench only.
//
// Memory: a sparse array of 64-bit words behind the valid/ready request
// port of mfoe_pkg::mem_req_t. One request is accepted at a time; a read
// returns the word as it was when accepted, a write applies its byte strobes
// when accepted, and either is acknowledged by rsp_valid LAT cycles later
// (LAT >= 1). The default of 2 cycles is the L1 data cache latency of the
// simulated system the design was evaluated on.
//
// Kernel-side helpers (tasks called by the testbenches), written from the
// description of the modified kernel:
//   map_pte      builds the walk path from a CR3 frame to the last-level PTE
//                of a VA (allocating zeroed tables as needed) and writes the
//                PTE; this is how mmap() marks pages MFOEable with the TGID
//                in the PFN field and the RW bit, before any fault;
//   pte_addr     the physical address of the last-level PTE of a VA;
//   pat_init     lays out a pre-allocation table: header with head = tail =
//                1 and the entry count, and `nvalid` entries holding freshly
//                allocated PFNs with valid = 1, used = 0;
//   pat_refill   the periodic post-fault processing: from the head index,
//                for every entry with used = 1, report it, clear it, put a
//                new page in it (valid = 1, used = 0) and advance the head
//                (optionally at most a given number of entries per call).
module mem_model
  import mfoe_pkg::*;
#(
  parameter int unsigned LAT = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  mem_req_t    req,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [63:0] rsp_rdata
);
  logic [63:0] mem [logic [PA_W-4:0]];
  int unsigned cnt;
  logic        busy;
  logic [PFN_W-1:0] next_pfn = PFN_W'('h1000);
  int unsigned n_reads, n_writes;

  assign req_ready = !busy;

  function automatic logic [63:0] rd(input logic [PA_W-1:0] a);
    if (mem.exists(a[PA_W-1:3])) return mem[a[PA_W-1:3]];
    return 64'd0;
  endfunction

  task automatic wr(input logic [PA_W-1:0] a, input logic [63:0] d);
    mem[a[PA_W-1:3]] = d;
  endtask

  function automatic logic [PFN_W-1:0] alloc_page();
    alloc_page = next_pfn;
    next_pfn   = next_pfn + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= 0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
      n_reads   <= 0;
      n_writes  <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        logic [63:0] old, nw;
        old = rd(req.addr);
        if (req.we) begin
          nw = old;
          for (int b = 0; b < 8; b++)
            if (req.wstrb[b]) nw[8*b +: 8] = req.wdata[8*b +: 8];
          wr(req.addr, nw);
          n_writes <= n_writes + 1;
        end else begin
          n_reads <= n_reads + 1;
        end
        rsp_rdata <= old;
        busy      <= 1'b1;
        cnt       <= LAT;
        if (LAT == 1) begin
          rsp_valid <= 1'b1;
          busy      <= 1'b0;
        end
      end else if (busy) begin
        if (cnt == 2) begin
          rsp_valid <= 1'b1;
          busy      <= 1'b0;
        end
        cnt <= cnt - 1;
      end
    end
  end

  // --- kernel-side helpers -------------------------------------------------

  function automatic logic [PA_W-1:0] pte_addr(input logic [PFN_W-1:0] cr3_pfn,
                                               input logic [VA_W-1:0] va);
    logic [PFN_W-1:0] t;
    logic [63:0] e;
    t = cr3_pfn;
    for (int lvl = 3; lvl > 0; lvl--) begin
      e = rd({t, va[12 + 9*lvl +: 9], 3'b000});
      if (!e[PTE_P]) return '0;
      t = pte_pfn(e);
    end
    return {t, va[20:12], 3'b000};
  endfunction

  task automatic map_pte(input logic [PFN_W-1:0] cr3_pfn, input logic [VA_W-1:0] va,
                         input logic [63:0] pte);
    logic [PFN_W-1:0] t;
    logic [63:0] e;
    logic [PA_W-1:0] a;
    t = cr3_pfn;
    for (int lvl = 3; lvl > 0; lvl--) begin
      a = {t, va[12 + 9*lvl +: 9], 3'b000};
      e = rd(a);
      if (!e[PTE_P]) begin
        e = '0;
        e[PTE_PFN_LO +: PFN_W] = alloc_page();
        e[PTE_P] = 1'b1; e[PTE_RW] = 1'b1; e[2] = 1'b1;
        wr(a, e);
      end
      t = pte_pfn(e);
    end
    wr({t, va[20:12], 3'b000}, pte);
  endtask

  // Empty PTE as the kernel writes it at mmap() time.
  function automatic logic [63:0] mfoeable_pte(input logic [TGID_W-1:0] tgid, input logic rw);
    logic [63:0] p;
    p = '0;
    p[PTE_PFN_LO +: TGID_W] = tgid;
    p[PTE_MFOE] = 1'b1;
    p[PTE_RW]   = rw;
    return p;
  endfunction

  task automatic pat_init(input logic [PFN_W-1:0] base_pfn, input int entries,
                          input int nvalid);
    logic [PA_W-1:0] base;
    pat_word_t w;
    base = {base_pfn, 12'h0};
    wr(base,     {32'd1, 32'd1});                    // tail, head
    wr(base + 8, {32'd0, 32'(entries)});             // locks, entries
    for (int i = 1; i <= entries; i++) begin
      w = '0;
      if (i <= nvalid) begin
        w.pfn   = alloc_page();
        w.valid = 1'b1;
      end
      wr(base + PA_W'(16*i), w);
      wr(base + PA_W'(16*i + 8), '0);
    end
  endtask

  // Post-fault processing of one table, stopping after `max` entries if
  // max > 0. Returns how many used entries it recycled; their VA, TGID and
  // PFN are appended to q_va, q_tgid, q_pfn.
  logic [63:0]       q_va[$];
  logic [TGID_W-1:0] q_tgid[$];
  logic [PFN_W-1:0]  q_pfn[$];

  task automatic pat_refill(input logic [PFN_W-1:0] base_pfn, input int entries,
                            output int n, input int max = 0);
    logic [PA_W-1:0] base, ea;
    logic [63:0] h;
    int head;
    pat_word_t w;
    base = {base_pfn, 12'h0};
    n = 0;
    for (int k = 0; k < (max > 0 ? max : entries); k++) begin
      h    = rd(base);
      head = int'(h[31:0]);
      ea   = base + PA_W'(16*head);
      w    = pat_word_t'(rd(ea));
      if (!w.used) break;
      q_va.push_back(rd(ea + 8));
      q_tgid.push_back(w.tgid);
      q_pfn.push_back(w.pfn);
      w       = '0;
      w.pfn   = alloc_page();
      w.valid = 1'b1;
      wr(ea, w);
      wr(ea + 8, '0);
      head = (head >= entries) ? 1 : head + 1;
      // only the head field is rewritten
      h = rd(base);
      wr(base, {h[63:32], 32'(head)});
      n++;
    end
  endtask

endmodule
