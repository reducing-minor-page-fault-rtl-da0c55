// tb_mfoe_system: end-to-end test of the whole design at its default size
// (8 cores, 64-entry TLBs, 256-entry pre-allocation tables), with the
// behavioural memory and a model of the kernel around it.
//
// The eight cores run eight threads of one process: one page table (CR3),
// one TGID, and one pre-allocation table per core, each programmed through
// that core's CR9. The kernel model does what the modified kernel does:
//   - at mmap() time it marks the process's pages MFOEable (empty PTEs that
//     carry the TGID), a few read-only, one range not at all;
//   - it fills every table, and every REFILL_PERIOD cycles runs the
//     post-fault processing on all of them (the paper's 2 ms period, scaled
//     down to keep the simulation short), collecting the (VA, PFN) of every
//     entry the MFOE used;
//   - its page fault handler services what the MFOE hands back (table empty,
//     PTE not MFOEable, MFOE disabled) by mapping a fresh page, after which
//     the thread retries the access; protection and missing-table faults are
//     fatal to the access and are only checked.
// Phases:
//   1. all cores fault on the same 16 shared pages at the same time (PTE lock
//      contention), then each faults on 64 private pages with random reads
//      and writes, touching each page twice (the second time from the TLB);
//   2. core 0 alone, with the periodic refill held off, faults until its
//      table runs dry (tail wrap, then an MFOE miss); the kernel handles the
//      miss, the table is refilled, and the next fault is an MFOE hit again.
//      The uncontended fault latencies of this phase are checked against the
//      78-cycle mean-plus-deviation of the paper's MFOE hit latency;
//   3. one special case per core: write to a read-only page, a page that is
//      not MFOEable, an address with no page directory, MFOE disabled in CR9,
//      a TLB flush, a first write to a page mapped for a read, a page the
//      kernel mapped itself, a write after a read of a private page.
// Every translation is checked against the PTE in memory (present, same
// PFN, dirty after a write), against every earlier translation of the page
// on any core, and for a PFN never given to two pages. At the end a last
// refill must report exactly the pages the MFOE mapped, each once, with the
// PFN in its PTE, and private pages from the table of the core that owns
// them. Each mechanism is counted and one that never happened is a failure.
module tb_mfoe_system;
  import mfoe_pkg::*;

  localparam int NC            = 8;      // the top's default core count
  localparam int ENTRIES       = 256;    // pre-allocation table entries per core
  localparam int N_SHARED      = 16;
  localparam int N_PRIV        = 64;
  localparam int REFILL_PERIOD = 3000;   // cycles between post-fault runs
  localparam logic [PFN_W-1:0] CR3_PFN  = PFN_W'('h100);
  localparam logic [PFN_W-1:0] PAT_PFN0 = PFN_W'('h200);  // tables 2 pages apart
  localparam logic [TGID_W-1:0] TGID    = TGID_W'(2024);

  localparam logic [VA_W-1:0] SHARED_VA = VA_W'('h0000_1000_0000_0000);
  localparam logic [VA_W-1:0] PRIV_VA   = VA_W'('h0000_2000_0000_0000);  // + core * 16 MiB
  localparam logic [VA_W-1:0] DRY_VA    = VA_W'('h0000_3000_0000_0000);
  localparam logic [VA_W-1:0] RO_VA     = VA_W'('h0000_4000_0000_0000);
  localparam logic [VA_W-1:0] NOMF_VA   = VA_W'('h0000_4000_0010_0000);
  localparam logic [VA_W-1:0] KERN_VA   = VA_W'('h0000_4000_0020_0000);
  localparam logic [VA_W-1:0] HOLE_VA   = VA_W'('h0000_6000_0000_0000);  // no tables

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0]   req_valid = '0, req_write = '0, req_ready;
  logic [VA_W-1:0] req_va [NC];
  logic [NC-1:0]   resp_valid, resp_fault;
  logic [PA_W-1:0] resp_pa [NC];
  fault_e          resp_fault_code [NC];
  logic [63:0]     cr3 [NC];
  logic [NC-1:0]   tlb_flush = '0, cr9_we = '0;
  logic [63:0]     cr9_wdata [NC];
  logic [63:0]     cr9_q [NC];
  logic [NC-1:0]   ev_tlb_hit, ev_walk, ev_mfoe_start, ev_mfoe_hit, ev_mfoe_miss,
                   ev_lock_wait, ev_wrap;
  logic            mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t        mreq;
  logic [63:0]     mrsp_rdata;

  mfoe_system dut (
    .clk, .rst_n, .req_valid, .req_va, .req_write, .req_ready,
    .resp_valid, .resp_pa, .resp_fault, .resp_fault_code,
    .cr3, .tlb_flush, .cr9_we, .cr9_wdata, .cr9_q,
    .ev_tlb_hit, .ev_walk, .ev_mfoe_start, .ev_mfoe_hit, .ev_mfoe_miss,
    .ev_lock_wait, .ev_wrap,
    .mem_req_valid(mreq_valid), .mem_req(mreq), .mem_req_ready(mreq_ready),
    .mem_rsp_valid(mrsp_valid), .mem_rsp_rdata(mrsp_rdata)
  );

  mem_model #(.LAT(2)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req(mreq), .req_ready(mreq_ready),
    .rsp_valid(mrsp_valid), .rsp_rdata(mrsp_rdata)
  );

  // ------------------------------------------------------------------ checks
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_tlb_hit, n_walk, n_mfoe_start, n_mfoe_hit, n_mfoe_miss, n_lock_wait, n_wrap;
  int n_empty, n_not_mfoe, n_disabled, n_prot, n_nonleaf, n_kernel_fix, n_refilled;
  int n_dirty_walk, n_flush_walk;
  always @(posedge clk) if (rst_n) begin
    n_tlb_hit    += $countones(ev_tlb_hit);
    n_walk       += $countones(ev_walk);
    n_mfoe_start += $countones(ev_mfoe_start);
    n_mfoe_hit   += $countones(ev_mfoe_hit);
    n_mfoe_miss  += $countones(ev_mfoe_miss);
    n_lock_wait  += $countones(ev_lock_wait);
    n_wrap       += $countones(ev_wrap);
  end

  // scoreboard
  logic [PFN_W-1:0] page_pfn [logic [VPN_W-1:0]];   // translation seen per page
  logic [VPN_W-1:0] pfn_page [logic [PFN_W-1:0]];   // owner of every PFN seen
  bit               kernel_mapped [logic [VPN_W-1:0]];
  bit               mfoe_page [logic [VPN_W-1:0]];  // started as an empty MFOEable PTE
  int               reported [logic [VPN_W-1:0]];
  logic [PFN_W-1:0] rep_pfn [logic [VPN_W-1:0]];    // PFN the refill reported
  int               owner [logic [VPN_W-1:0]];      // private page -> core

  function automatic logic [PFN_W-1:0] pat_pfn(input int c);
    return PAT_PFN0 + PFN_W'(2 * c);
  endfunction

  // post-fault processing of every table; checks where each used entry sits
  bit refill_on = 1'b1;
  int n_done;                                       // core threads finished
  task automatic refill_all();
    for (int c = 0; c < NC; c++) begin
      int n0, n;
      n0 = u_mem.q_va.size();
      u_mem.pat_refill(pat_pfn(c), ENTRIES, n);
      n_refilled += n;
      for (int k = n0; k < u_mem.q_va.size(); k++) begin
        logic [VPN_W-1:0] vp;
        vp = u_mem.q_va[k][VA_W-1:12];
        if (reported.exists(vp)) reported[vp]++; else reported[vp] = 1;
        check(u_mem.q_tgid[k] == TGID, "reported TGID");
        if (owner.exists(vp))
          check(owner[vp] == c, $sformatf("page %h of core %0d used core %0d's table",
                                          vp, owner[vp], c));
        rep_pfn[vp] = u_mem.q_pfn[k];     // checked at the end: the thread
                                          // may not have seen its answer yet
      end
    end
  endtask

  initial begin : refill_thread
    forever begin
      repeat (REFILL_PERIOD) @(posedge clk);
      if (refill_on && rst_n) refill_all();
    end
  end

  // the kernel's page fault handler: map a fresh page unless the page became
  // present meanwhile; wait while an MFOE holds the PTE lock
  task automatic kernel_fault(input logic [VA_W-1:0] v);
    logic [PA_W-1:0] a;
    logic [63:0] p;
    a = u_mem.pte_addr(CR3_PFN, v);
    p = u_mem.rd(a);
    while (p[PTE_LOCK]) begin @(posedge clk); p = u_mem.rd(a); end
    if (!p[PTE_P]) begin
      p = '0;
      p[PTE_PFN_LO +: PFN_W] = u_mem.alloc_page();
      p[PTE_P] = 1'b1; p[PTE_RW] = 1'b1;
      u_mem.wr(a, p);
      kernel_mapped[v[VA_W-1:12]] = 1'b1;
    end
    n_kernel_fix++;
  endtask

  // one translation on core c
  task automatic xlate(input int c, input logic [VA_W-1:0] v, input bit w,
                       output bit f, output fault_e code, output logic [PA_W-1:0] pa,
                       output int cyc);
    @(negedge clk);
    while (!req_ready[c]) @(negedge clk);
    req_va[c] = v; req_write[c] = w; req_valid[c] = 1'b1;
    @(negedge clk);
    req_valid[c] = 1'b0;
    cyc = 1;
    while (!resp_valid[c]) begin @(negedge clk); cyc++; end
    f = resp_fault[c]; code = resp_fault_code[c]; pa = resp_pa[c];
  endtask

  // check a successful translation against memory and everything seen so far
  task automatic note(input int c, input logic [VA_W-1:0] v, input bit w,
                      input logic [PA_W-1:0] pa);
    logic [63:0] p;
    logic [VPN_W-1:0] vp;
    logic [PFN_W-1:0] pf;
    vp = v[VA_W-1:12];
    pf = pa[PA_W-1:12];
    p  = u_mem.rd(u_mem.pte_addr(CR3_PFN, v));
    check(pa[11:0] == v[11:0] && p[PTE_P] && pte_pfn(p) == pf && (!w || p[PTE_D]),
          $sformatf("core %0d va %h -> pa %h, PTE %h", c, v, pa, p));
    if (page_pfn.exists(vp)) check(page_pfn[vp] == pf, $sformatf("page %h changed frame", vp));
    else                     page_pfn[vp] = pf;
    if (pfn_page.exists(pf)) check(pfn_page[pf] == vp, $sformatf("frame %h given twice", pf));
    else                     pfn_page[pf] = vp;
  endtask

  // an access as the thread sees it: faults the kernel can fix are fixed and
  // the access retried; returns the fault code of the first attempt
  task automatic access(input int c, input logic [VA_W-1:0] v, input bit w,
                        output fault_e first, output int cyc);
    bit f;
    fault_e code;
    logic [PA_W-1:0] pa;
    int cy;
    xlate(c, v, w, f, code, pa, cyc);
    first = f ? code : FLT_NONE;
    for (int tries = 0; f && tries < 3; tries++) begin
      case (code)
        FLT_EMPTY:    n_empty++;
        FLT_NOT_MFOE: n_not_mfoe++;
        FLT_DISABLED: n_disabled++;
        FLT_PROT:     n_prot++;
        FLT_NONLEAF:  n_nonleaf++;
        default: ;
      endcase
      if (code == FLT_PROT || code == FLT_NONLEAF) return;
      kernel_fault(v);
      xlate(c, v, w, f, code, pa, cy);
    end
    check(!f, $sformatf("core %0d va %h still faults after the kernel", c, v));
    if (!f) note(c, v, w, pa);
  endtask

  task automatic write_cr9(input int c, input bit en);
    @(negedge clk);
    cr9_wdata[c] = {13'b0, en, 16'(ENTRIES), pat_pfn(c)};
    cr9_we[c] = 1'b1;
    @(negedge clk);
    cr9_we[c] = 1'b0;
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------------- main
  initial begin : main
    logic [63:0] e;
    int cyc;
    fault_e fc;
    n_done = 0;
    for (int c = 0; c < NC; c++) begin
      req_va[c] = '0; cr9_wdata[c] = '0;
      cr3[c] = {18'b0, CR3_PFN, 12'h000};
    end
    // mmap(): MFOEable pages
    for (int i = 0; i < N_SHARED; i++) begin
      u_mem.map_pte(CR3_PFN, SHARED_VA + VA_W'(i * 4096), u_mem.mfoeable_pte(TGID, 1'b1));
      mfoe_page[SHARED_VA[VA_W-1:12] + VPN_W'(i)] = 1'b1;
    end
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < N_PRIV; i++) begin
        logic [VA_W-1:0] v;
        v = PRIV_VA + VA_W'(c) * VA_W'('h100_0000) + VA_W'(i * 4096);
        u_mem.map_pte(CR3_PFN, v, u_mem.mfoeable_pte(TGID, 1'b1));
        mfoe_page[v[VA_W-1:12]] = 1'b1;
        owner[v[VA_W-1:12]] = c;
      end
    for (int i = 0; i < ENTRIES + 8; i++) begin
      u_mem.map_pte(CR3_PFN, DRY_VA + VA_W'(i * 4096), u_mem.mfoeable_pte(TGID, 1'b1));
      mfoe_page[DRY_VA[VA_W-1:12] + VPN_W'(i)] = 1'b1;
    end
    u_mem.map_pte(CR3_PFN, RO_VA, u_mem.mfoeable_pte(TGID, 1'b0));
    u_mem.map_pte(CR3_PFN, NOMF_VA, 64'd0);
    u_mem.map_pte(CR3_PFN, KERN_VA, 64'd0);
    u_mem.map_pte(CR3_PFN, KERN_VA + 'h1000, u_mem.mfoeable_pte(TGID, 1'b1));
    mfoe_page[KERN_VA[VA_W-1:12] + 1] = 1'b1;
    // pre-fault work: fill every core's table
    for (int c = 0; c < NC; c++) u_mem.pat_init(pat_pfn(c), ENTRIES, ENTRIES);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NC; c++) write_cr9(c, 1'b1);
    for (int c = 0; c < NC; c++)
      check(cr9_q[c] == {13'b0, 1'b1, 16'(ENTRIES), pat_pfn(c)}, $sformatf("CR9 of core %0d", c));

    // ---- phase 1: shared pages on all cores at once, then private pages
    for (int c0 = 0; c0 < NC; c0++) begin
      fork
        automatic int c = c0;
        begin
          automatic fault_e f1;
          automatic int cy;
          for (int i = 0; i < N_SHARED; i++)
            access(c, SHARED_VA + VA_W'(i * 4096 + 8 * c), 1'b0, f1, cy);
          for (int i = 0; i < N_PRIV; i++) begin
            automatic logic [VA_W-1:0] v;
            automatic bit w;
            v = PRIV_VA + VA_W'(c) * VA_W'('h100_0000) + VA_W'(i * 4096 + $urandom_range(0, 4095));
            w = 1'($urandom);
            access(c, v, w, f1, cy);
            access(c, v ^ VA_W'($urandom_range(0, 4095)), w, f1, cy);   // same page again
            check(cy == 2 && f1 == FLT_NONE, $sformatf("core %0d TLB hit in %0d cycles (page %0d w %0d)", c, cy, i, w));
          end
          n_done++;
        end
      join_none
    end
    wait (n_done == NC);
    check(n_lock_wait > 0, "shared faults met a locked PTE");
    $display("phase 1 done at %0t: %0d walks, %0d MFOE hits, %0d lock waits",
             $time, n_walk, n_mfoe_hit, n_lock_wait);

    // ---- phase 2: core 0 runs its table dry with the refill held off
    refill_on = 1'b0;
    refill_all();
    begin
      int i, hits, worst, sum;
      i = 0; hits = 0; worst = 0; sum = 0;
      fc = FLT_NONE;
      while (fc == FLT_NONE && i < ENTRIES + 8) begin
        access(0, DRY_VA + VA_W'(i * 4096), 1'($urandom), fc, cyc);
        if (fc == FLT_NONE) begin
          hits++; sum += cyc;
          if (cyc > worst) worst = cyc;
        end
        i++;
      end
      check(fc == FLT_EMPTY && hits == ENTRIES,
            $sformatf("table ran dry after %0d hits (%s)", hits, fc.name()));
      check(worst <= 78, $sformatf("worst uncontended fault %0d cycles > 78", worst));
      $display("uncontended MFOE faults: %0d, mean %0d cycles, worst %0d",
               hits, sum / (hits > 0 ? hits : 1), worst);
      refill_all();
      access(0, DRY_VA + VA_W'(i * 4096), 1'b0, fc, cyc);
      check(fc == FLT_NONE, "MFOE hit again after the refill");
    end
    refill_on = 1'b1;

    // ---- phase 3: one special case per core, all at once
    for (int c0 = 0; c0 < NC; c0++) begin
      fork
        automatic int c = c0;
        begin
          automatic fault_e f1;
          automatic int cy;
          automatic logic [VA_W-1:0] pv;
          pv = PRIV_VA + VA_W'(c) * VA_W'('h100_0000);
          case (c)
            0: begin
              access(c, RO_VA + 'h10, 1'b1, f1, cy);
              check(f1 == FLT_PROT, "write to read-only MFOEable page");
            end
            1: begin
              access(c, NOMF_VA + 'h20, 1'b0, f1, cy);
              check(f1 == FLT_NOT_MFOE, "page not MFOEable goes to the kernel");
            end
            2: begin
              access(c, HOLE_VA, 1'b0, f1, cy);
              check(f1 == FLT_NONLEAF, "address without page tables");
            end
            3: begin
              write_cr9(c, 1'b0);
              access(c, KERN_VA + 'h1040, 1'b0, f1, cy);
              check(f1 == FLT_DISABLED, "MFOE disabled in CR9");
              write_cr9(c, 1'b1);
            end
            4: begin
              access(c, pv, 1'b0, f1, cy);
              @(negedge clk); tlb_flush[c] = 1'b1; @(negedge clk); tlb_flush[c] = 1'b0;
              access(c, pv, 1'b0, f1, cy);
              check(f1 == FLT_NONE && cy > 2, "access after TLB flush walks");
              n_flush_walk++;
            end
            5: begin
              e = u_mem.rd(u_mem.pte_addr(CR3_PFN, SHARED_VA));
              access(c, SHARED_VA + 'h30, 1'b1, f1, cy);
              check(f1 == FLT_NONE && cy > 2 && !e[PTE_D], "first write to a read-mapped page walks");
              n_dirty_walk++;
            end
            6: begin
              access(c, KERN_VA + 'h60, 1'b1, f1, cy);
              check(f1 == FLT_NOT_MFOE, "kernel maps a page itself");
              access(c, KERN_VA + 'h68, 1'b0, f1, cy);
              check(f1 == FLT_NONE && cy == 2, "kernel-mapped page then hits the TLB");
            end
            default: begin
              for (int i = 0; i < 4; i++) begin
                access(c, pv + VA_W'(i * 4096), 1'b1, f1, cy);
                check(f1 == FLT_NONE, "private write");
              end
            end
          endcase
          n_done++;
        end
      join_none
    end
    wait (n_done == 2 * NC);

    // ---- end: last refill reports exactly the pages the MFOE mapped
    refill_on = 1'b0;
    refill_all();
    begin
      int n_mfoe_pages;
      n_mfoe_pages = 0;
      foreach (mfoe_page[vp]) begin
        if (!page_pfn.exists(vp)) continue;          // never touched
        if (kernel_mapped.exists(vp)) begin
          check(!reported.exists(vp), $sformatf("kernel-mapped page %h reported", vp));
        end else begin
          n_mfoe_pages++;
          check(reported.exists(vp) && reported[vp] == 1,
                $sformatf("page %h reported %0d times", vp, reported.exists(vp) ? reported[vp] : 0));
          check(rep_pfn.exists(vp) && rep_pfn[vp] == page_pfn[vp],
                $sformatf("reported PFN of page %h", vp));
        end
      end
      check(reported.num() == n_mfoe_pages, "no page reported that the MFOE did not map");
      $display("pages mapped by the MFOE: %0d, by the kernel: %0d", n_mfoe_pages, kernel_mapped.num());
    end

    // ---- every mechanism must have happened
    begin
      string names [16];
      int    counts [16];
      names = '{"TLB hit", "page walk", "MFOE start", "MFOE hit", "MFOE miss",
                "PTE lock wait", "tail wrap", "table empty", "not MFOEable",
                "MFOE disabled", "protection fault", "missing table", "kernel fix-up",
                "refilled entry", "dirty-bit walk", "walk after flush"};
      counts = '{n_tlb_hit, n_walk, n_mfoe_start, n_mfoe_hit, n_mfoe_miss,
                 n_lock_wait, n_wrap, n_empty, n_not_mfoe,
                 n_disabled, n_prot, n_nonleaf, n_kernel_fix,
                 n_refilled, n_dirty_walk, n_flush_walk};
      for (int k = 0; k < 16; k++) begin
        $display("  %-18s %0d", names[k], counts[k]);
        check(counts[k] > 0, $sformatf("mechanism never seen: %s", names[k]));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
