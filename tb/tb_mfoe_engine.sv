// tb_mfoe_engine: self-checking test of the Minor Fault Offload Engine alone,
// against the behavioural memory (2-cycle latency) and kernel model.
//
// Each case builds the PTE and pre-allocation table in memory, starts the
// engine as the walker would, and compares the result, the PTE, the used
// table entry and the header with values worked out here. Cases: PTE not
// MFOEable, MFOE disabled, write to a read-only page, hits until the table
// runs dry (tail wrap), a miss on the empty table, refill by the
// post-fault processing and a further hit, and a PTE locked by the kernel
// (the engine must wait and take the kernel's translation without using a
// page). Latency: a hit must be no slower than the 78 cycles, and a miss
// no slower than the 14 cycles, the paper measured in its simulator.
module tb_mfoe_engine;
  import mfoe_pkg::*;

  localparam int ENTRIES = 4;
  localparam logic [PFN_W-1:0] CR3_PFN = PFN_W'('h100);
  localparam logic [PFN_W-1:0] PAT_PFN = PFN_W'('h200);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cr9_t             cr9;
  logic             start = 1'b0, is_write = 1'b0;
  logic [VA_W-1:0]  va = '0;
  logic [63:0]      pte = '0;
  logic [PA_W-1:0]  pte_addr = '0;
  logic             done, hit, pte_rw, pte_dirty, ev_lock_wait, ev_wrap;
  fault_e           fault;
  logic [PFN_W-1:0] pfn;
  logic             mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t         mreq;
  logic [63:0]      mrsp_rdata;

  mfoe_engine dut (
    .clk, .rst_n, .cr9, .start, .va, .is_write, .pte, .pte_addr,
    .done, .hit, .fault, .pfn, .pte_rw, .pte_dirty, .ev_lock_wait, .ev_wrap,
    .mem_req_valid(mreq_valid), .mem_req(mreq), .mem_req_ready(mreq_ready),
    .mem_rsp_valid(mrsp_valid), .mem_rsp_rdata(mrsp_rdata)
  );

  mem_model #(.LAT(2)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req(mreq), .req_ready(mreq_ready),
    .rsp_valid(mrsp_valid), .rsp_rdata(mrsp_rdata)
  );

  int checks = 0, failures = 0;
  int n_lock_wait = 0, n_wrap = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_lock_wait) n_lock_wait++;
    if (ev_wrap)      n_wrap++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Start the engine on va and wait for done; returns the cycle count.
  task automatic run(input logic [VA_W-1:0] v, input bit w, output int cycles);
    @(negedge clk);
    va       = v;
    is_write = w;
    pte_addr = u_mem.pte_addr(CR3_PFN, v);
    pte      = u_mem.rd(pte_addr);
    start    = 1'b1;
    @(negedge clk);
    start  = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  function automatic logic [PA_W-1:0] ent_addr(input int i);
    return {PAT_PFN, 12'h0} + PA_W'(16 * i);
  endfunction

  localparam logic [TGID_W-1:0] TGID = TGID_W'(1234);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int cyc, n;
    logic [PFN_W-1:0] exp_pfn [ENTRIES+1];
    logic [63:0] p, h;
    pat_word_t e;
    logic [VA_W-1:0] base_va;

    cr9 = '{enable: 1'b1, entries: 16'(ENTRIES), pfn: PAT_PFN};
    base_va = VA_W'('h7f12_3450_0000);
    // mmap(): pages 0..7 MFOEable and writable, page 8 MFOEable read-only,
    // page 9 mapped but not MFOEable
    for (int i = 0; i < 8; i++)
      u_mem.map_pte(CR3_PFN, base_va + VA_W'(i * 4096), u_mem.mfoeable_pte(TGID, 1'b1));
    u_mem.map_pte(CR3_PFN, base_va + VA_W'(8 * 4096), u_mem.mfoeable_pte(TGID, 1'b0));
    u_mem.map_pte(CR3_PFN, base_va + VA_W'(9 * 4096), 64'd0);
    u_mem.pat_init(PAT_PFN, ENTRIES, ENTRIES);
    for (int i = 1; i <= ENTRIES; i++) begin
      e = pat_word_t'(u_mem.rd(ent_addr(i)));
      exp_pfn[i] = e.pfn;
    end
    exp_pfn[0] = '0;

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // not MFOEable: ordinary page fault, no memory access
    n = int'(u_mem.n_reads + u_mem.n_writes);
    run(base_va + VA_W'(9 * 4096), 1'b0, cyc);
    check(!hit && fault == FLT_NOT_MFOE, "non-MFOEable PTE must fault");
    check(int'(u_mem.n_reads + u_mem.n_writes) == n, "non-MFOEable: no memory access");
    check(cyc <= 14, $sformatf("non-MFOEable latency %0d > 14", cyc));

    // write to a read-only MFOEable page
    run(base_va + VA_W'(8 * 4096), 1'b1, cyc);
    check(!hit && fault == FLT_PROT, "write to read-only page must fault");

    // MFOE disabled in CR9
    cr9.enable = 1'b0;
    run(base_va, 1'b0, cyc);
    check(!hit && fault == FLT_DISABLED, "disabled MFOE must fault");
    cr9.enable = 1'b1;

    // hits on pages 0..3 consume entries 1..4
    for (int i = 0; i < ENTRIES; i++) begin
      logic [VA_W-1:0] v;
      v = base_va + VA_W'(i * 4096 + 16'h123);
      run(v, i[0], cyc);
      check(hit && fault == FLT_NONE, $sformatf("hit %0d expected", i));
      check(pfn == exp_pfn[i+1], $sformatf("hit %0d pfn %h exp %h", i, pfn, exp_pfn[i+1]));
      check(cyc <= 78, $sformatf("hit latency %0d > 78", cyc));
      check(cyc == 8 * 3 + 3, $sformatf("hit latency %0d, FSM gives %0d", cyc, 8 * 3 + 3));
      p = u_mem.rd(u_mem.pte_addr(CR3_PFN, v));
      check(p[PTE_P] && p[PTE_A] && !p[PTE_LOCK] && p[PTE_MFOE] && p[PTE_RW] &&
            p[PTE_D] == i[0] && pte_pfn(p) == exp_pfn[i+1] && p[51:46] == '0,
            $sformatf("PTE after hit %0d = %h", i, p));
      check(pte_dirty == i[0] && pte_rw, "TLB fill flags");
      e = pat_word_t'(u_mem.rd(ent_addr(i + 1)));
      check(e.used && !e.valid && e.tgid == TGID && e.pfn == exp_pfn[i+1],
            $sformatf("entry %0d after hit = %h", i + 1, e));
      check(u_mem.rd(ent_addr(i + 1) + 8) == 64'(v), "entry VA");
      h = u_mem.rd({PAT_PFN, 12'h0});
      check(h[63:32] == ((i + 1 == ENTRIES) ? 32'd1 : 32'(i + 2)) && h[31:0] == 32'd1,
            $sformatf("header after hit %0d = %h", i, h));
    end
    check(n_wrap == 1, "tail wrapped once");

    // table exhausted: MFOE miss
    run(base_va + VA_W'(4 * 4096), 1'b0, cyc);
    check(!hit && fault == FLT_EMPTY, "empty table must miss");
    check(cyc <= 14, $sformatf("miss latency %0d > 14", cyc));
    p = u_mem.rd(u_mem.pte_addr(CR3_PFN, base_va + VA_W'(4 * 4096)));
    check(!p[PTE_P] && !p[PTE_LOCK], "PTE untouched by a miss");

    // post-fault processing recycles the four used entries
    u_mem.pat_refill(PAT_PFN, ENTRIES, n);
    check(n == ENTRIES, $sformatf("refill recycled %0d", n));
    for (int i = 0; i < ENTRIES; i++) begin
      check(u_mem.q_va[i] == 64'(base_va + VA_W'(i * 4096 + 16'h123)) &&
            u_mem.q_tgid[i] == TGID && u_mem.q_pfn[i] == exp_pfn[i+1],
            $sformatf("recycled entry %0d", i));
    end
    for (int i = 1; i <= ENTRIES; i++) begin
      e = pat_word_t'(u_mem.rd(ent_addr(i)));
      exp_pfn[i] = e.pfn;
    end
    run(base_va + VA_W'(4 * 4096), 1'b1, cyc);
    check(hit && pfn == exp_pfn[1], "hit after refill");

    // PTE locked by the kernel's handler: wait, then use its translation
    begin
      logic [PA_W-1:0] pa;
      logic [63:0] kp;
      logic [PFN_W-1:0] kpfn;
      kpfn = PFN_W'('h3_0000);
      pa = u_mem.pte_addr(CR3_PFN, base_va + VA_W'(5 * 4096));
      kp = u_mem.rd(pa);
      u_mem.wr(pa, kp | (64'd1 << PTE_LOCK));
      h = u_mem.rd({PAT_PFN, 12'h0});
      fork
        run(base_va + VA_W'(5 * 4096), 1'b0, cyc);
        begin
          repeat (60) @(negedge clk);
          kp[PTE_PFN_LO +: PFN_W] = kpfn;
          kp[51:PTE_PFN_LO + PFN_W] = '0;
          kp[PTE_P] = 1'b1;
          kp[PTE_RW] = 1'b1;
          u_mem.wr(pa, kp);
        end
      join
      check(hit && pfn == kpfn, $sformatf("locked PTE: hit=%0d pfn=%h", hit, pfn));
      check(n_lock_wait == 1, "lock wait seen once");
      check(u_mem.rd({PAT_PFN, 12'h0}) == h, "no page consumed while waiting");
      check(cyc > 60, "engine waited for the lock");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


endmodule
