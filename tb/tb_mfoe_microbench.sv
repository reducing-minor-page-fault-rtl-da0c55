// tb_mfoe_microbench: the fault-throughput micro-benchmark run on the whole
// design at its default size (8 cores, 64-entry TLBs, 256-entry
// pre-allocation tables).
//
// Up to eight threads of one process, one per core, each stride through their own freshly mapped
// region, one minor fault per page, with a programmed delay between faults
// during which they make a few non-faulting accesses to pages they already
// touched. Each thread starts at a random point within one delay and each
// delay varies by up to an eighth either way, so the threads drift against
// each other as real ones do instead of faulting in lockstep. The kernel's
// post-fault processing refills every core's table once per refill period;
// a fault that finds its table empty falls back to the kernel's handler
// (modelled as taking no time) and the thread goes on.
//
// Four sweeps, all with the top at its default parameters (the table size
// is programmed through CR9 at run time):
//   - fault rate: a delay of 6000, 12000, 24000 and 36000 cycles between
//     faults, 256 entries, refill every 2 ms;
//   - table width: 128, 256, 512 and 1024 entries at the 6000-cycle delay;
//   - refill interval: 2, 4 and 8 ms at the 24000-cycle delay;
//   - thread count: 1, 2, 4 and 8 faulting threads at the 24000-cycle delay,
//     with a refill thread of finite speed, as the kernel's is: it sleeps
//     2 ms, then visits the tables in turn, spending 5170 cycles per page
//     (the measured 580,169 pages/s at 3 GHz), for 6 ms in all.
// In the first three sweeps the refill is instant at the end of each
// interval; in the last the time it takes is what limits the hit rate.
// The widths and intervals are those the design was evaluated with on full
// applications; here they are applied to the micro-benchmark instead, and
// the 16 and 32 ms intervals are left out only for simulation time.
// Time is scaled down by SCALE: a refill interval of m ms at 3 GHz
// (m * 3,000,000 cycles) and the delays between faults all shrink by the
// same factor, so that the number of faults per refill period, which alone
// sets the hit rate, is that of the full-scale run. Tables sit 8 pages
// apart, enough for 1024 entries and the header.
//
// Checks:
//   - every fault gives a translation that matches its PTE;
//   - with instant refill, within each refill period every core's MFOE
//     serves exactly min(faults, entries) of its faults (one either way for
//     a fault that straddles the refill), i.e. the hardware never misses while its table
//     has pages and never serves more than the table holds; with the slow
//     refill, every core serves exactly the pages it was given (initial
//     entries plus those refilled, less those still valid at the end);
//   - the hit rate does not fall as the delay grows, rises with the table
//     width, falls as the refill interval grows, and is 1 whenever a period
//     holds no more faults per core than the table has entries; with the
//     slow refill, one thread is always served and eight are not;
//   - MFOE hit latency (hand-off from the walker to result) averages no more
//     than the 78 cycles used for the modelled system and a miss averages no
//     more than 14 cycles, with a memory latency of 2 cycles. The maxima are
//     printed: they grow with contention, since the eight cores share one
//     memory port.
// With instant refill the hit rate of each point is printed next to the
// min(1, entries / faults per period) bound; per-core fault counts vary
// because the cores contend for one memory port.
module tb_mfoe_microbench;
  import mfoe_pkg::*;

  localparam int NC      = 8;
  localparam int ENTRIES = 256;
  localparam int SCALE   = 16;
  localparam int NPER    = 3;                       // refill periods per point
  localparam int WIDTHS    [4] = '{128, 256, 512, 1024};
  localparam int INTERVALS [3] = '{2, 4, 8};         // ms
  localparam int THREADS   [4] = '{1, 2, 4, 8};
  // 580,169 pages/s at 3 GHz: cycles the kernel's refill thread spends on one page
  localparam int PAGE_CYC  = int'(64'd3_000_000_000 / 64'd580_169);
  localparam int NPOINT  = 4;
  localparam int DELAY_FULL [NPOINT] = '{6000, 12000, 24000, 36000};
  localparam int REDUNDANT = 4;                     // non-faulting accesses per fault
  localparam logic [PFN_W-1:0]  CR3_PFN  = PFN_W'('h100);
  localparam logic [PFN_W-1:0]  PAT_PFN0 = PFN_W'('h200);
  localparam logic [TGID_W-1:0] TGID     = TGID_W'(77);
  localparam logic [VA_W-1:0]   BASE_VA  = VA_W'('h0000_2000_0000_0000);

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

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // MFOE latency from hand-off to result, per core
  int    t_start [NC];
  int    lat_hit_sum, lat_hit_max, n_hit_lat, lat_miss_sum, lat_miss_max, n_miss_lat;
  int    cycle;
  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int c = 0; c < NC; c++) begin
      if (ev_mfoe_start[c]) t_start[c] = cycle;
      if (ev_mfoe_hit[c] && !ev_lock_wait[c]) begin
        lat_hit_sum += cycle - t_start[c]; n_hit_lat++;
        if (cycle - t_start[c] > lat_hit_max) lat_hit_max = cycle - t_start[c];
      end
      if (ev_mfoe_miss[c]) begin
        lat_miss_sum += cycle - t_start[c]; n_miss_lat++;
        if (cycle - t_start[c] > lat_miss_max) lat_miss_max = cycle - t_start[c];
      end
    end
  end

  function automatic logic [PFN_W-1:0] pat_pfn(input int c);
    return PAT_PFN0 + PFN_W'(8 * c);   // room for 1024 entries + header
  endfunction

  task automatic xlate(input int c, input logic [VA_W-1:0] v, input bit w,
                       output bit f, output fault_e code, output logic [PA_W-1:0] pa);
    @(negedge clk);
    while (!req_ready[c]) @(negedge clk);
    req_va[c] = v; req_write[c] = w; req_valid[c] = 1'b1;
    @(negedge clk);
    req_valid[c] = 1'b0;
    while (!resp_valid[c]) @(negedge clk);
    f = resp_fault[c]; code = resp_fault_code[c]; pa = resp_pa[c];
  endtask

  // kernel fault handler for an MFOE miss
  task automatic kernel_fault(input logic [VA_W-1:0] v);
    logic [PA_W-1:0] a;
    logic [63:0] p;
    a = u_mem.pte_addr(CR3_PFN, v);
    p = u_mem.rd(a);
    if (!p[PTE_P]) begin
      p = '0;
      p[PTE_PFN_LO +: PFN_W] = u_mem.alloc_page();
      p[PTE_P] = 1'b1; p[PTE_RW] = 1'b1;
      u_mem.wr(a, p);
    end
  endtask

  // per point, per core, per period: faults and MFOE-served faults
  int  n_fault [NC][NPER+1];
  int  n_hit   [NC][NPER+1];
  int  period;
  bit  stop;
  int  n_done;
  int  next_page [NC];

  task automatic thread(input int c, input int delay);
    logic [VA_W-1:0] v;
    bit f;
    fault_e code;
    logic [PA_W-1:0] pa;
    logic [63:0] p;
    int pg, pp;
    // threads do not start in lockstep
    repeat ($urandom_range(0, delay)) @(posedge clk);
    while (!stop) begin
      pg = next_page[c]++;
      v  = BASE_VA + VA_W'(c) * VA_W'('h4000_0000) + VA_W'(pg) * VA_W'(4096);
      // the region was marked MFOEable by the kernel's mmap() thread
      u_mem.map_pte(CR3_PFN, v, u_mem.mfoeable_pte(TGID, 1'b1));
      xlate(c, v + VA_W'(8 * c), pg[0], f, code, pa);
      pp = period;
      n_fault[c][pp]++;
      if (!f) n_hit[c][pp]++;
      else begin
        check(code == FLT_EMPTY, $sformatf("core %0d unexpected fault %s", c, code.name()));
        kernel_fault(v);
        xlate(c, v + VA_W'(8 * c), pg[0], f, code, pa);
      end
      p = u_mem.rd(u_mem.pte_addr(CR3_PFN, v));
      check(!f && p[PTE_P] && pa == {pte_pfn(p), v[11:0] + 12'(8 * c)},
            $sformatf("core %0d page %0d translation", c, pg));
      // redundant non-faulting accesses to recent pages, then the delay
      for (int k = 0; k < REDUNDANT && pg > 0; k++) begin
        int q;
        q = pg - $urandom_range(0, (pg < 16 ? pg : 16));
        xlate(c, BASE_VA + VA_W'(c) * VA_W'('h4000_0000) + VA_W'(q) * VA_W'(4096) +
                 VA_W'($urandom_range(0, 511) * 8), 1'b0, f, code, pa);
        check(!f, "redundant access");
      end
      repeat (delay - delay / 8 + $urandom_range(0, delay / 4)) @(posedge clk);
    end
    n_done++;
  endtask

  initial begin : watchdog
    repeat (24_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one point of a sweep: tables of `entries` pages, refilled every
  // `ms` milliseconds (full scale), faults every `delay_full` cycles
  // (full scale), run for `nper` refill periods
  task automatic run_point(input int delay_full, input int entries, input int ms,
                           input int nper, output real rate);
    int delay, per, n, tot_f, tot_h, bound_h;
    delay = delay_full / SCALE;
    per   = ms * 3_000_000 / SCALE;
    // program the table size on every core
    for (int c = 0; c < NC; c++) begin
      u_mem.pat_init(pat_pfn(c), entries, entries);
      cr9_wdata[c] = {13'b0, 1'b1, 16'(entries), pat_pfn(c)};
      for (int p = 0; p <= NPER; p++) begin n_fault[c][p] = 0; n_hit[c][p] = 0; end
    end
    @(negedge clk); cr9_we = '1; @(negedge clk); cr9_we = '0;
    period = 0; stop = 1'b0; n_done = 0;
    for (int c0 = 0; c0 < NC; c0++) begin
      fork
        automatic int c = c0;
        thread(c, delay);
      join_none
    end
    for (int p = 0; p < nper; p++) begin
      repeat (per) @(posedge clk);
      for (int c = 0; c < NC; c++) u_mem.pat_refill(pat_pfn(c), entries, n);
      period++;
    end
    stop = 1'b1;
    wait (n_done == NC);
    tot_f = 0; tot_h = 0; bound_h = 0;
    for (int c = 0; c < NC; c++)
      for (int p = 0; p < nper; p++) begin
        int b;
        b = (n_fault[c][p] < entries) ? n_fault[c][p] : entries;
        tot_f += n_fault[c][p]; tot_h += n_hit[c][p]; bound_h += b;
        check(n_hit[c][p] >= b - 1 && n_hit[c][p] <= b + 1,
              $sformatf("delay %0d, %0d entries, %0d ms, core %0d period %0d: %0d of %0d faults served, expected %0d",
                        delay_full, entries, ms, c, p, n_hit[c][p], n_fault[c][p], b));
      end
    rate = real'(tot_h) / real'(tot_f);
    $display("delay %5d cycles, %4d entries, refill every %2d ms: %4d faults per core per period, MFOE served %.3f (bound %.3f)",
             delay_full, entries, ms, tot_f / (NC * nper), rate, real'(bound_h) / real'(tot_f));
    if (tot_f <= NC * nper * entries)
      check(rate > 0.99, "all faults served while a period holds no more faults than entries");
  endtask

  // One point with a refill thread of finite speed, as the kernel has: it
  // sleeps `ms` milliseconds, then visits the cores' tables in turn,
  // recycling one used entry every `page_cyc` cycles (full scale) until
  // each table is done, and sleeps again. `nthr` threads fault, on cores
  // 0 .. nthr-1, for `total_ms` milliseconds. Checks that every core's MFOE
  // served exactly the pages it was given: the table's initial entries plus
  // those refilled, less those still valid at the end.
  int  n_refilled [NC];
  bit  refill_stop;
  task automatic run_slow(input int delay_full, input int nthr, input int ms,
                          input int total_ms, input int page_cyc, output real rate);
    int delay, tot_f, tot_h, left, n;
    delay = delay_full / SCALE;
    for (int c = 0; c < NC; c++) begin
      u_mem.pat_init(pat_pfn(c), ENTRIES, ENTRIES);
      cr9_wdata[c] = {13'b0, 1'b1, 16'(ENTRIES), pat_pfn(c)};
      for (int p = 0; p <= NPER; p++) begin n_fault[c][p] = 0; n_hit[c][p] = 0; end
      n_refilled[c] = 0;
    end
    @(negedge clk); cr9_we = '1; @(negedge clk); cr9_we = '0;
    period = 0; stop = 1'b0; n_done = 0; refill_stop = 1'b0;
    for (int c0 = 0; c0 < nthr; c0++) begin
      fork
        automatic int c = c0;
        thread(c, delay);
      join_none
    end
    fork
      begin : slow_refill
        while (!refill_stop) begin
          repeat (ms * 3_000_000 / SCALE) @(posedge clk);
          for (int c = 0; c < NC && !refill_stop; c++) begin
            do begin
              u_mem.pat_refill(pat_pfn(c), ENTRIES, n, 1);
              n_refilled[c] += n;
              if (n > 0) repeat (page_cyc / SCALE) @(posedge clk);
            end while (n > 0 && !refill_stop);
          end
        end
      end
    join_none
    repeat (total_ms * 3_000_000 / SCALE) @(posedge clk);
    stop = 1'b1;
    wait (n_done == nthr);
    refill_stop = 1'b1;
    tot_f = 0; tot_h = 0;
    for (int c = 0; c < nthr; c++) begin
      tot_f += n_fault[c][0]; tot_h += n_hit[c][0];
      left = 0;
      for (int i = 1; i <= ENTRIES; i++) begin
        pat_word_t w;
        w = pat_word_t'(u_mem.rd({pat_pfn(c), 12'h0} + PA_W'(16 * i)));
        left += int'(w.valid);
      end
      check(n_hit[c][0] == ENTRIES + n_refilled[c] - left,
            $sformatf("%0d threads, core %0d: served %0d, given %0d + %0d, left %0d",
                      nthr, c, n_hit[c][0], ENTRIES, n_refilled[c], left));
    end
    rate = real'(tot_h) / real'(tot_f);
    $display("delay %5d cycles, %0d thread(s), refill thread at %0d cycles per page after %0d ms sleep: %4d faults per core, MFOE served %.3f",
             delay_full, nthr, page_cyc, ms, tot_f / nthr, rate);
    // let the refill thread notice the stop before the next point
    repeat (page_cyc / SCALE + 2) @(posedge clk);
  endtask

  initial begin : main
    real rate [NPOINT];
    real rw [4];
    real rr [3];
    real rt [4];
    for (int c = 0; c < NC; c++) begin
      req_va[c] = '0; cr3[c] = {18'b0, CR3_PFN, 12'h000};
      cr9_wdata[c] = '0;
      next_page[c] = 0; t_start[c] = 0;
    end
    cycle = 0;
    lat_hit_sum = 0; lat_hit_max = 0; n_hit_lat = 0;
    lat_miss_sum = 0; lat_miss_max = 0; n_miss_lat = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // fault-rate sweep: 256 entries, 2 ms
    for (int pt = 0; pt < NPOINT; pt++) begin
      run_point(DELAY_FULL[pt], ENTRIES, 2, NPER, rate[pt]);
      if (pt > 0) check(rate[pt] >= rate[pt-1] - 0.01, "hit rate grows with the delay");
    end
    check(rate[0] < 0.9, "the shortest delay overruns the tables");

    // table-width sweep at the highest fault rate, 2 ms
    for (int k = 0; k < 4; k++) begin
      run_point(DELAY_FULL[0], WIDTHS[k], 2, 2, rw[k]);
      if (k > 0) check(rw[k] > rw[k-1], "hit rate grows with the table width");
    end
    check(rw[3] > 0.99, "1024 entries cover the highest fault rate");

    // refill-interval sweep at 256 entries
    for (int k = 0; k < 3; k++) begin
      run_point(DELAY_FULL[2], ENTRIES, INTERVALS[k], 2, rr[k]);
      if (k > 0) check(rr[k] < rr[k-1], "hit rate falls as the refill interval grows");
    end

    // thread-count sweep with a refill thread of the measured speed
    for (int k = 0; k < 4; k++) begin
      run_slow(DELAY_FULL[2], THREADS[k], 2, 6, PAGE_CYC, rt[k]);
      if (k > 0) check(rt[k] <= rt[k-1] + 0.001, "hit rate does not grow with the thread count");
    end
    check(rt[0] > 0.99 && rt[3] < 0.95, "eight threads outrun the refill thread, one does not");

    check(n_hit_lat > 0 && n_miss_lat > 0, "both MFOE hits and misses measured");
    if (n_hit_lat > 0) begin
      $display("MFOE hit latency: mean %0d, max %0d cycles over %0d hits",
               lat_hit_sum / n_hit_lat, lat_hit_max, n_hit_lat);
      check(lat_hit_sum / n_hit_lat <= 78, "mean MFOE hit latency within 78 cycles");
    end
    if (n_miss_lat > 0) begin
      $display("MFOE miss penalty: mean %0d, max %0d cycles over %0d misses",
               lat_miss_sum / n_miss_lat, lat_miss_max, n_miss_lat);
      check(lat_miss_sum / n_miss_lat <= 14, "mean MFOE miss penalty within 14 cycles");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
