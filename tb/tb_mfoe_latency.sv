// tb_mfoe_latency: the fault-latency micro-benchmark, run on two copies of
// the whole design at its default size (8 cores, 64-entry TLBs, 256-entry
// pre-allocation tables).
//
// The two copies differ only in the memory behind them: every access takes
// 2 cycles in one and 8 cycles in the other, the L1 and L2 latencies of the
// simulated system the design was evaluated on. A real MFOE sees a mix of
// the two (and of DRAM), so the two copies bracket what it sees.
//
// Each copy is an mfoe_lat_rig: the system, its memory and the benchmark.
// A thread strides through a freshly mapped region, one minor fault per
// page, with a few non-faulting accesses to recent pages and a random delay
// between faults. The kernel refills the tables every 2 ms (scaled down
// 16-fold), so some faults find a page (MFOE hit) and some find the table
// empty (MFOE miss, after which the kernel's handler maps the page in no
// simulated time). First one thread runs alone (2048 faults), then eight
// threads on the eight cores run together (768 faults each). The original
// benchmark generated 32K faults per thread; fewer are enough here because
// the latency does not depend on the count.
//
// Latency is measured as the benchmark defines it: from the walker handing
// the empty PTE to the MFOE to the MFOE either filling the TLB (hit) or
// giving up (miss). Checks:
//   - every fault gives a translation that matches its PTE;
//   - alone, every hit takes exactly 8 * (LAT + 1) + 3 cycles and every miss
//     2 * (LAT + 1) + 3: the engine's eight (two) dependent memory accesses,
//     each LAT cycles in memory plus the cycle in which it is issued, plus
//     the engine's own start, check and finish cycles;
//   - the published means (36 cycles per hit, 14 per miss) lie between the
//     2-cycle and the 8-cycle copies' values;
//   - with eight threads no hit or miss is faster than alone, and at 2-cycle
//     memory the mean hit stays within 78 cycles, the figure (mean plus one
//     standard deviation) used to model the design.
// Mean, standard deviation, 95th percentile and maximum are printed for
// both copies and both phases, to set against the published 36 / 42 / 125
// cycles for hits and 14 / 5 / 14 for misses.
module tb_mfoe_latency;
  import mfoe_pkg::*;

  localparam int NSYS = 2;
  localparam int LATS [NSYS] = '{2, 8};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [NSYS-1:0] done;
  int c_n [NSYS], c_f [NSYS], sh_mn [NSYS], sh_mx [NSYS], sm_mn [NSYS], sm_mx [NSYS],
      ph_mn [NSYS], pm_mn [NSYS], ph_mean10 [NSYS];

  for (genvar g = 0; g < NSYS; g++) begin : g_sys
    mfoe_lat_rig #(.LAT(LATS[g])) u_rig (
      .clk, .rst_n, .done(done[g]), .n_checks(c_n[g]), .n_failures(c_f[g]),
      .solo_hit_min(sh_mn[g]), .solo_hit_max(sh_mx[g]),
      .solo_miss_min(sm_mn[g]), .solo_miss_max(sm_mx[g]),
      .par_hit_min(ph_mn[g]), .par_miss_min(pm_mn[g]), .par_hit_mean_x10(ph_mean10[g])
    );
  end

  initial begin : watchdog
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : report
    int h [NSYS], m [NSYS];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&done);
    @(posedge clk);
    for (int g = 0; g < NSYS; g++) begin
      checks += c_n[g]; failures += c_f[g];
      h[g] = 8 * (LATS[g] + 1) + 3;
      m[g] = 2 * (LATS[g] + 1) + 3;
      check(sh_mn[g] == h[g] && sh_mx[g] == h[g],
            $sformatf("lat %0d: uncontended hit %0d..%0d cycles, expected %0d",
                      LATS[g], sh_mn[g], sh_mx[g], h[g]));
      check(sm_mn[g] == m[g] && sm_mx[g] == m[g],
            $sformatf("lat %0d: uncontended miss %0d..%0d cycles, expected %0d",
                      LATS[g], sm_mn[g], sm_mx[g], m[g]));
      check(ph_mn[g] >= h[g] && pm_mn[g] >= m[g],
            $sformatf("lat %0d: nothing faster under contention", LATS[g]));
    end
    check(h[0] <= 36 && 36 <= h[1], "published mean hit latency lies between L1 and L2 memory");
    check(m[0] <= 14 && 14 <= m[1], "published mean miss penalty lies between L1 and L2 memory");
    check(ph_mean10[0] <= 780, "mean hit within 78 cycles with eight threads on L1 memory");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
