// mfoe_lat_rig: one complete system for the fault-latency micro-benchmark:
// the top (mfoe_system) at its default size, a behavioural memory of fixed
// latency LAT, the kernel-side model, and the benchmark threads. Used by
// tb_mfoe_latency, which instantiates one rig per memory latency.
//
// A thread strides through a freshly mapped region, one minor fault per
// page, with a few non-faulting accesses to recent pages and a random delay
// between faults (50 to 100 cycles alone, 300 to 600 with eight threads,
// which keeps the shared memory port from saturating). The kernel refills the tables every 2 ms (scaled
// down by SCALE), so some faults find a page (MFOE hit) and some find the
// table empty (MFOE miss; the kernel's handler then maps the page in no
// simulated time). First one thread runs alone (N_SOLO faults), then eight
// threads on the eight cores run together (N_PAR faults each).
//
// Latency is measured from the walker handing the empty PTE to the MFOE to
// the MFOE filling the TLB (hit) or giving up (miss), and collected per
// phase as count, mean, standard deviation, 95th percentile, minimum and
// maximum. The rig checks every translation against its PTE and that both
// hits and misses occur in both phases; it prints its statistics, raises
// `done`, and leaves the comparisons between latencies to its parent
// through the output ports.
module mfoe_lat_rig
  import mfoe_pkg::*;
#(
  parameter int LAT    = 2,
  parameter int N_SOLO = 2048,
  parameter int N_PAR  = 768
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   n_checks,
  output int   n_failures,
  output int   solo_hit_min,
  output int   solo_hit_max,
  output int   solo_miss_min,
  output int   solo_miss_max,
  output int   par_hit_min,
  output int   par_miss_min,
  output int   par_hit_mean_x10
);
  localparam int NC      = 8;
  localparam int ENTRIES = 256;
  localparam int SCALE   = 16;
  localparam int PERIOD  = 6_000_000 / SCALE;   // 2 ms at 3 GHz, scaled
  localparam int DELAY_SOLO = 100;   // cycles between faults, one thread
  localparam int DELAY_PAR  = 600;   // cycles between faults, eight threads
  localparam int REDUNDANT = 4;
  localparam int NBIN    = 1024;
  localparam logic [PFN_W-1:0]  CR3_PFN  = PFN_W'('h100);
  localparam logic [PFN_W-1:0]  PAT_PFN0 = PFN_W'('h200);
  localparam logic [TGID_W-1:0] TGID     = TGID_W'(55);
  localparam logic [VA_W-1:0]   BASE_VA  = VA_W'('h0000_3000_0000_0000);

  initial begin
    done = 1'b0; n_checks = 0; n_failures = 0;
  end

  task automatic check(input bit ok, input string what);
    n_checks++;
    if (!ok) begin n_failures++; $display("FAIL: %s", what); end
  endtask

  // latency statistics per kind
  localparam int HIT_SOLO = 0, MISS_SOLO = 1, HIT_PAR = 2, MISS_PAR = 3;
  int     st_n   [4];
  int     st_mn  [4];
  int     st_mx  [4];
  longint st_sum [4];
  longint st_sq  [4];
  int     st_hist [4][NBIN];

  initial begin : clear
    for (int k = 0; k < 4; k++) begin
      st_n[k] = 0; st_mn[k] = 1 << 30; st_mx[k] = 0; st_sum[k] = 0; st_sq[k] = 0;
      for (int i = 0; i < NBIN; i++) st_hist[k][i] = 0;
    end
  end

  function automatic void stat_add(input int k, input int v);
    st_n[k]++; st_sum[k] += longint'(v); st_sq[k] += longint'(v) * v;
    if (v < st_mn[k]) st_mn[k] = v;
    if (v > st_mx[k]) st_mx[k] = v;
    st_hist[k][v < NBIN ? v : NBIN - 1]++;
  endfunction

  function automatic real stat_mean(input int k);
    return st_n[k] == 0 ? 0.0 : real'(st_sum[k]) / st_n[k];
  endfunction

  function automatic real stat_sd(input int k);
    real m;
    m = stat_mean(k);
    return st_n[k] == 0 ? 0.0 : $sqrt(real'(st_sq[k]) / st_n[k] - m * m);
  endfunction

  function automatic int stat_p95(input int k);
    int acc;
    acc = 0;
    for (int i = 0; i < NBIN; i++) begin
      acc += st_hist[k][i];
      if (acc * 100 >= st_n[k] * 95) return i;
    end
    return NBIN - 1;
  endfunction

  function automatic void stat_show(input int k, input string what);
    $display("  %-20s n %5d  mean %6.1f  sd %5.1f  p95 %4d  min %3d  max %4d",
             what, st_n[k], stat_mean(k), stat_sd(k), stat_p95(k), st_mn[k], st_mx[k]);
  endfunction

  task automatic report();
    $display("memory latency %0d cycles:", LAT);
    stat_show(HIT_SOLO,  "hit, one thread");
    stat_show(MISS_SOLO, "miss, one thread");
    stat_show(HIT_PAR,   "hit, eight threads");
    stat_show(MISS_PAR,  "miss, eight threads");
    check(st_n[HIT_SOLO] > 0 && st_n[MISS_SOLO] > 0 && st_n[HIT_PAR] > 0 && st_n[MISS_PAR] > 0,
          $sformatf("lat %0d: hits and misses in both phases", LAT));
    solo_hit_min  = st_mn[HIT_SOLO];  solo_hit_max  = st_mx[HIT_SOLO];
    solo_miss_min = st_mn[MISS_SOLO]; solo_miss_max = st_mx[MISS_SOLO];
    par_hit_min   = st_mn[HIT_PAR];   par_miss_min  = st_mn[MISS_PAR];
    par_hit_mean_x10 = int'(stat_mean(HIT_PAR) * 10.0);
  endtask

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

  mem_model #(.LAT(LAT)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req(mreq), .req_ready(mreq_ready),
    .rsp_valid(mrsp_valid), .rsp_rdata(mrsp_rdata)
  );

  // latency monitor
  bit par = 1'b0;
  int cycle = 0;
  int t_start [NC];
  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int c = 0; c < NC; c++) begin
      if (ev_mfoe_start[c]) t_start[c] = cycle;
      if (ev_mfoe_hit[c]) begin
        stat_add(par ? HIT_PAR : HIT_SOLO, cycle - t_start[c]);
      end
      if (ev_mfoe_miss[c]) begin
        stat_add(par ? MISS_PAR : MISS_SOLO, cycle - t_start[c]);
      end
    end
  end

  function automatic logic [PFN_W-1:0] pat_pfn(input int c);
    return PAT_PFN0 + PFN_W'(2 * c);
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

  task automatic kernel_fault(input logic [VA_W-1:0] v);
    logic [PA_W-1:0] a;
    logic [63:0] p;
    a = u_mem.pte_addr(CR3_PFN, v);
    p = '0;
    p[PTE_PFN_LO +: PFN_W] = u_mem.alloc_page();
    p[PTE_P] = 1'b1; p[PTE_RW] = 1'b1;
    u_mem.wr(a, p);
  endtask

  int next_page [NC];
  int n_done;

  function automatic logic [VA_W-1:0] page_va(input int c, input int pg);
    return BASE_VA + VA_W'(c) * VA_W'('h4000_0000) + VA_W'(pg) * VA_W'(4096);
  endfunction

  task automatic thread(input int c, input int nfaults, input int delay);
    logic [VA_W-1:0] v;
    bit f;
    fault_e code;
    logic [PA_W-1:0] pa;
    logic [63:0] p;
    int pg;
    repeat ($urandom_range(0, delay)) @(posedge clk);
    for (int k = 0; k < nfaults; k++) begin
      pg = next_page[c]++;
      v  = page_va(c, pg);
      u_mem.map_pte(CR3_PFN, v, u_mem.mfoeable_pte(TGID, 1'b1));
      xlate(c, v + VA_W'($urandom_range(0, 511) * 8), 1'b0, f, code, pa);
      if (f) begin
        check(code == FLT_EMPTY, $sformatf("lat %0d core %0d unexpected fault %s",
                                           LAT, c, code.name()));
        kernel_fault(v);
        xlate(c, v, 1'b0, f, code, pa);
      end
      p = u_mem.rd(u_mem.pte_addr(CR3_PFN, v));
      check(!f && p[PTE_P] && pa[PA_W-1:12] == pte_pfn(p),
            $sformatf("lat %0d core %0d page %0d translation", LAT, c, pg));
      for (int r = 0; r < REDUNDANT && pg > 0; r++) begin
        xlate(c, page_va(c, pg - $urandom_range(0, (pg < 8 ? pg : 8))) +
                 VA_W'($urandom_range(0, 511) * 8), 1'b0, f, code, pa);
        check(!f, "redundant access");
      end
      repeat ($urandom_range(delay / 2, delay)) @(posedge clk);
    end
    n_done++;
  endtask

  // the eight threads of the second phase, one per core
  for (genvar gc = 0; gc < NC; gc++) begin : g_thr
    initial begin
      wait (par);
      thread(gc, N_PAR, DELAY_PAR);
    end
  end

  // the kernel's periodic post-fault processing
  initial begin : refill
    int n;
    @(posedge rst_n);
    while (!done) begin
      repeat (PERIOD) @(posedge clk);
      for (int c = 0; c < NC; c++) u_mem.pat_refill(pat_pfn(c), ENTRIES, n);
    end
  end

  initial begin : main
    for (int c = 0; c < NC; c++) begin
      req_va[c] = '0; cr3[c] = {18'b0, CR3_PFN, 12'h000};
      cr9_wdata[c] = {13'b0, 1'b1, 16'(ENTRIES), pat_pfn(c)};
      next_page[c] = 0; t_start[c] = 0;
      u_mem.pat_init(pat_pfn(c), ENTRIES, ENTRIES);
    end
    @(posedge rst_n);
    @(negedge clk); cr9_we = '1; @(negedge clk); cr9_we = '0;

    // one thread alone
    n_done = 0;
    thread(0, N_SOLO, DELAY_SOLO);
    // eight threads together
    repeat (10) @(posedge clk);
    n_done = 0; par = 1'b1;
    wait (n_done == NC);
    repeat (10) @(posedge clk);
    report();
    done = 1'b1;
  end

endmodule
