// tb_mfoe_core: self-checking test of one core's translation path (TLB,
// walker, MFOE, CR9) against the behavioural memory and kernel model.
//
// Sequence: CR9 is written with a 4-entry table; a read of an MFOEable page
// is serviced by the MFOE and the retry hits the TLB; a second access to the
// page hits the TLB without touching memory (answered in 2 cycles); a
// present page is walked; a first write to a page the MFOE mapped for a read
// walks again to set the dirty bit; a non-MFOEable page faults; further
// faults use up the table and then miss; after a refill faults hit again;
// clearing the enable bit in CR9 sends faults to the kernel; a TLB flush
// forces a fresh walk. Every physical address is checked against the PFN the
// kernel model put in the table or the page table.
module tb_mfoe_core;
  import mfoe_pkg::*;

  localparam int ENTRIES = 4;
  localparam logic [PFN_W-1:0] CR3_PFN = PFN_W'('h100);
  localparam logic [PFN_W-1:0] PAT_PFN = PFN_W'('h200);
  localparam logic [TGID_W-1:0] TGID   = TGID_W'(4321);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             req_valid = 1'b0, req_write = 1'b0, req_ready;
  logic [VA_W-1:0]  req_va = '0;
  logic             resp_valid, resp_fault;
  logic [PA_W-1:0]  resp_pa;
  fault_e           resp_fault_code;
  logic [63:0]      cr3, cr9_wdata = '0, cr9_q;
  logic             tlb_flush = 1'b0, cr9_we = 1'b0;
  logic             ev_tlb_hit, ev_walk, ev_mfoe_start, ev_mfoe_hit, ev_mfoe_miss,
                    ev_lock_wait, ev_wrap;
  logic             mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t         mreq;
  logic [63:0]      mrsp_rdata;

  mfoe_core #(.TLB_ENTRIES(8)) dut (
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
  int n_tlb_hit = 0, n_walk = 0, n_mfoe_hit = 0, n_mfoe_miss = 0;
  always @(posedge clk) if (rst_n) begin
    n_tlb_hit   += int'(ev_tlb_hit);
    n_walk      += int'(ev_walk);
    n_mfoe_hit  += int'(ev_mfoe_hit);
    n_mfoe_miss += int'(ev_mfoe_miss);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc, acc0;
  task automatic xlate(input logic [VA_W-1:0] v, input bit w);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    acc0 = int'(u_mem.n_reads + u_mem.n_writes);
    req_va = v; req_write = w; req_valid = 1'b1;
    @(negedge clk);
    req_valid = 1'b0;
    cyc = 1;
    while (!resp_valid) begin @(negedge clk); cyc++; end
  endtask

  task automatic write_cr9(input bit en);
    @(negedge clk);
    cr9_wdata = {13'b0, en, 16'(ENTRIES), PAT_PFN};
    cr9_we = 1'b1;
    @(negedge clk);
    cr9_we = 1'b0;
  endtask

  function automatic logic [PFN_W-1:0] ent_pfn(input int i);
    pat_word_t e;
    e = pat_word_t'(u_mem.rd({PAT_PFN, 12'h0} + PA_W'(16 * i)));
    return e.pfn;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [VA_W-1:0] b;
    logic [PFN_W-1:0] ep;
    logic [63:0] e;
    int n;
    cr3 = {18'b0, CR3_PFN, 12'h000};
    b = VA_W'('h0000_1234_5600_0000);
    for (int i = 0; i < 12; i++)
      u_mem.map_pte(CR3_PFN, b + VA_W'(i * 4096), u_mem.mfoeable_pte(TGID, 1'b1));
    e = '0; e[PTE_PFN_LO +: PFN_W] = PFN_W'('hBEEF); e[PTE_P] = 1; e[PTE_RW] = 1; e[PTE_A] = 1;
    u_mem.map_pte(CR3_PFN, b + VA_W'(20 * 4096), e);            // present page
    u_mem.map_pte(CR3_PFN, b + VA_W'(21 * 4096), 64'd0);        // not MFOEable
    u_mem.pat_init(PAT_PFN, ENTRIES, ENTRIES);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    write_cr9(1'b1);
    check(cr9_q[50] && cr9_q[49:34] == 16'(ENTRIES) && cr9_q[33:0] == PAT_PFN, "CR9 readback");

    // minor fault serviced by MFOE, then TLB hit on the retry
    ep = ent_pfn(1);
    xlate(b + 'h0123, 1'b0);
    check(!resp_fault && resp_pa == {ep, 12'h123}, $sformatf("MFOE hit pa %h", resp_pa));
    check(n_mfoe_hit == 1 && n_walk == 1, "one walk, one MFOE hit");
    check(cyc <= 80 + 4 * 3 + 10, $sformatf("fault serviced in %0d cycles", cyc));

    xlate(b + 'h0456, 1'b0);
    check(!resp_fault && resp_pa == {ep, 12'h456} && n_tlb_hit == 1, "TLB hit afterwards");
    check(cyc == 2 && int'(u_mem.n_reads + u_mem.n_writes) == acc0, "TLB hit: 2 cycles, no memory");

    // present page: ordinary walk
    xlate(b + VA_W'(20 * 4096 + 8), 1'b0);
    check(!resp_fault && resp_pa == {PFN_W'('hBEEF), 12'h008} && n_mfoe_hit == 1, "present page");

    // first write to the MFOE-mapped page: walk again for the dirty bit
    n = n_walk;
    xlate(b + 'h0010, 1'b1);
    check(!resp_fault && resp_pa == {ep, 12'h010} && n_walk == n + 1, "write walks for D");
    e = u_mem.rd(u_mem.pte_addr(CR3_PFN, b));
    check(e[PTE_D], "dirty bit set");
    xlate(b + 'h0018, 1'b1);
    check(!resp_fault && cyc == 2, "second write hits the TLB");

    // not MFOEable
    xlate(b + VA_W'(21 * 4096), 1'b0);
    check(resp_fault && resp_fault_code == FLT_NOT_MFOE, "non-MFOEable faults");

    // use up the table, then miss
    for (int i = 1; i < ENTRIES; i++) begin
      ep = ent_pfn(i + 1);
      xlate(b + VA_W'(i * 4096), 1'b1);
      check(!resp_fault && resp_pa == {ep, 12'h000}, $sformatf("MFOE hit %0d", i));
    end
    xlate(b + VA_W'(ENTRIES * 4096), 1'b0);
    // the non-MFOEable fault above also came back from the MFOE as a miss
    check(resp_fault && resp_fault_code == FLT_EMPTY && n_mfoe_miss == 2, $sformatf("MFOE miss on empty table: %0d %s %0d", resp_fault, resp_fault_code.name(), n_mfoe_miss));

    // refill, then hit again
    u_mem.pat_refill(PAT_PFN, ENTRIES, n);
    check(n == ENTRIES, "refill");
    ep = ent_pfn(1);
    xlate(b + VA_W'(ENTRIES * 4096 + 'h44), 1'b0);
    check(!resp_fault && resp_pa == {ep, 12'h044}, "hit after refill");

    // disabled
    write_cr9(1'b0);
    xlate(b + VA_W'((ENTRIES + 1) * 4096), 1'b0);
    check(resp_fault && resp_fault_code == FLT_DISABLED, "disabled MFOE faults");

    // flush: the page is walked again and found present
    @(negedge clk); tlb_flush = 1'b1; @(negedge clk); tlb_flush = 1'b0;
    n = n_walk;
    xlate(b + 'h0400, 1'b0);
    check(!resp_fault && resp_pa == {u_mem.q_pfn[0], 12'h400} && n_walk == n + 1, "walk after flush");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
