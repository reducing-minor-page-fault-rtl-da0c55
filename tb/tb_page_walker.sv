// tb_page_walker: self-checking test of the four-level page walker.
//
// Page tables are built in the behavioural memory by the kernel model; the
// walker is started on a set of addresses and its result, the PTE it hands
// on, the number of memory reads and writes, and the PTE in memory
// afterwards are compared with what the tables say:
//   present page, accessed bit clear   -> translation, A set (1 write)
//   present page, A and D already set  -> translation, no write
//   first write to a writable page     -> translation, A and D set
//   write to a read-only page          -> protection fault
//   non-present last-level PTE         -> handed to the MFOE with the PTE
//                                         and its physical address
//   missing page directory             -> fault at an upper level
// Random addresses in a second region are then walked and checked against
// the model's own walk.
module tb_page_walker;
  import mfoe_pkg::*;

  localparam logic [PFN_W-1:0] CR3_PFN = PFN_W'('h100);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start = 1'b0, is_write = 1'b0;
  logic [VA_W-1:0]  va = '0;
  logic [63:0]      cr3;
  logic             done, pte_rw, pte_dirty;
  logic [1:0]       result;
  fault_e           fault;
  logic [PFN_W-1:0] pfn;
  logic [63:0]      leaf_pte;
  logic [PA_W-1:0]  leaf_addr;
  logic             mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t         mreq;
  logic [63:0]      mrsp_rdata;

  page_walker dut (
    .clk, .rst_n, .start, .va, .is_write, .cr3,
    .done, .result, .fault, .pfn, .pte_rw, .pte_dirty, .leaf_pte, .leaf_addr,
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

  int rd0, wr0;
  task automatic walk(input logic [VA_W-1:0] v, input bit w);
    @(negedge clk);
    rd0 = int'(u_mem.n_reads); wr0 = int'(u_mem.n_writes);
    va = v; is_write = w; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  function automatic logic [63:0] present_pte(input logic [PFN_W-1:0] p, input bit rw,
                                              input bit a, input bit d);
    logic [63:0] e;
    e = '0;
    e[PTE_PFN_LO +: PFN_W] = p;
    e[PTE_P] = 1'b1; e[PTE_RW] = rw; e[2] = 1'b1; e[PTE_A] = a; e[PTE_D] = d;
    return e;
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
    logic [63:0] p;
    cr3 = {18'b0, CR3_PFN, 12'h000};
    b = VA_W'('h0000_5555_4000_0000);
    u_mem.map_pte(CR3_PFN, b + 'h0000, present_pte(PFN_W'('hA001), 1, 0, 0));
    u_mem.map_pte(CR3_PFN, b + 'h1000, present_pte(PFN_W'('hA002), 1, 1, 1));
    u_mem.map_pte(CR3_PFN, b + 'h2000, present_pte(PFN_W'('hA003), 1, 1, 0));
    u_mem.map_pte(CR3_PFN, b + 'h3000, present_pte(PFN_W'('hA004), 0, 1, 0));
    u_mem.map_pte(CR3_PFN, b + 'h4000, u_mem.mfoeable_pte(TGID_W'(77), 1'b1));
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    walk(b + 'h0abc, 1'b0);
    check(result == 2'd0 && pfn == PFN_W'('hA001), "walk to present page");
    check(int'(u_mem.n_reads) - rd0 == 4 && int'(u_mem.n_writes) - wr0 == 1, "4 reads, A write");
    p = u_mem.rd(u_mem.pte_addr(CR3_PFN, b));
    check(p[PTE_A] && !p[PTE_D], "accessed bit set by the walker");

    walk(b + 'h1008, 1'b1);
    check(result == 2'd0 && pfn == PFN_W'('hA002) && pte_rw && pte_dirty, "present, A and D set");
    check(int'(u_mem.n_writes) - wr0 == 0, "no write when A/D already set");

    walk(b + 'h2010, 1'b1);
    check(result == 2'd0 && pfn == PFN_W'('hA003) && pte_dirty, "first write sets D");
    p = u_mem.rd(u_mem.pte_addr(CR3_PFN, b + 'h2000));
    check(p[PTE_D] && p[PTE_A], "dirty bit in memory");

    walk(b + 'h3000, 1'b1);
    check(result == 2'd1 && fault == FLT_PROT, "write to read-only page faults");
    walk(b + 'h3000, 1'b0);
    check(result == 2'd0 && pfn == PFN_W'('hA004), "read of read-only page");

    walk(b + 'h4123, 1'b0);
    check(result == 2'd2, "non-present leaf handed to MFOE");
    check(leaf_addr == u_mem.pte_addr(CR3_PFN, b + 'h4000) &&
          leaf_pte == u_mem.mfoeable_pte(TGID_W'(77), 1'b1), "leaf PTE and address handed on");

    walk(b + VA_W'('h4000_0000), 1'b0);   // different PDPT slot: no PD
    check(result == 2'd1 && fault == FLT_NONLEAF, "missing upper level faults");
    check(int'(u_mem.n_reads) - rd0 == 2, "stopped after the PDPT read");

    // random pages in a second region
    for (int i = 0; i < 60; i++) begin
      logic [VA_W-1:0] v;
      logic [63:0] e;
      int kind;
      v = VA_W'('h0000_7000_0000_0000) + VA_W'($urandom_range(0, 1 << 20) << 12);
      kind = $urandom_range(0, 2);
      if (u_mem.pte_addr(CR3_PFN, v) == '0 || kind != 0) begin
        if (kind == 2) e = u_mem.mfoeable_pte(TGID_W'(i), 1'b1);
        else           e = present_pte(PFN_W'($urandom), 1, 1, 1);
        u_mem.map_pte(CR3_PFN, v, e);
      end
      e = u_mem.rd(u_mem.pte_addr(CR3_PFN, v));
      walk(v | VA_W'($urandom_range(0, 4095)), 1'b0);
      if (e[PTE_P]) check(result == 2'd0 && pfn == pte_pfn(e), $sformatf("random %0d", i));
      else          check(result == 2'd2 && leaf_pte == e, $sformatf("random %0d offload", i));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
