// tb_tlb: self-checking test of the fully associative TLB.
//
// A reference model (an associative array keyed by VPN plus a copy of the
// round-robin victim rule) predicts every lookup. The test fills more pages
// than the TLB holds, overwrites an existing VPN, checks that write lookups
// need a writable and dirty entry, and checks that flush empties the TLB.
// Runs with 8 entries so that replacement happens quickly.
module tb_tlb;
  import mfoe_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [VPN_W-1:0] lk_vpn = '0, fill_vpn = '0;
  logic             lk_write = 1'b0, lk_hit;
  logic [PFN_W-1:0] lk_pfn, fill_pfn = '0;
  logic             fill_valid = 1'b0, fill_rw = 1'b0, fill_dirty = 1'b0, flush = 1'b0;

  tlb #(.ENTRIES(N)) dut (.*);

  int checks = 0, failures = 0;

  // reference: slot contents and victim pointer
  logic             r_valid [N];
  logic [VPN_W-1:0] r_vpn   [N];
  logic [PFN_W-1:0] r_pfn   [N];
  logic             r_rw    [N];
  logic             r_dirty [N];
  int               r_ptr;

  task automatic ref_fill(input logic [VPN_W-1:0] v, input logic [PFN_W-1:0] p,
                          input logic rw, input logic d);
    int slot;
    slot = -1;
    for (int i = 0; i < N; i++) if (r_valid[i] && r_vpn[i] == v && slot < 0) slot = i;
    if (slot < 0) for (int i = 0; i < N; i++) if (!r_valid[i] && slot < 0) slot = i;
    if (slot < 0) begin
      slot  = r_ptr;
      r_ptr = (r_ptr + 1) % N;
    end
    r_valid[slot] = 1'b1; r_vpn[slot] = v; r_pfn[slot] = p;
    r_rw[slot] = rw; r_dirty[slot] = d;
  endtask

  task automatic do_fill(input logic [VPN_W-1:0] v, input logic [PFN_W-1:0] p,
                         input logic rw, input logic d);
    @(negedge clk);
    fill_valid = 1'b1; fill_vpn = v; fill_pfn = p; fill_rw = rw; fill_dirty = d;
    @(negedge clk);
    fill_valid = 1'b0;
    ref_fill(v, p, rw, d);
  endtask

  task automatic do_lookup(input logic [VPN_W-1:0] v, input logic w);
    logic exp_hit;
    logic [PFN_W-1:0] exp_pfn;
    exp_hit = 1'b0; exp_pfn = '0;
    for (int i = 0; i < N; i++)
      if (r_valid[i] && r_vpn[i] == v && (!w || (r_rw[i] && r_dirty[i]))) begin
        exp_hit = 1'b1; exp_pfn = r_pfn[i];
      end
    @(negedge clk);
    lk_vpn = v; lk_write = w;
    #1;
    checks++;
    if (lk_hit !== exp_hit || (exp_hit && lk_pfn !== exp_pfn)) begin
      failures++;
      $display("FAIL: lookup %h w=%0d: hit %0d pfn %h, expected %0d %h",
               v, w, lk_hit, lk_pfn, exp_hit, exp_pfn);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    for (int i = 0; i < N; i++) r_valid[i] = 1'b0;
    r_ptr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    do_lookup(VPN_W'(5), 1'b0);                         // empty after reset
    for (int i = 0; i < 2 * N + 3; i++) begin           // fill past capacity
      do_fill(VPN_W'(100 + i), PFN_W'(1000 + 7 * i), i[0], i[1]);
      for (int k = 0; k <= i; k++) do_lookup(VPN_W'(100 + k), 1'b0);
    end
    for (int k = 0; k < 2 * N + 3; k++) do_lookup(VPN_W'(100 + k), 1'b1);
    // overwrite an existing VPN: no new slot used
    do_fill(VPN_W'(100 + 2 * N + 2), PFN_W'('h55), 1'b1, 1'b1);
    for (int k = 0; k < 2 * N + 3; k++) begin
      do_lookup(VPN_W'(100 + k), 1'b0);
      do_lookup(VPN_W'(100 + k), 1'b1);
    end
    // random traffic
    for (int j = 0; j < 200; j++) begin
      if ($urandom_range(0, 2) == 0)
        do_fill(VPN_W'($urandom_range(0, 20)), PFN_W'($urandom), 1'($urandom), 1'($urandom));
      else
        do_lookup(VPN_W'($urandom_range(0, 20)), 1'($urandom));
    end
    // flush
    @(negedge clk); flush = 1'b1;
    @(negedge clk); flush = 1'b0;
    for (int i = 0; i < N; i++) r_valid[i] = 1'b0;
    for (int k = 0; k <= 20; k++) do_lookup(VPN_W'(k), 1'b0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
