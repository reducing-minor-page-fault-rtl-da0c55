// mfoe_system: N cores' MFOE-enhanced address translation sharing one
// main-memory port.
//
// Each core has its own TLB, page walker, Minor Fault Offload Engine and
// CR9 register (mfoe_core), so each services its own minor faults from its
// own pre-allocation table, as the paper's per-core design asks. All cores'
// page-table and pre-allocation-table accesses meet in one round-robin
// mem_arbiter in front of main memory. That arbiter also makes the PTE lock
// protocol work across cores: a locked PTE read by one core's MFOE keeps
// every other core off the memory port until the matching write, so two
// cores that fault on the same page serialise on the PTE lock bit, and the
// loser waits for the winner's PTE instead of consuming a second page.
//
// Ports are per-core arrays of the mfoe_core interface, plus one memory
// port (valid/ready request of mfoe_pkg::mem_req_t, one response per
// request, at least one cycle after acceptance). Main memory, which holds
// the page tables and the pre-allocation tables, and the kernel software
// that fills them, are outside this block.
//
// The default of 8 cores is the simulated system of the paper's evaluation;
// the 64-entry TLB is this design's choice.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET) because the sub-blocks' handshake assertions
// use it in `disable iff`; the flip-flops all reset asynchronously.
module mfoe_system
  import mfoe_pkg::*;
#(
  parameter int unsigned N_CORES     = 8,
  parameter int unsigned TLB_ENTRIES = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  // per-core translation requests
  input  logic [N_CORES-1:0]  req_valid,
  input  logic [VA_W-1:0]     req_va    [N_CORES],
  input  logic [N_CORES-1:0]  req_write,
  output logic [N_CORES-1:0]  req_ready,
  output logic [N_CORES-1:0]  resp_valid,
  output logic [PA_W-1:0]     resp_pa   [N_CORES],
  output logic [N_CORES-1:0]  resp_fault,
  output fault_e              resp_fault_code [N_CORES],
  // per-core control registers
  input  logic [63:0]         cr3       [N_CORES],
  input  logic [N_CORES-1:0]  tlb_flush,
  input  logic [N_CORES-1:0]  cr9_we,
  input  logic [63:0]         cr9_wdata [N_CORES],
  output logic [63:0]         cr9_q     [N_CORES],
  // per-core events
  output logic [N_CORES-1:0]  ev_tlb_hit,
  output logic [N_CORES-1:0]  ev_walk,
  output logic [N_CORES-1:0]  ev_mfoe_start,
  output logic [N_CORES-1:0]  ev_mfoe_hit,
  output logic [N_CORES-1:0]  ev_mfoe_miss,
  output logic [N_CORES-1:0]  ev_lock_wait,
  output logic [N_CORES-1:0]  ev_wrap,
  // main memory
  output logic                mem_req_valid,
  output mem_req_t            mem_req,
  input  logic                mem_req_ready,
  input  logic                mem_rsp_valid,
  input  logic [63:0]         mem_rsp_rdata
);
  logic [N_CORES-1:0] c_req_valid, c_req_ready, c_rsp_valid;
  mem_req_t           c_req [N_CORES];
  logic [63:0]        c_rsp_rdata;

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    mfoe_core #(.TLB_ENTRIES(TLB_ENTRIES)) u_core (
      .clk, .rst_n,
      .req_valid(req_valid[i]), .req_va(req_va[i]), .req_write(req_write[i]),
      .req_ready(req_ready[i]), .resp_valid(resp_valid[i]), .resp_pa(resp_pa[i]),
      .resp_fault(resp_fault[i]), .resp_fault_code(resp_fault_code[i]),
      .cr3(cr3[i]), .tlb_flush(tlb_flush[i]),
      .cr9_we(cr9_we[i]), .cr9_wdata(cr9_wdata[i]), .cr9_q(cr9_q[i]),
      .ev_tlb_hit(ev_tlb_hit[i]), .ev_walk(ev_walk[i]),
      .ev_mfoe_start(ev_mfoe_start[i]), .ev_mfoe_hit(ev_mfoe_hit[i]),
      .ev_mfoe_miss(ev_mfoe_miss[i]), .ev_lock_wait(ev_lock_wait[i]),
      .ev_wrap(ev_wrap[i]),
      .mem_req_valid(c_req_valid[i]), .mem_req(c_req[i]),
      .mem_req_ready(c_req_ready[i]), .mem_rsp_valid(c_rsp_valid[i]),
      .mem_rsp_rdata(c_rsp_rdata)
    );
  end

  mem_arbiter #(.N(N_CORES)) u_mem_arb (
    .clk, .rst_n,
    .up_req_valid(c_req_valid), .up_req(c_req), .up_req_ready(c_req_ready),
    .up_rsp_valid(c_rsp_valid), .up_rsp_rdata(c_rsp_rdata),
    .dn_req_valid(mem_req_valid), .dn_req(mem_req), .dn_req_ready(mem_req_ready),
    .dn_rsp_valid(mem_rsp_valid), .dn_rsp_rdata(mem_rsp_rdata)
  );

endmodule
