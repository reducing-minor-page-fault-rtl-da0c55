// page_walker: x86-64 four-level hardware page table walker of one core.
//
// On a TLB miss the core pulses `start` with the virtual address and the
// access type. The walker reads one 8-byte entry per level, PML4 -> PDPT ->
// PD -> PT, starting from the table whose physical frame is held in CR3 and
// indexing each level with 9 bits of the virtual address. An upper-level
// entry that is not present ends the walk with a fault. At the last level:
//   * present: a write to a non-writable page faults; otherwise the walker
//     sets the accessed bit (and the dirty bit for a write) if they are
//     clear, writing the PTE back, and reports the translation (RES_OK);
//   * not present: the walk is handed over to the MFOE (RES_OFFLOAD) with
//     the PTE and its physical address, so that the MFOE need not walk again.
// Exactly one `done` pulse answers each `start`; the result fields are
// valid in that cycle.
//
// Memory: one request at a time on a valid/ready channel; each access costs
// the memory latency plus one cycle in this FSM. A walk that finds a present
// PTE with A (and D) already set takes four reads.
//
// Follows the paper: the walk from CR3 to the lowest PTE, the hand-off of a
// non-present PTE to the MFOE, and setting the PTE accessed bit during a
// walk. This design's own choices: 4 KB pages only (no large-page leaves),
// and permission checks at the leaf only.
//
// Lint notes: rst_n is an asynchronous reset of the flip-flops and also the
// `disable iff` condition of the handshake assertions below, which Verilator
// reports as a net used both ways (SYNCASYNCNET); the assertions are not
// logic. Package constants this module does not need are reported unused.
// Only the table frame field of cr3 (bits 45:12) is used; its flag bits and
// the bits above the 46-bit physical address are ignored, as a walker does.
// mem_req.lock is always 0 here, the A/D update writes byte 0 only, and
// leaf_addr is 8-byte aligned, so those output bits are constant.
module page_walker
  import mfoe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // request from the core
  input  logic             start,
  input  logic [VA_W-1:0]  va,
  input  logic             is_write,
  input  logic [63:0]      cr3,
  // result
  output logic             done,
  output logic [1:0]       result,      // RES_OK / RES_FAULT / RES_OFFLOAD
  output fault_e           fault,
  output logic [PFN_W-1:0] pfn,
  output logic             pte_rw,
  output logic             pte_dirty,
  output logic [63:0]      leaf_pte,
  output logic [PA_W-1:0]  leaf_addr,
  // memory
  output logic             mem_req_valid,
  output mem_req_t         mem_req,
  input  logic             mem_req_ready,
  input  logic             mem_rsp_valid,
  input  logic [63:0]      mem_rsp_rdata
);
  localparam logic [1:0] RES_OK = 2'd0, RES_FAULT = 2'd1, RES_OFFLOAD = 2'd2;

  typedef enum logic [2:0] {W_IDLE, W_READ, W_RWAIT, W_UPD, W_UWAIT, W_DONE} w_state_e;

  w_state_e         state;
  logic [1:0]       level;          // 3 = PML4 ... 0 = PT
  logic [PFN_W-1:0] table_pfn;
  logic [VA_W-1:0]  va_q;
  logic             wr_q;
  logic [63:0]      pte_q;
  logic [PA_W-1:0]  addr_q;

  logic [8:0]       idx;
  logic [PA_W-1:0]  ent_addr;
  assign idx      = va_q[12 + 9*level +: 9];
  assign ent_addr = {table_pfn, idx, 3'b000};

  always_comb begin
    mem_req_valid = (state == W_READ) || (state == W_UPD);
    mem_req       = '0;
    mem_req.addr  = (state == W_UPD) ? addr_q : ent_addr;
    mem_req.we    = (state == W_UPD);
    mem_req.wdata = pte_q;
    mem_req.wstrb = 8'h01;           // A and D live in byte 0
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= W_IDLE;
      level     <= '0;
      table_pfn <= '0;
      va_q      <= '0;
      wr_q      <= 1'b0;
      pte_q     <= '0;
      addr_q    <= '0;
      done      <= 1'b0;
      result    <= RES_OK;
      fault     <= FLT_NONE;
    end else begin
      done <= 1'b0;
      unique case (state)
        W_IDLE: if (start) begin
          va_q      <= va;
          wr_q      <= is_write;
          table_pfn <= cr3[PTE_PFN_LO +: PFN_W];
          level     <= 2'd3;
          state     <= W_READ;
        end
        W_READ: if (mem_req_ready) begin
          addr_q <= ent_addr;
          state  <= W_RWAIT;
        end
        W_RWAIT: if (mem_rsp_valid) begin
          pte_q <= mem_rsp_rdata;
          if (level != 2'd0) begin
            if (!mem_rsp_rdata[PTE_P]) begin
              result <= RES_FAULT;
              fault  <= FLT_NONLEAF;
              state  <= W_DONE;
            end else begin
              table_pfn <= pte_pfn(mem_rsp_rdata);
              level     <= level - 1'b1;
              state     <= W_READ;
            end
          end else if (!mem_rsp_rdata[PTE_P]) begin
            result <= RES_OFFLOAD;
            fault  <= FLT_NONE;
            state  <= W_DONE;
          end else if (wr_q && !mem_rsp_rdata[PTE_RW]) begin
            result <= RES_FAULT;
            fault  <= FLT_PROT;
            state  <= W_DONE;
          end else begin
            result <= RES_OK;
            fault  <= FLT_NONE;
            if (!mem_rsp_rdata[PTE_A] || (wr_q && !mem_rsp_rdata[PTE_D])) begin
              pte_q[PTE_A] <= 1'b1;
              if (wr_q) pte_q[PTE_D] <= 1'b1;
              state <= W_UPD;
            end else begin
              state <= W_DONE;
            end
          end
        end
        W_UPD:   if (mem_req_ready) state <= W_UWAIT;
        W_UWAIT: if (mem_rsp_valid) state <= W_DONE;
        W_DONE: begin
          done  <= 1'b1;
          state <= W_IDLE;
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  assign pfn       = pte_pfn(pte_q);
  assign pte_rw    = pte_q[PTE_RW];
  assign pte_dirty = pte_q[PTE_D];
  assign leaf_pte  = pte_q;
  assign leaf_addr = addr_q;

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == W_IDLE);

endmodule
