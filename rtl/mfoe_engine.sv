// mfoe_engine: the Minor Fault Offload Engine of one core.
//
// The page walker starts the engine when it reaches a last-level PTE whose
// present bit is clear, passing the faulting virtual address, the access
// type, the PTE and the PTE's physical address. The engine then services
// the minor fault itself, without the kernel, from a per-core ring buffer of
// pages the kernel has allocated and zeroed ahead of time (the
// pre-allocation table, in main memory, located by CR9):
//   1. MFOEable clear, MFOE disabled in CR9, or a write to a PTE the kernel
//      did not mark writable: raise the ordinary page fault.
//   2. Read the table header (entry 0) and take the tail index from it.
//   3. Read the first word of the entry at the tail. If its valid bit is
//      clear the table is exhausted: raise the ordinary page fault ("MFOE
//      miss").
//   4. Take the PTE lock: a locked read of the PTE and a write-back with the
//      lock bit set. If another core or the kernel holds the lock, write the
//      PTE back unchanged, then poll it with plain reads until the lock is
//      clear; a present PTE then gives the translation without consuming a
//      page, a non-present one sends the engine back to take the lock.
//   5. Write the faulting VA into the entry, then its first word with the
//      TGID (taken from the PFN field of the empty PTE), used = 1 and
//      valid = 0. The VA goes first so that the kernel's periodic
//      post-fault processing, which may run at any moment and acts on
//      entries whose used bit is set, never sees a used entry without its VA.
//   6. Write the tail index + 1 (wrapping from the entry count to 1) into
//      the header, touching only the tail field.
//   7. Write the PTE: the pre-allocated PFN, present, accessed, dirty for a
//      write, and lock released.
//   8. Report the translation so that the core fills the TLB and retries.
// `done` pulses once per `start`; `hit` says the fault was serviced (pfn,
// rw and dirty are then the TLB fill), otherwise `fault` gives the reason.
//
// Timing: each memory access costs its latency plus one issue cycle. An
// uncontended hit takes 8 accesses (3 reads, 5 writes) plus 2 cycles; a miss
// on an empty table takes 2 reads plus 2 cycles; a fault on a PTE that is
// not MFOEable, or with MFOE disabled, takes 2 cycles and no access.
//
// The steps, their order, the fields written and the locking protocol follow
// the paper. Bit positions of CR9, header and entry fields, the write-back of
// an unchanged PTE to end a failed locked read, and the permission check
// against the RW bit are this design's choices (see mfoe_pkg). The paper
// counts "less than 5 memory accesses" for a hit; with the 64-bit port and
// the explicit lock/unlock writes the paper also describes, this engine
// needs 8.
//
// Lint notes: rst_n is an asynchronous reset of the flip-flops and also the
// `disable iff` condition of the handshake assertions below, which Verilator
// reports as a net used both ways (SYNCASYNCNET); the assertions are not
// logic. Package constants this module does not need are reported unused.
// The low three address bits and some strobe bits of mem_req are constant
// because every access is an aligned 64-bit word.
module mfoe_engine
  import mfoe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // CR9 contents
  input  cr9_t             cr9,
  // hand-off from the page walker
  input  logic             start,
  input  logic [VA_W-1:0]  va,
  input  logic             is_write,
  input  logic [63:0]      pte,
  input  logic [PA_W-1:0]  pte_addr,
  // result
  output logic             done,
  output logic             hit,
  output fault_e           fault,
  output logic [PFN_W-1:0] pfn,
  output logic             pte_rw,
  output logic             pte_dirty,
  // event strobes for performance counting
  output logic             ev_lock_wait,   // found the PTE locked by someone else
  output logic             ev_wrap,        // tail index wrapped to 1
  // memory
  output logic             mem_req_valid,
  output mem_req_t         mem_req,
  input  logic             mem_req_ready,
  input  logic             mem_rsp_valid,
  input  logic [63:0]      mem_rsp_rdata
);
  typedef enum logic [3:0] {
    M_IDLE, M_CHECK, M_HDR_RD, M_ENT_RD, M_LK_RD, M_LK_WR, M_LK_REL,
    M_POLL, M_ENT_WR0, M_ENT_WR1, M_HDR_WR, M_PTE_WR, M_DONE
  } m_state_e;

  m_state_e         state;
  logic             waiting;        // request accepted, response pending
  logic [VA_W-1:0]  va_q;
  logic             wr_q;
  logic [63:0]      pte_q;          // PTE as handed over by the walker
  logic [63:0]      cur_pte;        // PTE as read under lock
  logic [PA_W-1:0]  pte_addr_q;
  logic [31:0]      tail_q;
  pat_word_t        ent_q;
  logic             release_hit;    // after the unchanged write-back: done with a hit

  logic [PA_W-1:0]  tbl_base, ent_addr;
  logic [31:0]      tail_next;
  assign tbl_base  = {cr9.pfn, 12'h000};
  assign ent_addr  = tbl_base + (PA_W'(tail_q[15:0]) << 4);
  assign tail_next = (tail_q >= 32'(cr9.entries)) ? 32'd1 : tail_q + 32'd1;

  // words written by the engine
  pat_word_t        ent_used;
  logic [63:0]      pte_final;
  always_comb begin
    ent_used       = ent_q;
    ent_used.tgid  = pte_q[PTE_PFN_LO +: TGID_W];
    ent_used.used  = 1'b1;
    ent_used.valid = 1'b0;
    pte_final                      = cur_pte;
    pte_final[51:PTE_PFN_LO]       = '0;
    pte_final[PTE_PFN_LO +: PFN_W] = ent_q.pfn;
    pte_final[PTE_P]               = 1'b1;
    pte_final[PTE_A]               = 1'b1;
    pte_final[PTE_D]               = cur_pte[PTE_D] | wr_q;
    pte_final[PTE_LOCK]            = 1'b0;
  end

  // memory request
  always_comb begin
    mem_req       = '0;
    mem_req.wstrb = 8'hFF;
    mem_req_valid = !waiting;
    unique case (state)
      M_HDR_RD:  mem_req.addr = tbl_base;
      M_ENT_RD:  mem_req.addr = ent_addr;
      M_LK_RD:   begin mem_req.addr = pte_addr_q; mem_req.lock = 1'b1; end
      M_LK_WR:   begin mem_req.addr = pte_addr_q; mem_req.we = 1'b1;
                       mem_req.wdata = cur_pte | (64'd1 << PTE_LOCK); end
      M_LK_REL:  begin mem_req.addr = pte_addr_q; mem_req.we = 1'b1;
                       mem_req.wdata = cur_pte; end
      M_POLL:    mem_req.addr = pte_addr_q;
      M_ENT_WR0: begin mem_req.addr = ent_addr + PA_W'(8); mem_req.we = 1'b1;
                       mem_req.wdata = 64'(va_q); end
      M_ENT_WR1: begin mem_req.addr = ent_addr; mem_req.we = 1'b1;
                       mem_req.wdata = ent_used; end
      M_HDR_WR:  begin mem_req.addr = tbl_base; mem_req.we = 1'b1;
                       mem_req.wdata = {tail_next, 32'h0}; mem_req.wstrb = 8'hF0; end
      M_PTE_WR:  begin mem_req.addr = pte_addr_q; mem_req.we = 1'b1;
                       mem_req.wdata = pte_final; end
      default:   mem_req_valid = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= M_IDLE;
      waiting      <= 1'b0;
      va_q         <= '0;
      wr_q         <= 1'b0;
      pte_q        <= '0;
      cur_pte      <= '0;
      pte_addr_q   <= '0;
      tail_q       <= '0;
      ent_q        <= '0;
      release_hit  <= 1'b0;
      done         <= 1'b0;
      hit          <= 1'b0;
      fault        <= FLT_NONE;
      pfn          <= '0;
      pte_rw       <= 1'b0;
      pte_dirty    <= 1'b0;
      ev_lock_wait <= 1'b0;
      ev_wrap      <= 1'b0;
    end else begin
      done         <= 1'b0;
      ev_lock_wait <= 1'b0;
      ev_wrap      <= 1'b0;
      if (mem_req_valid && mem_req_ready) waiting <= 1'b1;
      if (mem_rsp_valid)                  waiting <= 1'b0;

      unique case (state)
        M_IDLE: if (start) begin
          va_q       <= va;
          wr_q       <= is_write;
          pte_q      <= pte;
          cur_pte    <= pte;
          pte_addr_q <= pte_addr;
          state      <= M_CHECK;
        end
        M_CHECK: begin
          // steps 1 and 2 of the paper: only a legal, MFOEable address goes on
          hit <= 1'b0;
          if (!pte_q[PTE_MFOE]) begin
            fault <= FLT_NOT_MFOE;  state <= M_DONE;
          end else if (wr_q && !pte_q[PTE_RW]) begin
            fault <= FLT_PROT;      state <= M_DONE;
          end else if (!cr9.enable) begin
            fault <= FLT_DISABLED;  state <= M_DONE;
          end else begin
            fault <= FLT_NONE;      state <= M_HDR_RD;
          end
        end
        M_HDR_RD: if (waiting && mem_rsp_valid) begin
          tail_q <= mem_rsp_rdata[63:32];
          if (mem_rsp_rdata[63:32] == 32'd0 ||
              mem_rsp_rdata[63:32] > 32'(cr9.entries)) begin
            fault <= FLT_EMPTY;  state <= M_DONE;
          end else begin
            state <= M_ENT_RD;
          end
        end
        M_ENT_RD: if (waiting && mem_rsp_valid) begin
          ent_q <= pat_word_t'(mem_rsp_rdata);
          if (!mem_rsp_rdata[0]) begin
            fault <= FLT_EMPTY;  state <= M_DONE;
          end else begin
            state <= M_LK_RD;
          end
        end
        M_LK_RD: if (waiting && mem_rsp_valid) begin
          cur_pte <= mem_rsp_rdata;
          if (mem_rsp_rdata[PTE_LOCK]) begin
            ev_lock_wait <= 1'b1;
            release_hit  <= 1'b0;
            state        <= M_LK_REL;             // then poll
          end else if (mem_rsp_rdata[PTE_P]) begin
            release_hit  <= 1'b1;                 // serviced meanwhile
            state        <= M_LK_REL;
          end else if (!mem_rsp_rdata[PTE_MFOE]) begin
            fault        <= FLT_NOT_MFOE;         // MFOEable withdrawn
            release_hit  <= 1'b0;
            state        <= M_LK_REL;
          end else begin
            state        <= M_LK_WR;
          end
        end
        M_LK_WR: if (waiting && mem_rsp_valid) begin
          cur_pte[PTE_LOCK] <= 1'b1;
          state             <= M_ENT_WR0;
        end
        M_LK_REL: if (waiting && mem_rsp_valid) begin
          if (release_hit) begin
            hit       <= 1'b1;
            pfn       <= pte_pfn(cur_pte);
            pte_rw    <= cur_pte[PTE_RW];
            pte_dirty <= cur_pte[PTE_D];
            state     <= M_DONE;
          end else if (fault != FLT_NONE) begin
            state     <= M_DONE;
          end else begin
            state     <= M_POLL;
          end
        end
        M_POLL: if (waiting && mem_rsp_valid) begin
          cur_pte <= mem_rsp_rdata;
          if (!mem_rsp_rdata[PTE_LOCK]) begin
            if (mem_rsp_rdata[PTE_P]) begin
              hit       <= 1'b1;
              pfn       <= pte_pfn(mem_rsp_rdata);
              pte_rw    <= mem_rsp_rdata[PTE_RW];
              pte_dirty <= mem_rsp_rdata[PTE_D];
              state     <= M_DONE;
            end else begin
              state     <= M_LK_RD;
            end
          end
        end
        M_ENT_WR0: if (waiting && mem_rsp_valid) state <= M_ENT_WR1;
        M_ENT_WR1: if (waiting && mem_rsp_valid) state <= M_HDR_WR;
        M_HDR_WR:  if (waiting && mem_rsp_valid) begin
          ev_wrap <= (tail_next == 32'd1);
          state   <= M_PTE_WR;
        end
        M_PTE_WR:  if (waiting && mem_rsp_valid) begin
          hit       <= 1'b1;
          pfn       <= ent_q.pfn;
          pte_rw    <= cur_pte[PTE_RW];
          pte_dirty <= pte_final[PTE_D];
          state     <= M_DONE;
        end
        M_DONE: begin
          done  <= 1'b1;
          state <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == M_IDLE);
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=> mem_req_valid);

endmodule
