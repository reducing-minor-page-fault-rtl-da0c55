// mfoe_core: address translation of one core with the MFOE-enhanced page
// walker: TLB, four-level page walker, Minor Fault Offload Engine and the
// CR9 control register, sharing one memory port.
//
// A translation request (va, is_write) is accepted when req_ready is high.
// The core looks the page up in the TLB; on a hit it answers with the
// physical address. On a miss the page walker walks the page table. A
// present leaf refills the TLB; a non-present leaf is handed to the MFOE,
// which either services the minor fault and refills the TLB itself, or
// gives up. After any refill the access is retried and answered from the
// TLB, as the faulting instruction is re-executed in the paper. Whatever
// the walker or the MFOE gives up on is answered with resp_fault and a
// reason, which stands for the ordinary page fault exception to the kernel.
//
// CR9 is written by software (cr9_we/cr9_wdata) with the PFN of the core's
// pre-allocation table, its entry count and the MFOE enable bit; writing
// CR3 goes with tlb_flush. The walker and the MFOE never run at once; a
// two-way mem_arbiter merges their requests, passing the MFOE's locked PTE
// read through to the system arbiter.
//
// Timing: a TLB hit is answered 2 cycles after acceptance; a miss adds the
// walk (and the MFOE), one refill cycle and the retried lookup. The ev_*
// outputs pulse once per event for performance counting.
//
// The structure (TLB -> walker -> MFOE, CR9 holding the table's PFN, entry
// count and enable bit) follows the paper; the request/response interface
// and the retry through the TLB as a state of this block are this design's.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET) because the sub-blocks' handshake assertions
// use it in `disable iff`; the flip-flops all reset asynchronously.
module mfoe_core
  import mfoe_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // translation requests from the core's load/store unit
  input  logic             req_valid,
  input  logic [VA_W-1:0]  req_va,
  input  logic             req_write,
  output logic             req_ready,
  output logic             resp_valid,
  output logic [PA_W-1:0]  resp_pa,
  output logic             resp_fault,
  output fault_e           resp_fault_code,
  // control registers
  input  logic [63:0]      cr3,
  input  logic             tlb_flush,
  input  logic             cr9_we,
  input  logic [63:0]      cr9_wdata,
  output logic [63:0]      cr9_q,
  // events
  output logic             ev_tlb_hit,
  output logic             ev_walk,
  output logic             ev_mfoe_start,
  output logic             ev_mfoe_hit,
  output logic             ev_mfoe_miss,
  output logic             ev_lock_wait,
  output logic             ev_wrap,
  // memory
  output logic             mem_req_valid,
  output mem_req_t         mem_req,
  input  logic             mem_req_ready,
  input  logic             mem_rsp_valid,
  input  logic [63:0]      mem_rsp_rdata
);
  typedef enum logic [2:0] {C_IDLE, C_LOOKUP, C_WALK, C_MFOE, C_FILL} c_state_e;

  c_state_e        state;
  logic [VA_W-1:0] va_q;
  logic            wr_q;
  logic            retried;

  // CR9
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cr9_q <= '0;
    else if (cr9_we) cr9_q <= cr9_wdata;
  end
  cr9_t cr9;
  assign cr9 = cr9_decode(cr9_q);

  // TLB
  logic             lk_hit;
  logic [PFN_W-1:0] lk_pfn;
  logic             fill_valid, fill_rw, fill_dirty;
  logic [PFN_W-1:0] fill_pfn;

  tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .lk_vpn(va_q[VA_W-1:12]), .lk_write(wr_q), .lk_hit, .lk_pfn,
    .fill_valid, .fill_vpn(va_q[VA_W-1:12]), .fill_pfn, .fill_rw, .fill_dirty,
    .flush(tlb_flush)
  );

  // arbiter ports: walker is requester 0, MFOE requester 1
  logic [1:0]  a_req_valid, a_req_ready, a_rsp_valid;
  logic [63:0] a_rsp_rdata;
  mem_req_t    a_req [2];

  // page walker
  logic             w_start, w_done, w_rw, w_dirty;
  logic [1:0]       w_result;
  fault_e           w_fault;
  logic [PFN_W-1:0] w_pfn;
  logic [63:0]      w_pte;
  logic [PA_W-1:0]  w_pte_addr;
  logic             w_req_valid, w_req_ready;
  mem_req_t         w_req;

  page_walker u_walker (
    .clk, .rst_n,
    .start(w_start), .va(va_q), .is_write(wr_q), .cr3,
    .done(w_done), .result(w_result), .fault(w_fault), .pfn(w_pfn),
    .pte_rw(w_rw), .pte_dirty(w_dirty), .leaf_pte(w_pte), .leaf_addr(w_pte_addr),
    .mem_req_valid(w_req_valid), .mem_req(w_req), .mem_req_ready(w_req_ready),
    .mem_rsp_valid(a_rsp_valid[0]), .mem_rsp_rdata(a_rsp_rdata)
  );

  // MFOE
  logic             m_start, m_done, m_hit, m_rw, m_dirty;
  fault_e           m_fault;
  logic [PFN_W-1:0] m_pfn;
  logic             m_req_valid, m_req_ready;
  mem_req_t         m_req;

  mfoe_engine u_mfoe (
    .clk, .rst_n, .cr9,
    .start(m_start), .va(va_q), .is_write(wr_q), .pte(w_pte), .pte_addr(w_pte_addr),
    .done(m_done), .hit(m_hit), .fault(m_fault), .pfn(m_pfn),
    .pte_rw(m_rw), .pte_dirty(m_dirty),
    .ev_lock_wait, .ev_wrap,
    .mem_req_valid(m_req_valid), .mem_req(m_req), .mem_req_ready(m_req_ready),
    .mem_rsp_valid(a_rsp_valid[1]), .mem_rsp_rdata(a_rsp_rdata)
  );

  // walker (0) and MFOE (1) share the core's memory port
  assign a_req_valid = {m_req_valid, w_req_valid};
  assign a_req[0]    = w_req;
  assign a_req[1]    = m_req;
  assign w_req_ready = a_req_ready[0];
  assign m_req_ready = a_req_ready[1];

  mem_arbiter #(.N(2)) u_arb (
    .clk, .rst_n,
    .up_req_valid(a_req_valid), .up_req(a_req), .up_req_ready(a_req_ready),
    .up_rsp_valid(a_rsp_valid), .up_rsp_rdata(a_rsp_rdata),
    .dn_req_valid(mem_req_valid), .dn_req(mem_req), .dn_req_ready(mem_req_ready),
    .dn_rsp_valid(mem_rsp_valid), .dn_rsp_rdata(mem_rsp_rdata)
  );

  // control
  assign req_ready = (state == C_IDLE);
  assign w_start   = (state == C_LOOKUP) && !lk_hit && !retried;

  always_comb begin
    fill_valid = 1'b0;
    fill_pfn   = w_pfn;
    fill_rw    = w_rw;
    fill_dirty = w_dirty;
    if (state == C_WALK && w_done && w_result == 2'd0) begin
      fill_valid = 1'b1;
    end else if (state == C_MFOE && m_done && m_hit) begin
      fill_valid = 1'b1;
      fill_pfn   = m_pfn;
      fill_rw    = m_rw;
      fill_dirty = m_dirty;
    end
  end

  assign m_start       = (state == C_WALK) && w_done && w_result == 2'd2;
  assign ev_tlb_hit    = (state == C_LOOKUP) && lk_hit && !retried;
  assign ev_walk       = w_start;
  assign ev_mfoe_start = m_start;
  assign ev_mfoe_hit   = (state == C_MFOE) && m_done && m_hit;
  assign ev_mfoe_miss  = (state == C_MFOE) && m_done && !m_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= C_IDLE;
      va_q            <= '0;
      wr_q            <= 1'b0;
      retried         <= 1'b0;
      resp_valid      <= 1'b0;
      resp_pa         <= '0;
      resp_fault      <= 1'b0;
      resp_fault_code <= FLT_NONE;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        C_IDLE: if (req_valid) begin
          va_q    <= req_va;
          wr_q    <= req_write;
          retried <= 1'b0;
          state   <= C_LOOKUP;
        end
        C_LOOKUP: begin
          if (lk_hit) begin
            resp_valid      <= 1'b1;
            resp_pa         <= {lk_pfn, va_q[11:0]};
            resp_fault      <= 1'b0;
            resp_fault_code <= FLT_NONE;
            state           <= C_IDLE;
          end else if (retried) begin
            // refilled entry already gone (flush): walk again
            retried <= 1'b0;
          end else begin
            state <= C_WALK;
          end
        end
        C_WALK: if (w_done) begin
          unique case (w_result)
            2'd0:    state <= C_FILL;
            2'd2:    state <= C_MFOE;
            default: begin
              resp_valid      <= 1'b1;
              resp_fault      <= 1'b1;
              resp_fault_code <= w_fault;
              state           <= C_IDLE;
            end
          endcase
        end
        C_MFOE: if (m_done) begin
          if (m_hit) begin
            state <= C_FILL;
          end else begin
            resp_valid      <= 1'b1;
            resp_fault      <= 1'b1;
            resp_fault_code <= m_fault;
            state           <= C_IDLE;
          end
        end
        C_FILL: begin
          retried <= 1'b1;
          state   <= C_LOOKUP;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
