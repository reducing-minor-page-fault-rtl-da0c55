// mem_arbiter: shares one 64-bit memory port among N requesters and
// implements the locked read-modify-write the MFOE needs on a PTE.
//
// Each requester has a valid/ready request channel (mfoe_pkg::mem_req_t) and
// a response strobe; reads and writes both get exactly one response. The
// arbiter lets one request be outstanding downstream at a time. While idle it
// grants requesters in round-robin order. A read with `lock` set keeps the
// port reserved for the same requester after its response: no other
// requester is granted until that requester's next access (normally the
// write half of the read-modify-write) has completed. This is how a locked
// read of a PTE blocks every other core that wants to read it, as the paper
// asks for the PTE bit lock; holding the whole port rather than one address
// is this design's simplification.
//
// Timing: the downstream request is combinational from the granted
// requester; the downstream response must come at least one cycle after the
// request was accepted, and is routed back combinationally to its owner.
//
// Lint notes: rst_n is an asynchronous reset of the flip-flops and also the
// `disable iff` condition of the handshake assertions below, which Verilator
// reports as a net used both ways (SYNCASYNCNET); the assertions are not
// logic. Package constants this module does not need are reported unused.
// up_rsp_rdata is the downstream read data passed straight to every
// requester, qualified per requester by up_rsp_valid, so it is driven from an
// input by design.
module mem_arbiter
  import mfoe_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  // requesters
  input  logic [N-1:0]     up_req_valid,
  input  mem_req_t         up_req [N],
  output logic [N-1:0]     up_req_ready,
  output logic [N-1:0]     up_rsp_valid,
  output logic [63:0]      up_rsp_rdata,
  // memory side
  output logic             dn_req_valid,
  output mem_req_t         dn_req,
  input  logic             dn_req_ready,
  input  logic             dn_rsp_valid,
  input  logic [63:0]      dn_rsp_rdata
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  typedef enum logic [1:0] {ARB_IDLE, ARB_BUSY, ARB_LOCKED} arb_state_e;

  arb_state_e    state;
  logic [IW-1:0] owner, rr_ptr, grant;
  logic          grant_ok, pend_lock;

  // pick the requester
  always_comb begin
    grant    = '0;
    grant_ok = 1'b0;
    if (state == ARB_LOCKED) begin
      grant    = owner;
      grant_ok = up_req_valid[owner];
    end else if (state == ARB_IDLE) begin
      for (int unsigned k = 0; k < N; k++) begin
        if (!grant_ok && up_req_valid[(int'(rr_ptr) + k) % N]) begin
          grant    = IW'((int'(rr_ptr) + k) % N);
          grant_ok = 1'b1;
        end
      end
    end
  end

  always_comb begin
    dn_req_valid = grant_ok;
    dn_req       = up_req[grant];
    up_req_ready = '0;
    up_req_ready[grant] = grant_ok && dn_req_ready;
    up_rsp_valid = '0;
    up_rsp_valid[owner] = (state == ARB_BUSY) && dn_rsp_valid;
    up_rsp_rdata = dn_rsp_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ARB_IDLE;
      owner     <= '0;
      rr_ptr    <= '0;
      pend_lock <= 1'b0;
    end else begin
      unique case (state)
        ARB_IDLE, ARB_LOCKED: begin
          if (grant_ok && dn_req_ready) begin
            state     <= ARB_BUSY;
            owner     <= grant;
            pend_lock <= up_req[grant].lock && !up_req[grant].we;
          end
        end
        ARB_BUSY: begin
          if (dn_rsp_valid) begin
            if (pend_lock) begin
              state <= ARB_LOCKED;
            end else begin
              state  <= ARB_IDLE;
              rr_ptr <= (owner == IW'(N - 1)) ? '0 : owner + 1'b1;
            end
          end
        end
        default: state <= ARB_IDLE;
      endcase
    end
  end

  // A response can only come for the one outstanding request.
  a_rsp_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    dn_rsp_valid |-> state == ARB_BUSY);
  // While locked, only the owner is ever granted.
  a_lock_owner_only: assert property (@(posedge clk) disable iff (!rst_n)
    (state == ARB_LOCKED && grant_ok) |-> grant == owner);

endmodule
