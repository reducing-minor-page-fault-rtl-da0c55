// tb_mem_arbiter: self-checking test of the lock-aware memory arbiter.
//
// Three requesters share the behavioural memory. Each first writes and reads
// back words of its own, checking that responses come back to the right
// requester with the right data. Then all three increment one shared
// counter many times at once, each increment being a locked read followed by
// a write: the final count is exact only if no other requester reaches
// memory between the two halves. A monitor on the memory side also checks
// that directly, and that every requester was served while all competed.
module tb_mem_arbiter;
  import mfoe_pkg::*;

  localparam int N = 3;
  localparam int INCS = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] up_req_valid = '0, up_req_ready, up_rsp_valid;
  mem_req_t     up_req [N];
  logic [63:0]  up_rsp_rdata;
  logic         dn_req_valid, dn_req_ready, dn_rsp_valid;
  mem_req_t     dn_req;
  logic [63:0]  dn_rsp_rdata;

  mem_arbiter #(.N(N)) dut (.*);

  mem_model #(.LAT(2)) u_mem (
    .clk, .rst_n, .req_valid(dn_req_valid), .req(dn_req), .req_ready(dn_req_ready),
    .rsp_valid(dn_rsp_valid), .rsp_rdata(dn_rsp_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one access by requester id
  task automatic access(input int id, input logic [PA_W-1:0] a, input logic we,
                        input logic [63:0] d, input logic lk, output logic [63:0] rdata);
    @(negedge clk);
    up_req[id]       = '{addr: a, we: we, wdata: d, wstrb: 8'hFF, lock: lk};
    up_req_valid[id] = 1'b1;
    #1;
    while (!up_req_ready[id]) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);                      // accepted at the posedge between
    up_req_valid[id] = 1'b0;
    while (!up_rsp_valid[id]) @(negedge clk);
    rdata = up_rsp_rdata;
  endtask

  // memory-side monitor: who issued each accepted request, and whether a
  // locked read was followed by an access of the same requester
  int last_lock_owner = -1;
  int served [N];
  always @(posedge clk) if (rst_n) begin
    if (dn_req_valid && dn_req_ready) begin
      int who;
      who = -1;
      for (int i = 0; i < N; i++) if (up_req_ready[i]) who = i;
      served[who]++;
      if (last_lock_owner >= 0) begin
        checks++;
        if (who != last_lock_owner) begin
          failures++;
          $display("FAIL: requester %0d got in during the lock of %0d", who, last_lock_owner);
        end
        last_lock_owner = -1;
      end
      if (dn_req.lock && !dn_req.we) last_lock_owner = who;
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [PA_W-1:0] CNT_ADDR = PA_W'('h8000);

  initial begin : main
    for (int i = 0; i < N; i++) begin up_req[i] = '0; served[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // private words, all requesters at once
    for (int id = 0; id < N; id++) begin
      fork
        automatic int me = id;
        begin
          logic [63:0] r;
          for (int k = 0; k < 6; k++) begin
            access(me, PA_W'('h1000 * (me + 1) + 8 * k), 1'b1, 64'(me * 1000 + k), 1'b0, r);
          end
          for (int k = 0; k < 6; k++) begin
            access(me, PA_W'('h1000 * (me + 1) + 8 * k), 1'b0, '0, 1'b0, r);
            check(r == 64'(me * 1000 + k), $sformatf("req %0d read %0d = %0d", me, k, r));
          end
        end
      join_none
    end
    wait fork;
    for (int i = 0; i < N; i++) check(served[i] == 12, $sformatf("requester %0d served %0d", i, served[i]));

    // shared counter, locked read-modify-write from all requesters
    u_mem.wr(CNT_ADDR, 64'd0);
    for (int id = 0; id < N; id++) begin
      fork
        automatic int me = id;
        begin
          logic [63:0] r, dummy;
          for (int k = 0; k < INCS; k++) begin
            access(me, CNT_ADDR, 1'b0, '0, 1'b1, r);
            repeat (me) @(negedge clk);          // widen the window
            access(me, CNT_ADDR, 1'b1, r + 1, 1'b0, dummy);
          end
        end
      join_none
    end
    wait fork;
    check(u_mem.rd(CNT_ADDR) == 64'(N * INCS),
          $sformatf("shared counter %0d, expected %0d", u_mem.rd(CNT_ADDR), N * INCS));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
