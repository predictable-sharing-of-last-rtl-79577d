// tb_l2_controller: directed scenarios on a 4-set, 2-way L2 controller, with
// the testbench playing the TDM bus and the LLC.  Every granted bus message
// is logged and compared with what the scenario requires:
//  * a miss produces a request that is re-offered until the LLC answers, and
//    the core is answered after the LLC response; a repeat access hits in
//    the next cycle;
//  * a miss in a full set queues the round-robin victim as a write-back with
//    its dirty bit, and request and write-back alternate on the bus;
//  * a back-invalidation for a held line queues its write-back, one for
//    another core or an absent line does nothing;
//  * a miss on a line whose write-back is still queued is not requested until
//    that write-back has been sent.
module tb_l2_controller;
  import llc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic core_req_valid, core_req_write, core_req_ready, core_resp_valid, core_resp_hit;
  line_t core_req_line, binv_line;
  bus_msg_t bus_msg;
  logic bus_grant, llc_resp, binv_valid, binv_mine, prb_busy;
  logic [3:0] pwb_count;
  int checks = 0, failures = 0;

  l2_controller #(.SETS(4), .WAYS(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  bus_msg_t sent[$];

  // Issue a core access; returns when accepted.
  task automatic access(input line_t l, input bit w);
    @(negedge clk);
    core_req_valid = 1; core_req_line = l; core_req_write = w;
    while (!core_req_ready) @(negedge clk);
    @(posedge clk); #1 core_req_valid = 0;
  endtask

  // One bus slot: grant whatever is offered; answer a request if 'answer'.
  task automatic slot(input bit answer);
    @(negedge clk);
    for (int k = 0; k < 4 && !bus_msg.valid; k++) @(negedge clk);
    if (bus_msg.valid) begin
      sent.push_back(bus_msg);
      bus_grant = 1;
      @(negedge clk); bus_grant = 0;
      if (sent[$].kind == MSG_REQ && answer) begin
        llc_resp = 1; @(negedge clk); llc_resp = 0;
      end
    end
    repeat (2) @(negedge clk);
  endtask

  task automatic expect_resp(input bit hit, input string what);
    int t = 0;
    while (!core_resp_valid && t < 20) begin @(posedge clk); #1; t++; end
    check(core_resp_valid && core_resp_hit == hit, what);
    @(posedge clk); #1;
  endtask

  task automatic binv(input line_t l, input bit mine);
    @(negedge clk);
    binv_valid = 1; binv_line = l; binv_mine = mine;
    @(negedge clk); binv_valid = 0; binv_mine = 0;
  endtask

  // line numbers: set = line mod 4
  localparam line_t A = 26'h10, B = 26'h20, C = 26'h30, D = 26'h11;

  initial begin
    core_req_valid = 0; core_req_line = '0; core_req_write = 0;
    bus_grant = 0; llc_resp = 0; binv_valid = 0; binv_line = '0; binv_mine = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // 1. miss on A: request offered, retried while unanswered, then answered
    access(A, 0);
    repeat (3) @(negedge clk);
    check(bus_msg.valid && bus_msg.kind == MSG_REQ && bus_msg.line == A, "miss A requested");
    check(!core_resp_valid, "no answer before LLC");
    slot(0); slot(0);
    check(sent.size() == 2 && sent[1].kind == MSG_REQ && sent[1].line == A, "request retried");
    check(prb_busy, "PRB holds request");
    slot(1);
    check(!prb_busy, "PRB cleared by response");
    // (response already pulsed inside slot; the core answer follows it)
    // 2. A again hits, next cycle
    access(A, 1);
    check(core_resp_valid && core_resp_hit, "A hit in the next cycle");
    // 3. B fills the second way of set 0
    access(B, 0);
    fork expect_resp(0, "B miss answered"); slot(1); join
    sent.delete();
    // 4. C: set full -> victim A (dirty) queued, request C offered too
    access(C, 0);
    repeat (3) @(negedge clk);
    check(pwb_count == 1, "victim queued");
    slot(0); slot(0); slot(0);
    check(sent.size() == 3, "three messages");
    if (sent.size() == 3) begin
      check(sent[0].kind != sent[1].kind && sent[1].kind != sent[2].kind, "PRB/PWB alternate");
      foreach (sent[i]) if (sent[i].kind == MSG_WB) begin
        check(sent[i].line == A && sent[i].dirty, "victim is dirty A");
      end
    end
    check(pwb_count == 0, "write-back left the PWB");
    fork expect_resp(0, "C answered"); slot(1); join
    sent.delete();
    // 5. back-invalidations
    binv(D, 1);
    check(pwb_count == 0, "absent line: nothing queued");
    binv(B, 0);
    check(pwb_count == 0, "other core's line: nothing queued");
    binv(B, 1);
    check(pwb_count == 1, "held line: write-back queued");
    slot(0);
    check(sent.size() == 1 && sent[0].kind == MSG_WB && sent[0].line == B && !sent[0].dirty, "clean WB of B");
    sent.delete();
    // 6. re-access of B misses; C hits
    access(C, 0);
    check(core_resp_valid && core_resp_hit, "C still held");
    // 7. miss on a line whose write-back is still queued
    binv(C, 1);
    check(pwb_count == 1, "C write-back queued");
    access(C, 0);
    repeat (4) @(negedge clk);
    check(!bus_msg.valid || bus_msg.kind == MSG_WB, "no request for C before its write-back");
    slot(0);
    check(sent[0].kind == MSG_WB && sent[0].line == C, "C write-back first");
    repeat (3) @(negedge clk);
    check(bus_msg.valid && bus_msg.kind == MSG_REQ && bus_msg.line == C, "then request C");
    fork expect_resp(0, "C re-fetched"); slot(1); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
