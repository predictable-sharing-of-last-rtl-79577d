// tb_set_sequencer: drives the QLT/SQ with random enqueues and dequeues that
// respect the one-outstanding-request rule (a core waits in at most one
// queue) and compares every lookup with a reference of per-set FIFO queues.
// A directed prefix rebuilds the example of the set-sequencer illustration:
// c1 waits for set 3, c2 then c3 wait for set 5, so c2 and not c3 may take a
// line freed in set 5, and c3 may once c2 has been served.
module tb_set_sequencer;
  import llc_pkg::*;
  localparam int N = 4, SW = 5;
  logic clk = 0, rst_n = 0;
  logic [SW-1:0] lk_set, enq_set, deq_set;
  logic [1:0] lk_core, lk_head, enq_core;
  logic lk_has_queue, lk_permit, lk_queued, enq, deq, full_err;
  logic [N-1:0] queued;
  int checks = 0, failures = 0;

  set_sequencer #(.N_CORES(N), .SET_W(SW)) dut (.*);
  always #5 clk = ~clk;

  // reference: one queue of cores per set
  int ref_q [int][$];
  int ref_wait [N];   // set a core waits for, -1 if none

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic lookup_check(input int s, input int c);
    lk_set = SW'(s); lk_core = 2'(c);
    #1;
    begin
      automatic bit has = ref_q.exists(s) && ref_q[s].size() > 0;
      check(lk_has_queue == has, "has_queue");
      if (has) check(lk_head == ref_q[s][0], "head");
      check(lk_permit == (!has || ref_q[s][0] == c), "permit");
      check(lk_queued == (ref_wait[c] != -1), "queued");
    end
  endtask

  task automatic do_enq(input int s, input int c);
    enq = 1; enq_set = SW'(s); enq_core = 2'(c);
    @(posedge clk); #1 enq = 0;
    ref_q[s].push_back(c); ref_wait[c] = s;
  endtask

  task automatic do_deq(input int s);
    deq = 1; deq_set = SW'(s);
    @(posedge clk); #1 deq = 0;
    ref_wait[ref_q[s][0]] = -1;
    void'(ref_q[s].pop_front());
  endtask

  initial begin
    enq = 0; deq = 0; lk_set = '0; lk_core = '0; enq_set = '0; enq_core = '0; deq_set = '0;
    foreach (ref_wait[i]) ref_wait[i] = -1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // directed: the figure's example (cores c1..c3 are ids 0..2)
    do_enq(3, 0); do_enq(5, 1); do_enq(5, 2);
    lookup_check(5, 2); check(!lk_permit, "c3 must wait behind c2");
    lookup_check(5, 1); check(lk_permit, "c2 at head of set 5");
    lookup_check(3, 0); check(lk_permit, "c1 at head of set 3");
    lookup_check(7, 3); check(lk_permit && !lk_has_queue, "set without queue");
    do_deq(5);
    lookup_check(5, 2); check(lk_permit, "c3 after c2 served");
    do_deq(5); do_deq(3);
    lookup_check(5, 2); check(!lk_has_queue, "queues released");
    // random
    for (int i = 0; i < 3000; i++) begin
      automatic int c = $urandom % N;
      automatic int s = $urandom % 6;       // few sets, so queues get long
      lookup_check(s, c);
      lookup_check($urandom % 6, $urandom % N);
      if (ref_wait[c] == -1 && ($urandom % 2)) do_enq(s, c);
      else begin
        automatic int w = ref_wait[$urandom % N];
        if (w != -1) do_deq(w);
      end
      check(!full_err, "full_err");
      for (int k = 0; k < N; k++) check(queued[k] == (ref_wait[k] != -1), "queued bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
