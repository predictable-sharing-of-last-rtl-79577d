// tb_llc_controller: directed walk through the shared-partition scenarios of
// a 4-core, 4-set, 2-way LLC, with the testbench playing the TDM bus (one
// message per "slot", slot length 12 cycles) and a DRAM that answers reads
// after 3 cycles.  The sequence follows the paper's examples with the set
// sequencer in place: a request to a full set whose lines are held by
// another core starts a back-invalidation and waits; a second core asking
// for the same set queues behind it; the holder's write-back frees an entry
// that the second core may not take (it is not at the head) while the first
// core may; then the second core is served in turn.  Also checked: hits,
// dirty victims written to DRAM, a line no L2 holds replaced at once, and a
// private partition (one set, one way) that isolates a core.
module tb_llc_controller;
  import llc_pkg::*;
  localparam int N = 4, S = 4, W = 2, SLOT = 12;
  logic clk = 0, rst_n = 0;
  bus_msg_t msg;
  logic [1:0] owner;
  logic slot_last, resp_valid, binv_valid, dram_rd_valid, dram_rd_done, dram_wr_valid;
  line_t binv_line, dram_rd_line, dram_wr_line;
  logic [N-1:0] binv_mask;
  logic [1:0] part_set_base [N];
  logic [1:0] part_set_bits [N];
  logic [W-1:0] part_way_mask [N];
  logic ev_hit, ev_fill, ev_silent_evict, ev_binv, ev_wait, ev_ss_block, ev_enq, ev_wb_free;
  int checks = 0, failures = 0;

  llc_controller #(.N_CORES(N), .SETS(S), .WAYS(W)) dut (.*);
  always #5 clk = ~clk;

  // DRAM model: fixed 3-cycle read latency
  initial begin
    dram_rd_done = 0;
    forever begin
      @(posedge clk);
      if (dram_rd_valid) begin
        repeat (2) @(posedge clk);
        #1 dram_rd_done = 1;
        @(posedge clk); #1 dram_rd_done = 0;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // results of the last slot
  bit got_resp, got_binv, got_rd, got_wr, got_block, got_enq, got_free, got_silent, got_hit;
  line_t last_binv, last_wr, last_rd;
  logic [N-1:0] last_mask;

  task automatic send(input int core, input msg_kind_e k, input line_t l, input bit dirty);
    @(negedge clk);
    msg = '0; msg.valid = 1; msg.kind = k; msg.line = l; msg.dirty = dirty;
    owner = 2'(core);
    {got_resp, got_binv, got_rd, got_wr, got_block, got_enq, got_free, got_silent, got_hit} = '0;
    @(negedge clk); msg.valid = 0;
    for (int c = 1; c < SLOT; c++) begin
      slot_last = (c == SLOT - 1);
      if (resp_valid) got_resp = 1;
      if (binv_valid) begin got_binv = 1; last_binv = binv_line; last_mask = binv_mask; end
      if (dram_rd_valid) begin got_rd = 1; last_rd = dram_rd_line; end
      if (dram_wr_valid) begin got_wr = 1; last_wr = dram_wr_line; end
      if (ev_ss_block) got_block = 1;
      if (ev_enq) got_enq = 1;
      if (ev_wb_free) got_free = 1;
      if (ev_silent_evict) got_silent = 1;
      if (ev_hit) got_hit = 1;
      @(negedge clk);
    end
    slot_last = 0;
  endtask

  // lines of LLC set 0 in the shared partition (set = line mod 4)
  localparam line_t L1 = 26'h04, L2 = 26'h08, X = 26'h0C, Y = 26'h10, Z = 26'h14;
  line_t other;

  initial begin
    msg = '0; owner = '0; slot_last = 0;
    for (int c = 0; c < N; c++) begin
      part_set_base[c] = 0; part_set_bits[c] = 2; part_way_mask[c] = 2'b11;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // core 2 fills both ways of set 0
    send(2, MSG_REQ, L1, 0);
    check(got_resp && got_rd && last_rd == L1 && !got_binv, "L1 filled from DRAM, answered in slot");
    send(2, MSG_REQ, L2, 0);
    check(got_resp && got_rd && last_rd == L2, "L2 filled");
    send(2, MSG_REQ, L1, 0);
    check(got_resp && got_hit && !got_rd, "L1 hit, no DRAM access");
    // core 0 misses on X: set full, all lines held by core 2 -> back-invalidation
    send(0, MSG_REQ, X, 0);
    check(!got_resp && got_binv && last_mask == 4'b0100 && (last_binv == L1 || last_binv == L2),
          "X: victim recalled from core 2");
    check(got_enq, "X: core 0 queued");
    other = (last_binv == L1) ? L2 : L1;
    // core 1 misses on Y in the same set: waits, queued behind core 0, no second eviction
    send(1, MSG_REQ, Y, 0);
    check(!got_resp && !got_binv && got_enq, "Y: core 1 queued, one eviction at a time");
    // core 2 writes the victim back (dirty): entry freed, written to DRAM
    send(2, MSG_WB, last_binv, 1);
    check(got_free && got_wr && last_wr == last_binv, "victim freed and written to DRAM");
    // core 1 retries: a free way exists but core 0 is at the head
    send(1, MSG_REQ, Y, 0);
    check(!got_resp && got_block && !got_binv, "Y blocked by the set sequencer");
    // core 0 retries: takes the freed way
    send(0, MSG_REQ, X, 0);
    check(got_resp && got_rd && last_rd == X, "X served in core 0's slot");
    // core 1 retries: now the head, set full -> recall the other line of core 2
    send(1, MSG_REQ, Y, 0);
    check(!got_resp && got_binv && last_binv == other && last_mask == 4'b0100, "Y: second recall");
    send(2, MSG_WB, other, 0);
    check(got_free && !got_wr, "clean victim freed without DRAM write");
    send(1, MSG_REQ, Y, 0);
    check(got_resp && last_rd == Y, "Y served");
    // core 0 evicts X from its L2 (dirty): X stays in the LLC, held by nobody
    send(0, MSG_WB, X, 1);
    check(!got_free && !got_wr, "own write-back keeps the line");
    send(3, MSG_REQ, Z, 0);
    check(got_resp && got_silent && got_wr && last_wr == X && !got_binv,
          "Z replaces the unheld dirty X at once");
    send(0, MSG_REQ, X, 0);
    check(!got_resp && got_binv, "X gone from the LLC");
    // private partition for core 3: set 2, way 0 only
    part_set_base[3] = 2; part_set_bits[3] = 0; part_way_mask[3] = 2'b01;
    send(3, MSG_REQ, 26'h21, 0);
    check(got_resp && got_rd, "private partition fill");
    send(3, MSG_REQ, 26'h22, 0);
    check(!got_resp && got_binv && last_binv == 26'h21 && last_mask == 4'b1000,
          "one-way private partition recalls its own line");
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
