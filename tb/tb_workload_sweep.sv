// tb_workload_sweep: the synthetic workloads of the evaluation, run on the
// full-size subsystem (default parameters) with a 10-cycle DRAM.
//
// Each active core issues random accesses to lines of its own address range
// (disjoint ranges, 25% writes).  Two experiments:
//  * worst-case latency: partitions of one set, SS(1,2,4), SS(1,4,4) shared
//    by four cores and P(1,2), P(1,4) private, for address ranges of 1024 to
//    262144 bytes.  Every latency of a shared configuration must stay within
//    (2(n-1)n+1)*N*SW = 5000 cycles, counted from the first slot that
//    carries the request; the observed maxima are printed.
//  * fixed total capacity: SS(32,w,n) shared by n = 2 or 4 cores against
//    P(8,w) private partitions, for a few address ranges; the run time of
//    each configuration is printed for comparison.  Two cores sharing a
//    partition can exceed the n = 2 value of the formula (1000 cycles),
//    because a core's own L2 victims queue in the same write-back buffer as
//    the lines the LLC recalls; that figure is printed, not checked.
// The number of accesses per core is this testbench's choice (the paper does
// not give its trace lengths), so run times are only comparable with each
// other.  Checked: every access answered once, the latency bound, and the
// inclusion invariant after each run.
module tb_workload_sweep;
  import llc_pkg::*;
  localparam int N = N_CORES_DEF, SLOT = SLOT_CYC_DEF, DRAM_LAT = 10;
  localparam int LW = LLC_WAYS_DEF, SWID = $clog2(LLC_SETS_DEF);
  logic clk = 0, rst_n = 0;
  logic [N-1:0] core_req_valid, core_req_write, core_req_ready, core_resp_valid, core_resp_hit;
  line_t core_req_line [N];
  logic dram_rd_valid, dram_rd_done, dram_wr_valid;
  line_t dram_rd_line, dram_wr_line;
  logic [SWID-1:0] part_set_base [N];
  logic [$clog2(SWID+1)-1:0] part_set_bits [N];
  logic [LW-1:0] part_way_mask [N];
  logic [1:0] slot_owner;
  logic slot_start;
  int checks = 0, failures = 0;

  llc_share_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // DRAM: fixed read latency
  initial begin
    dram_rd_done = 0;
    forever begin
      @(posedge clk);
      if (dram_rd_valid) begin
        repeat (DRAM_LAT - 1) @(posedge clk);
        #1 dram_rd_done = 1;
        @(posedge clk); #1 dram_rd_done = 0;
      end
    end
  end

  // mechanism counters
  int n_l2hit, n_llchit, n_fill, n_binv, n_free, n_silent, n_wait, n_enq, n_block, n_dramwr;
  always @(posedge clk) if (rst_n) begin
    n_l2hit  += $countones(core_resp_valid & core_resp_hit);
    n_llchit += dut.ev_hit;
    n_fill   += dut.ev_fill;
    n_binv   += dut.ev_binv;
    n_free   += dut.ev_wb_free;
    n_silent += dut.ev_silent_evict;
    n_wait   += dut.ev_wait;
    n_enq    += dut.ev_enq;
    n_block  += dut.ev_ss_block;
    n_dramwr += dram_wr_valid;
  end

  // time of the first slot that carries each core's pending request: the
  // analysed latency runs from there to the response
  bit armed [N];
  longint first_req [N];
  always @(posedge clk)
    for (int c = 0; c < N; c++)
      if (armed[c] && dut.grant[c] && dut.l2_msg[c].kind == MSG_REQ) begin
        first_req[c] = $time / 10;
        armed[c] = 0;
      end

  int range_lines;     // lines in each core's address range
  int per_core;        // accesses per core
  int bound;           // latency bound in cycles, 0 = none
  int max_lat, max_bus_lat, done_cnt;

  int n_active;
  task automatic core_run(input int c);
    if (c >= n_active) return;
    for (int k = 0; k < per_core; k++) begin
      int t0, lat;
      repeat ($urandom % 8) @(negedge clk);
      core_req_line[c]  = line_t'(c * 26'h10000 + ($urandom % range_lines));
      core_req_write[c] = ($urandom % 4) == 0;
      core_req_valid[c] = 1;
      do @(posedge clk); while (!core_req_ready[c]);
      t0 = $time / 10;
      armed[c] = 1; first_req[c] = t0;
      #1 core_req_valid[c] = 0;
      while (!core_resp_valid[c]) begin @(posedge clk); #1; end
      lat = $time / 10 - t0;
      if (lat > max_lat) max_lat = lat;
      if (!armed[c]) begin
        automatic int blat = int'($time / 10 - first_req[c]);
        if (blat > max_bus_lat) max_bus_lat = blat;
        if (bound > 0) check(blat <= bound, "latency from first request slot within bound");
      end
      armed[c] = 0;
      @(posedge clk); #1;
      check(!core_resp_valid[c], "one answer per access");
      done_cnt++;
    end
  endtask

  // inclusion: every valid L2 line of core C is in the LLC with presence bit C
  logic [N-1:0] llc_map [line_t];
  task automatic snapshot_llc();
    llc_map.delete();
    for (int k = 0; k < LLC_SETS_DEF * LW; k++)
      if (dut.u_llc.v_q[k / LW][k % LW]) llc_map[dut.u_llc.tag_q[k / LW][k % LW]] = dut.u_llc.pres_q[k / LW][k % LW];
  endtask
  `define CHECK_INCL(C) \
    for (int k = 0; k < L2_SETS_DEF * L2_WAYS_DEF; k++) \
      if (dut.g_core[C].u_l2.v_q[k / L2_WAYS_DEF][k % L2_WAYS_DEF]) begin \
        automatic line_t l = dut.g_core[C].u_l2.tag_q[k / L2_WAYS_DEF][k % L2_WAYS_DEF]; \
        check(llc_map.exists(l) && llc_map[l][C], "inclusion"); \
      end

  task automatic phase(input string name, input int sets_bits, input bit private_parts,
                       input int ways, input int rl, input int pc, input int bnd, input int na = N);
    longint t_start;
    rst_n = 0;
    core_req_valid = '0; core_req_write = '0;
    foreach (core_req_line[c]) core_req_line[c] = '0;
    for (int c = 0; c < N; c++) begin
      part_set_bits[c] = sets_bits[$bits(part_set_bits[0])-1:0];
      part_set_base[c] = private_parts ? SWID'(c << sets_bits) : '0;
      part_way_mask[c] = LW'((1 << ways) - 1);
    end
    range_lines = rl; per_core = pc; bound = bnd; max_lat = 0; max_bus_lat = 0; done_cnt = 0; n_active = na;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    t_start = $time / 10;
    fork
      core_run(0); core_run(1); core_run(2); core_run(3);
    join
    check(done_cnt == na * pc, "all accesses answered");
    snapshot_llc();
    `CHECK_INCL(0) `CHECK_INCL(1) `CHECK_INCL(2) `CHECK_INCL(3)
    $display("%s range %0d B: %0d accesses, %0d cycles, max latency %0d from the core, %0d from the first request slot (bound %0d)",
             name, rl * LINE_BYTES, done_cnt, $time / 10 - t_start, max_lat, max_bus_lat, bnd);
  endtask

  initial begin
    automatic int wcl4 = (2 * (N - 1) * N + 1) * N * SLOT;
    automatic int wcl2 = (2 * (2 - 1) * 2 + 1) * N * SLOT;
    core_req_valid = '0; core_req_write = '0;
    repeat (2) @(posedge clk);
    // worst-case latency experiment: one-set partitions
    for (int r = 1024; r <= 262144; r *= 4) begin
      phase("SS(1,2,4)", 0, 0, 2, r / LINE_BYTES, 40, wcl4);
      phase("SS(1,4,4)", 0, 0, 4, r / LINE_BYTES, 40, wcl4);
      phase("P(1,2)",    0, 1, 2, r / LINE_BYTES, 40, 0);
      phase("P(1,4)",    0, 1, 4, r / LINE_BYTES, 40, 0);
    end
    // fixed total capacity: shared 32 sets against private 8 sets
    for (int r = 1024; r <= 16384; r *= 4) begin
      phase("2-core SS(32,2,2)", 5, 0, 2, r / LINE_BYTES, 150, 0, 2);
      $display("  (formula (2(n-1)n+1)*N*SW for n=2 gives %0d cycles; reported, not checked)", wcl2);
      phase("2-core P(8,2)",     3, 1, 2, r / LINE_BYTES, 150, 0, 2);
      phase("4-core SS(32,4,4)", 5, 0, 4, r / LINE_BYTES, 150, wcl4, 4);
      phase("4-core P(8,4)",     3, 1, 4, r / LINE_BYTES, 150, 0, 4);
    end
    $display("events: l2hit=%0d llchit=%0d fill=%0d binv=%0d wbfree=%0d silent=%0d wait=%0d enq=%0d ssblock=%0d dramwr=%0d",
             n_l2hit, n_llchit, n_fill, n_binv, n_free, n_silent, n_wait, n_enq, n_block, n_dramwr);
    check(n_block > 0, "set-sequencer block happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
