// tb_llc_share_top: end-to-end run of the whole cache subsystem at its
// default sizes (4 cores, 4-way 16-set L2s, 16-way 32-set LLC, 50-cycle
// slots) with a DRAM model of fixed read latency.
//
// Each core is a traffic generator with one outstanding access to random
// lines of its own address range (ranges are disjoint, as in the paper's
// synthetic workloads).  Three phases, each from reset:
//  1. SS(1,4,4): all four cores share a one-set, four-way partition, the
//     worst-case setup; every latency must stay within the set-sequencer
//     bound (2(n-1)n+1)*N*SW = 5000 cycles.
//  2. SS(32,4,4): the four cores share 32 sets x 4 ways.
//  3. P(8,4): each core has a private 8-set, 4-way partition.
// Checked throughout: each access gets exactly one answer, latency bounds,
// and at the end of each phase the inclusion invariant (every line valid in
// an L2 is in the LLC with that core's presence bit).  Counted: L2 hits, LLC
// hits, fills, back-invalidations, entries freed by write-backs, unheld
// victims replaced, requests that wait, set-sequencer enqueues and blocks;
// each must occur at least once.
module tb_llc_share_top;
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

  task automatic core_run(input int c);
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
                       input int ways, input int rl, input int pc, input int bnd);
    rst_n = 0;
    core_req_valid = '0; core_req_write = '0;
    foreach (core_req_line[c]) core_req_line[c] = '0;
    for (int c = 0; c < N; c++) begin
      part_set_bits[c] = sets_bits[$bits(part_set_bits[0])-1:0];
      part_set_base[c] = private_parts ? SWID'(c << sets_bits) : '0;
      part_way_mask[c] = LW'((1 << ways) - 1);
    end
    range_lines = rl; per_core = pc; bound = bnd; max_lat = 0; max_bus_lat = 0; done_cnt = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    fork
      core_run(0); core_run(1); core_run(2); core_run(3);
    join
    check(done_cnt == N * pc, "all accesses answered");
    snapshot_llc();
    `CHECK_INCL(0) `CHECK_INCL(1) `CHECK_INCL(2) `CHECK_INCL(3)
    $display("%s: %0d accesses, max latency %0d cycles from the core, %0d from the first request slot (bound %0d)",
             name, done_cnt, max_lat, max_bus_lat, bnd);
  endtask

  initial begin
    core_req_valid = '0; core_req_write = '0;
    repeat (2) @(posedge clk);
    // 1. SS(1,4,4), 4096-byte address range per core
    phase("SS(1,4,4)", 0, 0, 4, 64, 150, (2 * (N - 1) * N + 1) * N * SLOT);
    // 2. SS(32,4,4), 8192-byte address range per core
    phase("SS(32,4,4)", 5, 0, 4, 128, 300, (2 * (N - 1) * N + 1) * N * SLOT);
    // 3. P(8,4): private partitions, 8192-byte range
    phase("P(8,4)", 3, 1, 4, 128, 300, 0);
    $display("events: l2hit=%0d llchit=%0d fill=%0d binv=%0d wbfree=%0d silent=%0d wait=%0d enq=%0d ssblock=%0d dramwr=%0d",
             n_l2hit, n_llchit, n_fill, n_binv, n_free, n_silent, n_wait, n_enq, n_block, n_dramwr);
    check(n_l2hit > 0,  "L2 hit happened");
    check(n_llchit > 0, "LLC hit happened");
    check(n_fill > 0,   "LLC fill happened");
    check(n_binv > 0,   "back-invalidation happened");
    check(n_free > 0,   "entry freed by write-back happened");
    check(n_silent > 0, "unheld victim replaced happened");
    check(n_wait > 0,   "request wait happened");
    check(n_enq > 0,    "set-sequencer enqueue happened");
    check(n_block > 0,  "set-sequencer block happened");
    check(n_dramwr > 0, "DRAM write-back happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
