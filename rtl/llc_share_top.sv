// llc_share_top: cache subsystem of an N-core safety-critical multicore in
// which several cores may share one partition of the last-level cache while
// keeping a bounded worst-case latency.
//
// Structure: one l2_controller per core (private L2 with its PRB and PWB),
// one tdm_bus with a one-slot-per-core TDM schedule, and one llc_controller
// (inclusive, partitioned L3 with the set sequencer) in front of DRAM.  The
// cores, their L1 caches and the DRAM are outside: the core_* ports take the
// requests that miss in a core's L1 caches, and the dram_* ports go to a
// memory that must complete a read within one TDM slot.
//
// Partition configuration is static input: for core i, part_set_base[i],
// part_set_bits[i] (log2 of its number of sets) and part_way_mask[i].  Cores
// given identical values share a partition; disjoint values isolate them.
//
// Timing: each core's request that misses in its L2 is answered in one of
// its own slots; with n cores sharing a partition the set sequencer bounds
// the wait by (2(n-1)n + 1) TDM periods of N_CORES*SLOT_CYC cycles.
module llc_share_top
  import llc_pkg::*;
#(
  parameter int unsigned N_CORES  = N_CORES_DEF,
  parameter int unsigned L2_SETS  = L2_SETS_DEF,
  parameter int unsigned L2_WAYS  = L2_WAYS_DEF,
  parameter int unsigned LLC_SETS = LLC_SETS_DEF,
  parameter int unsigned LLC_WAYS = LLC_WAYS_DEF,
  parameter int unsigned SLOT_CYC = SLOT_CYC_DEF,
  localparam int unsigned CW      = (N_CORES > 1) ? $clog2(N_CORES) : 1,
  localparam int unsigned SW      = (LLC_SETS > 1) ? $clog2(LLC_SETS) : 1,
  localparam int unsigned BW      = $clog2(SW + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // cores
  input  logic [N_CORES-1:0]  core_req_valid,
  input  line_t               core_req_line  [N_CORES],
  input  logic [N_CORES-1:0]  core_req_write,
  output logic [N_CORES-1:0]  core_req_ready,
  output logic [N_CORES-1:0]  core_resp_valid,
  output logic [N_CORES-1:0]  core_resp_hit,
  // DRAM
  output logic                dram_rd_valid,
  output line_t               dram_rd_line,
  input  logic                dram_rd_done,
  output logic                dram_wr_valid,
  output line_t               dram_wr_line,
  // partitions
  input  logic [SW-1:0]       part_set_base [N_CORES],
  input  logic [BW-1:0]       part_set_bits [N_CORES],
  input  logic [LLC_WAYS-1:0] part_way_mask [N_CORES],
  // schedule
  output logic [CW-1:0]       slot_owner,
  output logic                slot_start
);

  bus_msg_t           l2_msg [N_CORES];
  logic [N_CORES-1:0] grant, resp_to_core;
  bus_msg_t           llc_msg;
  logic               slot_last;
  logic               llc_resp;
  logic               binv_valid;
  line_t              binv_line;
  logic [N_CORES-1:0] binv_mask;

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    logic                          prb_busy;
    logic [$clog2(L2_SETS*L2_WAYS):0] pwb_count;
    l2_controller #(.SETS(L2_SETS), .WAYS(L2_WAYS)) u_l2 (
      .clk, .rst_n,
      .core_req_valid (core_req_valid[i]),
      .core_req_line  (core_req_line[i]),
      .core_req_write (core_req_write[i]),
      .core_req_ready (core_req_ready[i]),
      .core_resp_valid(core_resp_valid[i]),
      .core_resp_hit  (core_resp_hit[i]),
      .bus_msg        (l2_msg[i]),
      .bus_grant      (grant[i]),
      .llc_resp       (resp_to_core[i]),
      .binv_valid     (binv_valid),
      .binv_line      (binv_line),
      .binv_mine      (binv_mask[i]),
      .prb_busy       (prb_busy),
      .pwb_count      (pwb_count)
    );
  end

  tdm_bus #(.N_CORES(N_CORES), .SLOT_CYC(SLOT_CYC)) u_bus (
    .clk, .rst_n,
    .l2_msg, .grant, .resp_valid(resp_to_core),
    .llc_msg, .slot_owner, .slot_start, .slot_last,
    .llc_resp_valid(llc_resp)
  );

  logic ev_hit, ev_fill, ev_silent_evict, ev_binv, ev_wait, ev_ss_block, ev_enq, ev_wb_free;

  llc_controller #(.N_CORES(N_CORES), .SETS(LLC_SETS), .WAYS(LLC_WAYS)) u_llc (
    .clk, .rst_n,
    .msg(llc_msg), .owner(slot_owner), .slot_last,
    .resp_valid(llc_resp),
    .binv_valid, .binv_line, .binv_mask,
    .dram_rd_valid, .dram_rd_line, .dram_rd_done,
    .dram_wr_valid, .dram_wr_line,
    .part_set_base, .part_set_bits, .part_way_mask,
    .ev_hit, .ev_fill, .ev_silent_evict, .ev_binv, .ev_wait, .ev_ss_block, .ev_enq, .ev_wb_free
  );

endmodule
