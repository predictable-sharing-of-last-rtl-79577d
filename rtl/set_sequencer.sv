// set_sequencer: keeps the cores that wait for a free line in a full LLC set
// in the order in which their requests first reached the LLC, and lets only
// the oldest of them take a freed line.
//
// Two structures, as in the set-sequencer illustration of the paper:
//  * the Queue Lookup Table (QLT) has one entry per LLC set that has at least
//    one waiting request; the entry maps the set to one queue of the SQ;
//  * the Sequencer (SQ) holds N_QUEUES queues of core identifiers, oldest at
//    the head.
// A lookup takes the slot owner's requested set, finds its QLT entry, selects
// that queue's head and compares it with the slot owner: the owner may occupy
// a free line of the set ("respond") if the set has no queue or the owner is
// at its head.  Because each core has at most one outstanding request, at
// most N_CORES sets can have waiting requests and no queue holds more than
// N_CORES entries, so N_QUEUES = DEPTH = N_CORES never overflows.
//
// Interface: lookup (lk_set, lk_core -> lk_has_queue, lk_head, lk_permit,
// lk_queued); enq (append a core to the queue of a set, allocating a QLT
// entry and a free queue if the set has none); deq (remove the head of a
// set's queue, releasing the QLT entry and queue when it empties).
// Timing: lookup is combinational; enq and deq act at the clock edge and are
// never asserted together.  Table sizes follow the figure (queues 1..N); the
// lowest-free-index allocation and shift-register queues are own choices.
module set_sequencer
  import llc_pkg::*;
#(
  parameter int unsigned N_CORES  = N_CORES_DEF,
  parameter int unsigned SET_W    = $clog2(LLC_SETS_DEF),
  parameter int unsigned N_QUEUES = N_CORES,
  parameter int unsigned DEPTH    = N_CORES,
  localparam int unsigned CW      = (N_CORES > 1) ? $clog2(N_CORES) : 1,
  localparam int unsigned QW      = (N_QUEUES > 1) ? $clog2(N_QUEUES) : 1,
  localparam int unsigned DIW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  logic [SET_W-1:0]  lk_set,
  input  logic [CW-1:0]     lk_core,
  output logic              lk_has_queue,
  output logic [CW-1:0]     lk_head,
  output logic              lk_permit,
  output logic              lk_queued,     // lk_core already waits somewhere
  // enqueue / dequeue
  input  logic              enq,
  input  logic [SET_W-1:0]  enq_set,
  input  logic [CW-1:0]     enq_core,
  input  logic              deq,
  input  logic [SET_W-1:0]  deq_set,
  output logic [N_CORES-1:0] queued,
  output logic              full_err       // enqueue found no room (never expected)
);

  // QLT
  logic             qlt_v   [N_QUEUES];
  logic [SET_W-1:0] qlt_set [N_QUEUES];
  logic [QW-1:0]    qlt_q   [N_QUEUES];
  // SQ
  logic [CW-1:0]    sq_core [N_QUEUES][DEPTH];
  logic [$clog2(DEPTH+1)-1:0] sq_cnt [N_QUEUES];
  logic [N_CORES-1:0] queued_q;

  // QLT search: which entry (if any) holds a set.
  function automatic logic qlt_find(input logic [SET_W-1:0] s, output logic [QW-1:0] e);
    qlt_find = 1'b0;
    e = '0;
    for (int i = 0; i < N_QUEUES; i++)
      if (qlt_v[i] && qlt_set[i] == s && !qlt_find) begin
        qlt_find = 1'b1;
        e = QW'(i);
      end
  endfunction

  logic [QW-1:0] lk_e, enq_e, deq_e, free_e, free_q;
  logic          enq_hit, deq_hit, free_e_ok, free_q_ok;
  logic [N_QUEUES-1:0] q_busy;

  always_comb begin
    lk_has_queue = qlt_find(lk_set, lk_e);
    lk_head      = sq_core[qlt_q[lk_e]][0];
    lk_permit    = !lk_has_queue || (lk_head == lk_core);
    lk_queued    = queued_q[lk_core];
    enq_hit      = qlt_find(enq_set, enq_e);
    deq_hit      = qlt_find(deq_set, deq_e);
    // lowest free QLT entry and lowest free queue
    q_busy    = '0;
    for (int i = 0; i < N_QUEUES; i++) if (qlt_v[i]) q_busy[qlt_q[i]] = 1'b1;
    free_e_ok = 1'b0; free_e = '0;
    free_q_ok = 1'b0; free_q = '0;
    for (int i = N_QUEUES - 1; i >= 0; i--) begin
      if (!qlt_v[i])  begin free_e_ok = 1'b1; free_e = QW'(i); end
      if (!q_busy[i]) begin free_q_ok = 1'b1; free_q = QW'(i); end
    end
    full_err = enq && (enq_hit ? (sq_cnt[qlt_q[enq_e]] == $bits(sq_cnt[0])'(DEPTH))
                               : !(free_e_ok && free_q_ok));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_QUEUES; i++) begin
        qlt_v[i]   <= 1'b0;
        qlt_set[i] <= '0;
        qlt_q[i]   <= '0;
        sq_cnt[i]  <= '0;
        for (int j = 0; j < DEPTH; j++) sq_core[i][j] <= '0;
      end
      queued_q <= '0;
    end else begin
      if (enq && !full_err) begin
        queued_q[enq_core] <= 1'b1;
        if (enq_hit) begin
          sq_core[qlt_q[enq_e]][DIW'(sq_cnt[qlt_q[enq_e]])] <= enq_core;
          sq_cnt[qlt_q[enq_e]] <= sq_cnt[qlt_q[enq_e]] + 1'b1;
        end else begin
          qlt_v[free_e]      <= 1'b1;
          qlt_set[free_e]    <= enq_set;
          qlt_q[free_e]      <= free_q;
          sq_core[free_q][0] <= enq_core;
          sq_cnt[free_q]     <= 1;
        end
      end
      if (deq && deq_hit) begin
        queued_q[sq_core[qlt_q[deq_e]][0]] <= 1'b0;
        for (int j = 0; j < DEPTH - 1; j++)
          sq_core[qlt_q[deq_e]][j] <= sq_core[qlt_q[deq_e]][j+1];
        sq_cnt[qlt_q[deq_e]] <= sq_cnt[qlt_q[deq_e]] - 1'b1;
        if (sq_cnt[qlt_q[deq_e]] == $bits(sq_cnt[0])'(1)) qlt_v[deq_e] <= 1'b0;
      end
    end
  end

  assign queued = queued_q;

  a_enq_deq_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(enq && deq));
  a_enq_once:          assert property (@(posedge clk) disable iff (!rst_n) enq |-> !queued_q[enq_core]);
  a_deq_known:         assert property (@(posedge clk) disable iff (!rst_n) deq |-> deq_hit);
  a_no_full:           assert property (@(posedge clk) disable iff (!rst_n) !full_err);

endmodule
