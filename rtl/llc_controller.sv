// llc_controller: shared, set-associative, partitioned last-level cache (L3)
// that is inclusive of the private L2 caches, with the set sequencer that
// orders the cores waiting for a line in a full set.
//
// The LLC serves one bus message per TDM slot, from the slot owner:
//  * a write-back clears the owner's presence bit of the line.  If the line
//    had been chosen for eviction and no core holds it any more, its entry
//    becomes free (dirty lines are written to DRAM).
//  * a request that hits sets the owner's presence bit and is answered in the
//    same slot.
//  * a request that misses may occupy a free way of its set only if the set
//    sequencer permits it (no core waits for that set, or the owner is the
//    oldest waiting core).  A permitted miss with no free way takes a way that
//    no L2 holds (written to DRAM if dirty) and is filled in the same slot;
//    if every way is held by some L2, the LLC picks a victim, marks it
//    "evicting" and broadcasts a back-invalidation to its holders, and the
//    request waits.  A request that cannot complete is appended to the set
//    sequencer once, in the order requests first reached the LLC; it is
//    retried in the owner's later slots.
// A core's partition is given by configuration inputs: a base set, a number
// of sets (a power of two) and a way mask; cores that share a partition get
// the same values.  The set of a line is base + (line mod 2^bits).
//
// Timing: the message arrives in cycle 0 of the slot, the decision is taken
// in cycle 1, a DRAM read (if any) is issued in cycle 2 and the response
// pulse comes one cycle after the read completes, or in cycle 2 for a hit.
// The DRAM latency must therefore be a few cycles shorter than the slot.
// Following the paper: inclusion, partitions of sets and ways shared by
// several cores, the response only in the requester's slot, the set
// sequencer.  Own choices: full line address as tag, per-core presence bits,
// at most one eviction in progress per set, started only for a request the
// sequencer permits, preferring a way no L2 holds, round-robin victims, no
// data payload.
module llc_controller
  import llc_pkg::*;
#(
  parameter int unsigned N_CORES = N_CORES_DEF,
  parameter int unsigned SETS    = LLC_SETS_DEF,
  parameter int unsigned WAYS    = LLC_WAYS_DEF,
  localparam int unsigned CW     = (N_CORES > 1) ? $clog2(N_CORES) : 1,
  localparam int unsigned SW     = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WW     = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned BW     = $clog2(SW + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // bus
  input  bus_msg_t           msg,
  input  logic [CW-1:0]      owner,
  input  logic               slot_last,
  output logic               resp_valid,
  output logic               binv_valid,
  output line_t              binv_line,
  output logic [N_CORES-1:0] binv_mask,
  // DRAM
  output logic               dram_rd_valid,
  output line_t              dram_rd_line,
  input  logic               dram_rd_done,
  output logic               dram_wr_valid,
  output line_t              dram_wr_line,
  // partition configuration, per core
  input  logic [SW-1:0]      part_set_base [N_CORES],
  input  logic [BW-1:0]      part_set_bits [N_CORES],
  input  logic [WAYS-1:0]    part_way_mask [N_CORES],
  // observation pulses (cycle 1 of a slot)
  output logic               ev_hit,
  output logic               ev_fill,
  output logic               ev_silent_evict,
  output logic               ev_binv,
  output logic               ev_wait,
  output logic               ev_ss_block,
  output logic               ev_enq,
  output logic               ev_wb_free
);

  typedef enum logic [1:0] {S_IDLE, S_LOOK, S_DRAM} state_e;
  state_e state_q;

  // tag / state array
  logic               v_q    [SETS][WAYS];
  logic               ev_q   [SETS][WAYS];   // chosen for eviction, waiting for write-backs
  logic               d_q    [SETS][WAYS];
  line_t              tag_q  [SETS][WAYS];
  logic [N_CORES-1:0] pres_q [SETS][WAYS];
  logic [WW-1:0]      rr_q   [SETS];

  bus_msg_t           m_q;
  logic [CW-1:0]      o_q;
  logic [SW-1:0]      set_q;
  logic [WAYS-1:0]    mask_q;

  function automatic logic [SW-1:0] map_set(input line_t l, input logic [SW-1:0] base,
                                            input logic [BW-1:0] bits);
    logic [SW-1:0] off;
    off = SW'(l) & SW'((1 << bits) - 1);
    return SW'(base + off);
  endfunction

  // ---------------------------------------------------------------- lookup
  logic          hit, hit_ev;
  logic [WW-1:0] hit_w;
  logic          free_ok, sil_ok, evict_busy, vic_ok;
  logic [WW-1:0] free_w, sil_w, vic_w;
  logic [N_CORES-1:0] pres_after_wb;

  always_comb begin
    hit = 1'b0; hit_ev = 1'b0; hit_w = '0;
    free_ok = 1'b0; free_w = '0;
    sil_ok = 1'b0; sil_w = '0;
    evict_busy = 1'b0;
    vic_ok = 1'b0; vic_w = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (v_q[set_q][w] && tag_q[set_q][w] == m_q.line && !hit) begin
        hit = 1'b1; hit_ev = ev_q[set_q][w]; hit_w = WW'(w);
      end
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (mask_q[w]) begin
        if (!v_q[set_q][w]) begin free_ok = 1'b1; free_w = WW'(w); end
        if (v_q[set_q][w] && !ev_q[set_q][w] && pres_q[set_q][w] == '0) begin
          sil_ok = 1'b1; sil_w = WW'(w);
        end
        if (v_q[set_q][w] && ev_q[set_q][w]) evict_busy = 1'b1;
      end
    end
    // round-robin victim: first eligible way at or after the pointer
    for (int k = WAYS - 1; k >= 0; k--) begin
      automatic logic [WW-1:0] w = WW'((int'(rr_q[set_q]) + k) % WAYS);
      if (mask_q[w] && v_q[set_q][w] && !ev_q[set_q][w]) begin vic_ok = 1'b1; vic_w = w; end
    end
    pres_after_wb = pres_q[set_q][hit_w] & ~(N_CORES'(1) << o_q);
  end

  // ------------------------------------------------------- set sequencer
  logic          lk_has_queue, lk_permit, lk_queued;
  logic [CW-1:0] lk_head;
  logic          ss_enq, ss_deq;
  logic [N_CORES-1:0] ss_queued;
  logic          ss_full_err;

  set_sequencer #(.N_CORES(N_CORES), .SET_W(SW)) u_ss (
    .clk, .rst_n,
    .lk_set(set_q), .lk_core(o_q),
    .lk_has_queue, .lk_head, .lk_permit, .lk_queued,
    .enq(ss_enq), .enq_set(set_q), .enq_core(o_q),
    .deq(ss_deq), .deq_set(set_q),
    .queued(ss_queued), .full_err(ss_full_err)
  );

  // ---------------------------------------------------------- decision
  typedef enum logic [2:0] {A_NONE, A_WB, A_HIT, A_FILL_FREE, A_FILL_SILENT, A_BINV, A_WAIT} act_e;
  act_e act;
  wire  look = (state_q == S_LOOK);
  wire  is_req = (m_q.kind == MSG_REQ);

  always_comb begin
    act = A_NONE;
    if (look) begin
      if (!is_req)                         act = A_WB;
      else if (hit && !hit_ev)             act = A_HIT;
      else if (hit)                        act = A_WAIT;   // line still being recalled
      else if (lk_permit && free_ok)       act = A_FILL_FREE;
      else if (lk_permit && !evict_busy && sil_ok) act = A_FILL_SILENT;
      else if (lk_permit && !evict_busy && vic_ok) act = A_BINV;
      else                                 act = A_WAIT;
    end
    ss_enq = look && is_req && !lk_queued && !hit &&
             (act == A_BINV || act == A_WAIT);
    ss_deq = (act == A_FILL_FREE || act == A_FILL_SILENT) && lk_queued;
    ev_hit          = (act == A_HIT);
    ev_fill         = (act == A_FILL_FREE || act == A_FILL_SILENT);
    ev_silent_evict = (act == A_FILL_SILENT);
    ev_binv         = (act == A_BINV);
    ev_wait         = (act == A_WAIT);
    ev_ss_block     = look && is_req && !hit && !lk_permit && free_ok;
    ev_enq          = ss_enq;
    ev_wb_free      = (act == A_WB) && hit && ev_q[set_q][hit_w] && pres_after_wb == '0;
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      m_q           <= '0;
      o_q           <= '0;
      set_q         <= '0;
      mask_q        <= '0;
      resp_valid    <= 1'b0;
      binv_valid    <= 1'b0;
      binv_line     <= '0;
      binv_mask     <= '0;
      dram_rd_valid <= 1'b0;
      dram_rd_line  <= '0;
      dram_wr_valid <= 1'b0;
      dram_wr_line  <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          v_q[s][w]    <= 1'b0;
          ev_q[s][w]   <= 1'b0;
          d_q[s][w]    <= 1'b0;
          tag_q[s][w]  <= '0;
          pres_q[s][w] <= '0;
        end
      end
    end else begin
      resp_valid    <= 1'b0;
      binv_valid    <= 1'b0;
      dram_rd_valid <= 1'b0;
      dram_wr_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (msg.valid) begin
          m_q    <= msg;
          o_q    <= owner;
          set_q  <= map_set(msg.line, part_set_base[owner], part_set_bits[owner]);
          mask_q <= part_way_mask[owner];
          state_q <= S_LOOK;
        end
        S_LOOK: begin
          state_q <= S_IDLE;
          unique case (act)
            A_WB: if (hit) begin
              pres_q[set_q][hit_w] <= pres_after_wb;
              if (m_q.dirty) d_q[set_q][hit_w] <= 1'b1;
              if (ev_q[set_q][hit_w] && pres_after_wb == '0) begin
                v_q[set_q][hit_w]  <= 1'b0;
                ev_q[set_q][hit_w] <= 1'b0;
                if (d_q[set_q][hit_w] || m_q.dirty) begin
                  dram_wr_valid <= 1'b1;
                  dram_wr_line  <= m_q.line;
                end
              end
            end
            A_HIT: begin
              pres_q[set_q][hit_w][o_q] <= 1'b1;
              resp_valid <= 1'b1;
            end
            A_FILL_FREE, A_FILL_SILENT: begin
              automatic logic [WW-1:0] w = (act == A_FILL_FREE) ? free_w : sil_w;
              if (act == A_FILL_SILENT && d_q[set_q][w]) begin
                dram_wr_valid <= 1'b1;
                dram_wr_line  <= tag_q[set_q][w];
              end
              v_q[set_q][w]    <= 1'b1;
              ev_q[set_q][w]   <= 1'b0;
              d_q[set_q][w]    <= 1'b0;
              tag_q[set_q][w]  <= m_q.line;
              pres_q[set_q][w] <= N_CORES'(1) << o_q;
              dram_rd_valid    <= 1'b1;
              dram_rd_line     <= m_q.line;
              state_q          <= S_DRAM;
            end
            A_BINV: begin
              ev_q[set_q][vic_w] <= 1'b1;
              rr_q[set_q]        <= (vic_w == WW'(WAYS - 1)) ? '0 : vic_w + 1'b1;
              binv_valid         <= 1'b1;
              binv_line          <= tag_q[set_q][vic_w];
              binv_mask          <= pres_q[set_q][vic_w];
            end
            default: ;
          endcase
        end
        S_DRAM: if (dram_rd_done) begin
          resp_valid <= 1'b1;
          state_q    <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A DRAM read completes inside the slot that issued it.
  a_dram_in_slot: assert property (@(posedge clk) disable iff (!rst_n)
    (slot_last && state_q == S_DRAM) |-> dram_rd_done);
  // Inclusion: a write-back always finds its line in the LLC.
  a_wb_hits: assert property (@(posedge clk) disable iff (!rst_n)
    (look && !is_req) |-> hit);
  // The bus delivers a new message only after the previous one is done.
  a_one_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
    msg.valid |-> state_q == S_IDLE);

endmodule
