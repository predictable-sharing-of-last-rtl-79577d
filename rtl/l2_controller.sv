// l2_controller: private L2 cache of one core (tag/state array and
// controller) with its pending request buffer (PRB) and pending write-back
// buffer (PWB), the bus side of the per-core block of the system overview.
//
// The core issues one request at a time (read or write of a line).  A hit is
// answered in the next cycle.  On a miss the controller makes room in the
// set first: a free way is reserved, or the round-robin victim is removed
// and its line queued in the PWB as a write-back.  The request then goes to
// the PRB and is sent to the LLC in the core's TDM slot, alternating with
// write-backs; when the LLC answers, the line is installed in the reserved
// way and the core is answered.  Because the LLC is inclusive, it can recall
// a line (back-invalidation): the controller drops the line and queues its
// write-back, which frees the LLC entry once it reaches the LLC.  A miss on a
// line whose write-back is still queued waits until that write-back has left,
// so the LLC never sees the request overtake the write-back.
//
// Interface: core_req_* / core_resp_* to the core; bus_msg / bus_grant /
// llc_resp to the TDM bus; binv_valid / binv_line / binv_mine from the LLC's
// broadcast.  Timing: core_req_ready is low while a request is outstanding
// or a back-invalidation arrives; core_resp_valid is a one-cycle pulse.
// Following the paper: inclusion, PRB/PWB, one outstanding request,
// round-robin between PRB and PWB.  Own choices: tags hold the full line
// address, no data is stored, every L2 eviction (clean or dirty) is written
// back so that the LLC knows which cores hold a line, round-robin victims.
module l2_controller
  import llc_pkg::*;
#(
  parameter int unsigned SETS      = L2_SETS_DEF,
  parameter int unsigned WAYS      = L2_WAYS_DEF,
  parameter int unsigned PWB_DEPTH = SETS * WAYS,
  localparam int unsigned SW       = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WW       = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  // core side
  input  logic     core_req_valid,
  input  line_t    core_req_line,
  input  logic     core_req_write,
  output logic     core_req_ready,
  output logic     core_resp_valid,
  output logic     core_resp_hit,
  // bus side
  output bus_msg_t bus_msg,
  input  logic     bus_grant,
  input  logic     llc_resp,
  input  logic     binv_valid,
  input  line_t    binv_line,
  input  logic     binv_mine,
  // observation
  output logic     prb_busy,
  output logic [$clog2(PWB_DEPTH):0] pwb_count
);

  typedef enum logic [1:0] {S_IDLE, S_MISS, S_WAIT} state_e;
  state_e state_q;

  logic            v_q   [SETS][WAYS];
  logic            d_q   [SETS][WAYS];
  line_t           tag_q [SETS][WAYS];
  logic [WW-1:0]   rr_q  [SETS];

  line_t           req_line_q;
  logic            req_write_q;
  logic [WW-1:0]   resv_way_q;

  // PWB and PRB
  logic      pwb_push, pwb_pop, pwb_empty, pwb_full, pwb_match;
  wb_entry_t pwb_in, pwb_head;
  logic      prb_load, prb_clear;
  prb_entry_t prb;

  pwb_fifo #(.DEPTH(PWB_DEPTH)) u_pwb (
    .clk, .rst_n,
    .push(pwb_push), .push_data(pwb_in), .pop(pwb_pop),
    .head(pwb_head), .empty(pwb_empty), .full(pwb_full), .count(pwb_count),
    .match_line(req_line_q), .match(pwb_match)
  );

  prb_arbiter u_prb (
    .clk, .rst_n,
    .load(prb_load), .load_line(req_line_q), .load_write(req_write_q),
    .clear(prb_clear),
    .pwb_head, .pwb_empty, .pwb_pop,
    .msg(bus_msg), .grant(bus_grant), .prb
  );

  function automatic logic [SW-1:0] set_of(input line_t l);
    return SW'(l % SETS);
  endfunction

  // core lookup
  logic          c_hit;
  logic [WW-1:0] c_way;
  always_comb begin
    c_hit = 1'b0; c_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (v_q[set_of(core_req_line)][w] && tag_q[set_of(core_req_line)][w] == core_req_line && !c_hit) begin
        c_hit = 1'b1; c_way = WW'(w);
      end
  end

  // back-invalidation lookup
  logic          b_hit;
  logic [WW-1:0] b_way;
  always_comb begin
    b_hit = 1'b0; b_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (v_q[set_of(binv_line)][w] && tag_q[set_of(binv_line)][w] == binv_line && !b_hit) begin
        b_hit = 1'b1; b_way = WW'(w);
      end
  end

  // miss allocation: a free way, else the round-robin victim
  logic          m_free;
  logic [WW-1:0] m_way;
  logic [SW-1:0] m_set;
  always_comb begin
    m_set  = set_of(req_line_q);
    m_free = 1'b0; m_way = rr_q[m_set];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!v_q[m_set][w]) begin m_free = 1'b1; m_way = WW'(w); end
  end

  assign core_req_ready = (state_q == S_IDLE) && !binv_valid;
  wire accept   = core_req_valid && core_req_ready;
  wire b_act    = binv_valid && binv_mine && b_hit;
  wire m_go     = (state_q == S_MISS) && !binv_valid && !pwb_match;

  always_comb begin
    pwb_push = 1'b0;
    pwb_in   = '0;
    if (b_act) begin
      pwb_push = 1'b1;
      pwb_in   = '{line: binv_line, dirty: d_q[set_of(binv_line)][b_way]};
    end else if (m_go && !m_free) begin
      pwb_push = 1'b1;
      pwb_in   = '{line: tag_q[m_set][m_way], dirty: d_q[m_set][m_way]};
    end
  end

  assign prb_load  = m_go;
  assign prb_clear = (state_q == S_WAIT) && llc_resp;
  assign prb_busy  = prb.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q         <= S_IDLE;
      core_resp_valid <= 1'b0;
      core_resp_hit   <= 1'b0;
      req_line_q      <= '0;
      req_write_q     <= 1'b0;
      resv_way_q      <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          v_q[s][w]   <= 1'b0;
          d_q[s][w]   <= 1'b0;
          tag_q[s][w] <= '0;
        end
      end
    end else begin
      core_resp_valid <= 1'b0;
      core_resp_hit   <= 1'b0;
      if (b_act) v_q[set_of(binv_line)][b_way] <= 1'b0;
      unique case (state_q)
        S_IDLE: if (accept) begin
          if (c_hit) begin
            core_resp_valid <= 1'b1;
            core_resp_hit   <= 1'b1;
            if (core_req_write) d_q[set_of(core_req_line)][c_way] <= 1'b1;
          end else begin
            req_line_q  <= core_req_line;
            req_write_q <= core_req_write;
            state_q     <= S_MISS;
          end
        end
        S_MISS: if (m_go) begin
          resv_way_q <= m_way;
          if (!m_free) begin
            v_q[m_set][m_way] <= 1'b0;
            rr_q[m_set]       <= (rr_q[m_set] == WW'(WAYS - 1)) ? '0 : rr_q[m_set] + 1'b1;
          end
          state_q <= S_WAIT;
        end
        S_WAIT: if (llc_resp) begin
          v_q[m_set][resv_way_q]   <= 1'b1;
          d_q[m_set][resv_way_q]   <= req_write_q;
          tag_q[m_set][resv_way_q] <= req_line_q;
          core_resp_valid          <= 1'b1;
          state_q                  <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_resp_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    llc_resp |-> state_q == S_WAIT);
  a_pwb_never_full: assert property (@(posedge clk) disable iff (!rst_n)
    pwb_push |-> !pwb_full);

endmodule
