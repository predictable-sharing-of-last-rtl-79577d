// tdm_bus: shared bus between the private L2 controllers and the LLC,
// arbitrated by a one-slot TDM schedule (1S-TDM).
//
// Time is cut into slots of SLOT_CYC cycles.  Cores own the slots in the fixed
// order 0, 1, ..., N_CORES-1, so every core gets exactly one slot per period of
// N_CORES*SLOT_CYC cycles; this is the one-slot schedule that keeps the
// worst-case latency of a shared partition bounded.  In the first cycle of a
// slot the bus takes the message the slot owner presents (a request from its
// PRB or a write-back from its PWB), hands it to the LLC and grants it back to
// the owner.  Responses from the LLC are routed to the slot owner only;
// back-invalidations from the LLC are broadcast to every L2 controller.
//
// Timing: slot_start is high in cycle 0 of each slot, slot_last in its final
// cycle.  grant[i] and llc_msg.valid are high in cycle 0 of core i's slot when
// core i offers a message.  The LLC must answer inside the same slot; an
// assertion checks that a response never arrives outside a slot that carried
// a request.  The slot order and the single-cycle message transfer are this
// design's choices; the paper fixes only one equal slot per core per period.
module tdm_bus
  import llc_pkg::*;
#(
  parameter int unsigned N_CORES  = N_CORES_DEF,
  parameter int unsigned SLOT_CYC = SLOT_CYC_DEF,
  localparam int unsigned CW      = (N_CORES > 1) ? $clog2(N_CORES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from / to the L2 controllers
  input  bus_msg_t             l2_msg   [N_CORES],
  output logic [N_CORES-1:0]   grant,
  output logic [N_CORES-1:0]   resp_valid,
  // to / from the LLC
  output bus_msg_t             llc_msg,
  output logic [CW-1:0]        slot_owner,
  output logic                 slot_start,
  output logic                 slot_last,
  input  logic                 llc_resp_valid
);

  logic [$clog2(SLOT_CYC+1)-1:0] cyc_q;
  logic [CW-1:0]                 owner_q;
  logic                          req_in_slot_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc_q   <= '0;
      owner_q <= '0;
    end else if (cyc_q == $bits(cyc_q)'(SLOT_CYC - 1)) begin
      cyc_q   <= '0;
      owner_q <= (owner_q == CW'(N_CORES - 1)) ? '0 : owner_q + 1'b1;
    end else begin
      cyc_q   <= cyc_q + 1'b1;
    end
  end

  assign slot_owner = owner_q;
  assign slot_start = (cyc_q == '0);
  assign slot_last  = (cyc_q == $bits(cyc_q)'(SLOT_CYC - 1));

  always_comb begin
    llc_msg = l2_msg[owner_q];
    llc_msg.valid = slot_start && l2_msg[owner_q].valid;
    grant = '0;
    grant[owner_q] = llc_msg.valid;
    resp_valid = '0;
    resp_valid[owner_q] = llc_resp_valid;
  end

  // Remember whether the current slot carried a request, to police responses.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_in_slot_q <= 1'b0;
    else if (slot_start) req_in_slot_q <= llc_msg.valid && (llc_msg.kind == MSG_REQ);
  end

  // The LLC answers only in the slot of the core whose request it serves.
  a_resp_in_slot: assert property (@(posedge clk) disable iff (!rst_n)
    llc_resp_valid |-> (!slot_start && req_in_slot_q));

endmodule
