// prb_arbiter: pending request buffer (PRB) of one core and the round-robin
// choice between it and the pending write-back buffer (PWB).
//
// The PRB holds the core's single outstanding request to the LLC.  At the
// start of each of the core's TDM slots, one message goes on the bus: the PRB
// request or the PWB head.  When both are waiting they take turns (round
// robin); when one is empty the other goes.  A request stays in the PRB after
// it has been sent and is offered again in later slots until the LLC answers
// it, because the LLC may have to free a line in the set first.  A
// write-back leaves the PWB as soon as it has been sent.
//
// Interface: load/load_line/load_write fill the PRB, clear empties it (the
// LLC's response); pwb_head/pwb_empty come from the PWB and pwb_pop goes to
// it; msg is offered to the bus and grant says the bus took it.
// Timing: msg is combinational; grant, load and clear act at the clock edge.
// The round-robin pointer flips after each granted message when both sources
// were waiting.  The paper prescribes "a predictable arbitration such as
// round-robin"; keeping the request in the PRB until answered is this
// design's reading of the retry behaviour its examples show.
module prb_arbiter
  import llc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  line_t      load_line,
  input  logic       load_write,
  input  logic       clear,
  input  wb_entry_t  pwb_head,
  input  logic       pwb_empty,
  output logic       pwb_pop,
  output bus_msg_t   msg,
  input  logic       grant,
  output prb_entry_t prb
);

  prb_entry_t prb_q;
  logic       prefer_wb_q;   // next turn, when both wait, goes to the PWB
  logic       pick_wb;

  always_comb begin
    if (prb_q.valid && !pwb_empty) pick_wb = prefer_wb_q;
    else                           pick_wb = !pwb_empty;
    msg = '0;
    if (pick_wb) begin
      msg.valid = 1'b1;
      msg.kind  = MSG_WB;
      msg.line  = pwb_head.line;
      msg.dirty = pwb_head.dirty;
    end else if (prb_q.valid) begin
      msg.valid = 1'b1;
      msg.kind  = MSG_REQ;
      msg.line  = prb_q.line;
      msg.write = prb_q.write;
    end
    pwb_pop = grant && pick_wb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prb_q       <= '0;
      prefer_wb_q <= 1'b0;
    end else begin
      if (grant && prb_q.valid && !pwb_empty) prefer_wb_q <= !pick_wb;
      if (clear)     prb_q.valid <= 1'b0;
      if (load) begin
        prb_q.valid <= 1'b1;
        prb_q.line  <= load_line;
        prb_q.write <= load_write;
      end
    end
  end

  assign prb = prb_q;

  // One outstanding request per core.
  a_single_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> !prb_q.valid || clear);

endmodule
