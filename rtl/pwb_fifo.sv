// pwb_fifo: pending write-back buffer (PWB) of one private L2 controller.
//
// Lines leaving the L2 (its own victims and lines recalled by the LLC to keep
// it inclusive) wait here, oldest first, until the core's TDM slot carries
// them to the LLC.  It is a circular FIFO of DEPTH entries with one push and
// one pop port, both usable in the same cycle.  A search port tells whether a
// given line is still waiting, so that the controller does not re-request a
// line before its write-back has reached the LLC.
//
// Interface: push/push_data, pop, head/empty/full/count; match_line -> match.
// Timing: push and pop take effect at the clock edge; head and match are
// combinational from the stored entries.  The default depth equals the L2
// capacity (sets x ways), which bounds the lines one core can owe the LLC; the
// paper names the buffer but not its depth or organisation.
module pwb_fifo
  import llc_pkg::*;
#(
  parameter int unsigned DEPTH = L2_SETS_DEF * L2_WAYS_DEF,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  wb_entry_t   push_data,
  input  logic        pop,
  output wb_entry_t   head,
  output logic        empty,
  output logic        full,
  output logic [PW:0] count,
  input  line_t       match_line,
  output logic        match
);

  wb_entry_t       mem [DEPTH];
  logic [DEPTH-1:0] used;
  logic [PW-1:0]   rd_q, wr_q;
  logic [PW:0]     cnt_q;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      used  <= '0;
    end else begin
      if (push) begin
        mem[wr_q]  <= push_data;
        used[wr_q] <= 1'b1;
        wr_q       <= inc(wr_q);
      end
      if (pop) begin
        if (!(push && wr_q == rd_q)) used[rd_q] <= 1'b0;
        rd_q <= inc(rd_q);
      end
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  assign head  = mem[rd_q];
  assign empty = (cnt_q == '0);
  assign full  = (cnt_q == (PW+1)'(DEPTH));
  assign count = cnt_q;

  always_comb begin
    match = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (used[i] && mem[i].line == match_line) match = 1'b1;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
