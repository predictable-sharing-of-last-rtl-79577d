// tb_prb_arbiter: checks the choice between the pending request and the
// pending write-backs.  A model keeps the PRB, a write-back queue and the
// round-robin turn; random loads, clears, write-back arrivals and grants are
// applied and the offered message and the PWB pop are compared every cycle.
// A directed prefix checks strict alternation when both sources wait.
module tb_prb_arbiter;
  import llc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, load_write, clear, pwb_empty, pwb_pop, grant;
  line_t load_line;
  wb_entry_t pwb_head;
  bus_msg_t msg;
  prb_entry_t prb;
  int checks = 0, failures = 0;
  wb_entry_t q[$];
  prb_entry_t m_prb;
  bit m_prefer_wb;

  prb_arbiter dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int alternations = 0;
  bit last_kind_valid = 0;
  msg_kind_e last_kind;

  initial begin
    load = 0; clear = 0; grant = 0; load_line = '0; load_write = 0;
    m_prb = '0; m_prefer_wb = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      #1;
      // stimulus: keep both sources busy in the first 200 cycles
      if (i < 200) begin
        load = !m_prb.valid; clear = 0;
        if (q.size() < 4) q.push_back('{line: line_t'($urandom), dirty: 1'($urandom)});
      end else begin
        load  = !m_prb.valid && ($urandom % 4 == 0);
        clear = m_prb.valid && ($urandom % 6 == 0);
        if ($urandom % 3 == 0) q.push_back('{line: line_t'($urandom), dirty: 1'($urandom)});
      end
      load_line = line_t'($urandom); load_write = 1'($urandom);
      grant = 0;
      pwb_empty = (q.size() == 0);
      pwb_head  = (q.size() > 0) ? q[0] : '0;
      #1;
      begin
        automatic bit pick_wb = (m_prb.valid && q.size() > 0) ? m_prefer_wb : (q.size() > 0);
        grant = msg.valid && ($urandom % 2);
        #1;
        check(msg.valid == (m_prb.valid || q.size() > 0), "msg.valid");
        if (msg.valid) begin
          check(msg.kind == (pick_wb ? MSG_WB : MSG_REQ), "msg.kind");
          check(msg.line == (pick_wb ? q[0].line : m_prb.line), "msg.line");
          if (pick_wb) check(msg.dirty == q[0].dirty, "msg.dirty");
          else         check(msg.write == m_prb.write, "msg.write");
        end
        check(pwb_pop == (grant && pick_wb), "pwb_pop");
        check(prb == m_prb, "prb contents");
        if (grant && m_prb.valid && q.size() > 0) begin
          if (last_kind_valid && msg.kind != last_kind) alternations++;
          last_kind_valid = 1; last_kind = msg.kind;
          m_prefer_wb = !pick_wb;
        end
        @(posedge clk);
        if (pwb_pop) void'(q.pop_front());
        if (clear) m_prb.valid = 0;
        if (load) m_prb = '{valid: 1'b1, line: load_line, write: load_write};
      end
    end
    check(alternations > 20, "round robin alternated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
