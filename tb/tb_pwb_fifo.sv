// tb_pwb_fifo: random pushes and pops on an 8-entry write-back buffer against
// a queue model.  Checks head, count, empty/full and the line-search port
// (for a line known to be queued and for a random line) every cycle.
module tb_pwb_fifo;
  import llc_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full, match;
  wb_entry_t push_data, head;
  logic [3:0] count;
  line_t match_line;
  int checks = 0, failures = 0;
  wb_entry_t model[$];

  pwb_fifo #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    push = 0; pop = 0; push_data = '0; match_line = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      #1;
      push = ($urandom % 2) && (model.size() < D || pop);
      pop  = ($urandom % 2) && model.size() > 0;
      push = ($urandom % 2) && (model.size() < D || pop);
      push_data.line  = line_t'($urandom % 64);
      push_data.dirty = $urandom % 2;
      if (model.size() > 0 && ($urandom % 2)) match_line = model[$urandom % model.size()].line;
      else match_line = line_t'($urandom % 64);
      #1;
      check(count == model.size(), "count");
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      if (model.size() > 0) check(head == model[0], "head");
      begin
        automatic bit m = 0;
        foreach (model[k]) if (model[k].line == match_line) m = 1;
        check(match == m, "match");
      end
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_data);
    end
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
