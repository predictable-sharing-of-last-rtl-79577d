// tb_tdm_bus: checks the one-slot TDM schedule and the bus routing.
// A cycle counter gives the expected owner (cycle / SLOT_CYC mod N) and slot
// boundaries; random messages are offered by every core and the LLC side is
// answered two cycles into slots that carried a request.  Checks: owner and
// slot_start/slot_last per cycle, that only the owner's message reaches the
// LLC and only in cycle 0, one-hot grant, and response routing to the owner.
module tb_tdm_bus;
  import llc_pkg::*;
  localparam int N = 4, SC = 5;
  logic clk = 0, rst_n = 0;
  bus_msg_t l2_msg [N];
  logic [N-1:0] grant, resp_valid;
  bus_msg_t llc_msg;
  logic [1:0] slot_owner;
  logic slot_start, slot_last, llc_resp_valid;
  int checks = 0, failures = 0;

  tdm_bus #(.N_CORES(N), .SLOT_CYC(SC)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t cyc=%0d", what, $time, dut_dbg()); end
  endtask

  int cyc = 0;
  function automatic int dut_dbg(); return int'(dut.cyc_q) * 1000 + cyc; endfunction
  int owners_seen [N];
  initial begin
    llc_resp_valid = 0;
    foreach (l2_msg[i]) l2_msg[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (cyc = 0; cyc < 40 * SC * N; cyc++) begin
      // drive new random offers away from the clock edge
      #1;
      foreach (l2_msg[i]) begin
        l2_msg[i].valid = ($urandom % 3) != 0;
        l2_msg[i].kind  = msg_kind_e'($urandom % 2);
        l2_msg[i].line  = line_t'($urandom);
      end
      llc_resp_valid = ((cyc % SC) == 2) && dut.req_in_slot_q;
      #1;
      begin
        automatic int exp_owner = (cyc / SC) % N;
        automatic bit exp_start = (cyc % SC) == 0;
        check(slot_owner == exp_owner, "owner");
        check(slot_start == exp_start, "slot_start");
        check(slot_last == ((cyc % SC) == SC - 1), "slot_last");
        check(llc_msg.valid == (exp_start && l2_msg[exp_owner].valid), "llc_msg.valid");
        if (llc_msg.valid) begin
          check(llc_msg.line == l2_msg[exp_owner].line, "llc_msg.line");
          check(llc_msg.kind == l2_msg[exp_owner].kind, "llc_msg.kind");
        end
        check(grant == (llc_msg.valid ? N'(1) << exp_owner : '0), "grant");
        check(resp_valid == (llc_resp_valid ? N'(1) << exp_owner : '0), "resp routing");
        if (exp_start) owners_seen[exp_owner]++;
      end
      @(posedge clk);
    end
    // one slot per core per period: every core got the same number of slots
    foreach (owners_seen[i]) check(owners_seen[i] == 40, "slots per core");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
