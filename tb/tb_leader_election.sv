// tb_leader_election: tests the leader switch plane's election and permission switch.
//
// Random live sets (always including this replica, id 2 of 6) are applied. After each
// change the testbench expects, computed from the live set alone: the leader is the lowest
// live id; if it changed, one election is counted and the QPC receives two writes in two
// consecutive cycles, first all-closed, then open only to the new leader; during those
// cycles 'switching' is high and is_leader low; afterwards is_leader is set exactly when
// this replica is the leader, and 'followers' is the live set without this replica.
module tb_leader_election;
  import safardb_pkg::*;
  localparam int N = 6;
  localparam int ME = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = NODE_W'(ME), leader_id;
  logic [N-1:0] alive = '1, followers, perm_mod_vec;
  logic is_leader, switching, perm_mod_valid;
  logic [15:0] elections;

  leader_election #(.N_NODES(N)) dut (.*);

  logic [N-1:0] qpc_model = '1;
  int mods = 0, n_lead = 0;
  always @(posedge clk) if (rst_n && perm_mod_valid) begin qpc_model <= perm_mod_vec; mods++; end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int lowest(input logic [N-1:0] a);
    for (int k = 0; k < N; k++) if (a[k]) return k;
    return ME;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_el, ldr, m0;
    exp_el = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    check(leader_id == 0 && !is_leader && !switching, "initial leader 0");
    check(qpc_model == 6'b000001 && mods == 2, "initial permission: leader only");
    ldr = 0;
    for (int i = 0; i < 300; i++) begin
      logic [N-1:0] a;
      int nl;
      @(negedge clk);
      a = N'($urandom) | (N'(1) << ME);
      if ($urandom_range(0, 2) == 0) a = alive;   // sometimes no change
      alive = a;
      nl = lowest(a);
      m0 = mods;
      @(negedge clk);
      if (nl != ldr) begin
        exp_el++;
        check(switching && !is_leader && perm_mod_valid && perm_mod_vec == '0,
              "close cycle");
        @(negedge clk);
        check(switching && perm_mod_valid && perm_mod_vec == (N'(1) << nl), "open cycle");
        @(negedge clk);
      end
      check(!switching && !perm_mod_valid, "steady");
      check(int'(leader_id) == nl, "leader is lowest live id");
      check(is_leader == (nl == ME), "is_leader");
      check(followers == (a & ~(N'(1) << ME)), "followers");
      check(qpc_model == (N'(1) << nl), "QPC open only to the leader");
      check(int'(elections) == exp_el, "election count");
      check(mods - m0 == ((nl != ldr) ? 2 : 0), "two permission writes per switch");
      if (nl == ME) n_lead++;
      ldr = nl;
    end
    check(exp_el > 50 && n_lead > 20, "elections and own leadership exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
