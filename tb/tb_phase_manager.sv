// tb_phase_manager: tests the Mu rounds of the phase manager, driven through a
// communication_manager against the peer model (four replicas, this one is 0).
//
// Scenarios and expected results, worked out from the protocol:
//   1 leader, withdraw 10, invariant holds: followers' proposal words become 1, slot 0 of
//     every log holds {1, withdraw 10}, exec strobe with check = 1, slot 1, one commit.
//   2 leader, withdraw 99 and the application says the invariant fails: slot 1 holds
//     {2, no-op}, one rejection.
//   3 followers 2 and 3 hold {40, deposit 7} in slot 2 and proposal 40: the leader picks
//     proposal 41, adopts and executes the deposit unchecked in slot 2, then prepares again
//     and puts its own withdraw 5 in slot 3 with proposal 42.
//   4 not leader (leader is 2): the operation is forwarded as an RPC with the FWD flag to
//     replica 2 only; no round is run.
//   5 follower: each seen_commit advances the slot.
//   6 leader with every follower dead: the round stalls; when leadership is lost the round
//     is aborted and the phase manager takes proposals again.
module tb_phase_manager;
  import safardb_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] leader_id = '0;
  logic is_leader = 1'b1, switching = 1'b0, seen_commit = 1'b0;
  logic [N-1:0] followers = 4'b1110, dead = '0;
  logic prop_valid = 1'b0, prop_ready;
  op_t prop_op = '0;
  logic cm_abort, job_valid, job_ready, done, res_any;
  verb_e job_verb;
  logic [N-1:0] job_dst;
  logic [NODE_W:0] job_quorum;
  logic [ADDR_W-1:0] job_addr;
  logic [DATA_W-1:0] job_data;
  logic [PROP_W-1:0] res_max_prop;
  log_entry_t res_best;
  logic exec_valid, exec_check, exec_ok = 1'b1;
  op_t exec_op;
  logic mem_req_valid, mem_req_ready = 1'b1;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [DATA_W-1:0] mem_req_wdata;
  logic [31:0] slot, commits;
  logic [15:0] adoptions, rejections, forwards, aborts, retries;
  logic sq_valid, sq_ready, cpl_valid;
  sq_entry_t sq_data;
  cpl_t cpl_data;

  phase_manager #(.N_NODES(N), .LOG_SLOTS(64)) dut (.*);
  communication_manager #(.N_NODES(N), .RETRY(128)) u_cm (
    .clk, .rst_n, .abort(cm_abort), .job_valid, .job_ready, .job_verb, .job_dst, .job_quorum,
    .job_addr, .job_data, .done, .res_max_prop, .res_any, .res_best,
    .sq_valid, .sq_ready, .sq_data, .cpl_valid, .cpl_data, .retries);
  peer_model #(.N_NODES(N), .LAT(5)) u_peers (
    .clk, .rst_n, .sq_valid, .sq_ready, .sq_data, .cpl_valid, .cpl_data,
    .dead, .refuse('0));

  logic [DATA_W-1:0] local_mem [logic [ADDR_W-1:0]];
  op_t execs[$];
  bit  exec_checks[$];
  always @(posedge clk) if (rst_n) begin
    if (mem_req_valid && mem_req_ready) local_mem[mem_req_addr] = mem_req_wdata;
    if (exec_valid) begin execs.push_back(exec_op); exec_checks.push_back(exec_check); end
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [DATA_W-1:0] ent(input int p, input logic [OPC_W-1:0] o, input int v);
    log_entry_t e;
    e.prop = PROP_W'(p); e.op = '{opcode: o, param: PARAM_W'(v)};
    return DATA_W'(e);
  endfunction

  task automatic propose(input logic [OPC_W-1:0] o, input int v);
    #1;
    prop_valid = 1'b1; prop_op = '{opcode: o, param: PARAM_W'(v)};
    @(posedge clk);
    while (!prop_ready) @(posedge clk);
    #1 prop_valid = 1'b0;
  endtask

  task automatic wait_commits(input int n, input int limit);
    int t;
    t = 0;
    while (int'(commits) < n && t < limit) begin @(posedge clk); t++; end
    repeat (3) @(posedge clk);
  endtask

  function automatic bit all_logs(input int s, input logic [DATA_W-1:0] v);
    bit ok;
    ok = local_mem.exists(LOG_BASE + ADDR_W'(s)) && local_mem[LOG_BASE + ADDR_W'(s)] == v;
    for (int i = 1; i < N; i++) ok &= (u_peers.peek(i, LOG_BASE + ADDR_W'(s)) == v);
    return ok;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // 1
    propose(OP_WITHDRAW, 10);
    wait_commits(1, 500);
    check(commits == 1 && slot == 1, "one commit, slot 1");
    check(u_peers.peek(2, PROP_ADDR) == ent(1, 0, 0), "proposal number written to followers");
    check(all_logs(0, ent(1, OP_WITHDRAW, 10)), "entry in every log");
    check(execs.size() == 1 && execs[0] == op_t'({OP_WITHDRAW, 32'd10}) && exec_checks[0],
          "executed with the invariant check");
    // 2
    exec_ok = 1'b0;
    propose(OP_WITHDRAW, 99);
    wait_commits(2, 500);
    exec_ok = 1'b1;
    check(rejections == 1 && all_logs(1, ent(2, OP_NOP, 99)), "rejected operation logged as no-op");
    // 3
    // accepted by replicas 2 and 3 (with the old leader, a majority); replica 1 missed it
    for (int i = 2; i < 4; i++) begin
      u_peers.poke(i, LOG_BASE + 2, ent(40, OP_DEPOSIT, 7));
      u_peers.poke(i, PROP_ADDR, ent(40, 0, 0));
    end
    propose(OP_WITHDRAW, 5);
    wait_commits(4, 800);
    check(adoptions == 1 && commits == 4 && slot == 4, "adopted, then own entry");
    check(all_logs(2, ent(41, OP_DEPOSIT, 7)), "adopted entry re-proposed with proposal 41");
    check(all_logs(3, ent(42, OP_WITHDRAW, 5)), "own entry in the next slot with proposal 42");
    check(execs.size() == 4 && execs[2].opcode == OP_DEPOSIT && !exec_checks[2] &&
          execs[3].param == 5 && exec_checks[3], "adopted executed unchecked, own checked");
    // 4
    is_leader = 1'b0; leader_id = 3'd2;
    u_peers.rpcs.delete();
    propose(OP_WITHDRAW, 3);
    repeat (30) @(posedge clk);
    check(forwards == 1 && u_peers.rpcs.size() == 1 && u_peers.rpcs[0].dst == 2 &&
          u_peers.rpcs[0].verb == V_RPC &&
          u_peers.rpcs[0].data == {RPC_FLAG_FWD, OP_WITHDRAW, 32'd3}, "forwarded to the leader");
    check(commits == 4, "no round when not leader");
    // 5
    for (int i = 0; i < 3; i++) begin
      #1 seen_commit = 1'b1; @(posedge clk); #1 seen_commit = 1'b0; @(posedge clk);
    end
    check(slot == 7, "follower follows the committed entries");
    // 6
    is_leader = 1'b1; leader_id = '0;
    dead = 4'b1110;
    propose(OP_WITHDRAW, 1);
    repeat (100) @(posedge clk);
    check(commits == 4 && !prop_ready, "round stalls without a quorum");
    #1 is_leader = 1'b0;
    repeat (3) @(posedge clk);
    check(aborts == 1 && prop_ready, "round aborted when leadership is lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
