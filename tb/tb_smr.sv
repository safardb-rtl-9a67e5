// tb_smr: tests the SMR kernel of replica 1 in a four-replica cluster whose other
// replicas are the peer model (heartbeat period 64, three failed reads).
//
// Follower phase: replica 0 leads; the QPC receives close-then-open-to-0; an operation
// from the application is forwarded to replica 0 as an RPC with the FWD flag; committed
// entries seen by the dispatcher advance the slot; heartbeat words are written to the
// local HBM and heartbeat Reads go to replicas 0, 2 and 3, merged with the other verbs.
// Crash of replica 0: it is removed after about three periods, replica 1 is elected
// (one election, permissions reopened to replica 1 only), and becomes leader.
// Leader phase: an application withdraw and a forwarded operation from a follower are
// each ordered by a Mu round: executed locally, appended to the local log and written
// through into the logs of replicas 2 and 3 at the slot the follower phase reached.
module tb_smr;
  import safardb_pkg::*;
  localparam int N = 4, P = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = 3'd1, leader_id;
  logic sq_valid, sq_ready, cpl_valid;
  sq_entry_t sq_data;
  cpl_t cpl_data;
  logic app_prop_valid = 1'b0, app_prop_ready, fwd_valid = 1'b0, fwd_ready, seen_commit = 1'b0;
  op_t app_prop_op = '0, fwd_op = '0;
  logic exec_valid, exec_check, exec_ok = 1'b1;
  op_t exec_op;
  logic hb_mem_valid, pm_mem_valid;
  logic [ADDR_W-1:0] hb_mem_addr, pm_mem_addr;
  logic [DATA_W-1:0] hb_mem_wdata, pm_mem_wdata;
  logic perm_mod_valid, is_leader;
  logic [N-1:0] perm_mod_vec, alive, dead = '0;
  logic [31:0] slot, commits;
  logic [15:0] adoptions, rejections, forwards, aborts, elections, removals, retries;

  smr #(.N_NODES(N), .HB_PERIOD(P), .FAIL_READS(3), .LOG_SLOTS(256), .RETRY(128)) dut (
    .*, .hb_mem_ready(1'b1), .pm_mem_ready(1'b1));
  peer_model #(.N_NODES(N), .LAT(6)) u_peers (
    .clk, .rst_n, .sq_valid, .sq_ready, .sq_data, .cpl_valid, .cpl_data,
    .dead, .refuse('0));

  logic [DATA_W-1:0] local_mem [logic [ADDR_W-1:0]];
  logic [N-1:0] qpc = '1;
  int hb_w = 0, hb_reads = 0, perm_writes = 0, n_exec = 0;
  always @(posedge clk) if (rst_n) begin
    if (hb_mem_valid) begin local_mem[hb_mem_addr] = hb_mem_wdata; hb_w++; end
    if (pm_mem_valid) local_mem[pm_mem_addr] = pm_mem_wdata;
    if (perm_mod_valid) begin qpc <= perm_mod_vec; perm_writes++; end
    if (sq_valid && sq_ready && sq_data.verb == V_READ && sq_data.raddr == HB_ADDR) hb_reads++;
    if (exec_valid) n_exec++;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic app(input logic [OPC_W-1:0] o, input int v);
    #1 app_prop_valid = 1'b1; app_prop_op = '{opcode: o, param: PARAM_W'(v)};
    @(posedge clk);
    while (!app_prop_ready) @(posedge clk);
    #1 app_prop_valid = 1'b0;
  endtask

  function automatic logic [DATA_W-1:0] logw(input int n, input int s);
    return u_peers.peek(n, LOG_BASE + ADDR_W'(s));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    log_entry_t e;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4 * P) @(posedge clk);
    check(leader_id == 0 && !is_leader && alive == '1, "replica 0 leads, all alive");
    check(qpc == 4'b0001 && perm_writes == 2, "QPC open to the leader only");
    check(hb_w >= 3 && local_mem[HB_ADDR] != 0 && hb_reads == 3 * hb_w, "heartbeats running");
    // follower: forward
    app(OP_WITHDRAW, 12);
    repeat (30) @(posedge clk);
    check(forwards == 1 && u_peers.rpcs.size() == 1 && u_peers.rpcs[0].dst == 0 &&
          u_peers.rpcs[0].data == {RPC_FLAG_FWD, OP_WITHDRAW, 32'd12}, "forwarded to replica 0");
    for (int i = 0; i < 5; i++) begin
      #1 seen_commit = 1'b1; @(posedge clk); #1 seen_commit = 1'b0; @(posedge clk);
    end
    check(slot == 5 && commits == 0, "follower at slot 5");
    // crash of the leader
    dead <= 4'b0001;
    t = 0;
    while (!is_leader && t < 8 * P) begin @(posedge clk); t++; end
    check(is_leader && leader_id == 1 && alive == 4'b1110, "replica 1 elected");
    check(removals == 1 && elections == 1, "one removal, one election");
    check(qpc == 4'b0010 && perm_writes == 4, "QPC reopened to replica 1");
    check(t >= 2 * P && t <= 5 * P, "failover within about three periods");
    // leader: own and forwarded operations
    app(OP_WITHDRAW, 20);
    t = 0;
    while (commits < 1 && t < 2000) begin @(posedge clk); t++; end
    #1 fwd_valid = 1'b1; fwd_op = '{OP_WITHDRAW, 32'd30};
    @(posedge clk);
    while (!fwd_ready) @(posedge clk);
    #1 fwd_valid = 1'b0;
    t = 0;
    while (commits < 2 && t < 2000) begin @(posedge clk); t++; end
    repeat (20) @(posedge clk);
    check(commits == 2 && slot == 7 && n_exec == 2, "two rounds committed at slots 5 and 6");
    e = log_entry_t'(logw(2, 5));
    check(e.op == op_t'({OP_WITHDRAW, 32'd20}) && e.prop != 0 && logw(3, 5) == logw(2, 5) &&
          local_mem[LOG_BASE + 5] == logw(2, 5), "own withdraw in every live log, slot 5");
    e = log_entry_t'(logw(3, 6));
    check(e.op == op_t'({OP_WITHDRAW, 32'd30}) && logw(2, 6) == logw(3, 6),
          "forwarded withdraw in slot 6");
    check(logw(0, 5) == 0, "crashed replica not written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
