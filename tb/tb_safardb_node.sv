// tb_safardb_node: end-to-end test of a four-replica SafarDB cluster running Bank Account.
//
// Four safardb_node instances (N_NODES = 4, heartbeat period 128 cycles) are joined by a
// switch model: one FIFO per destination, a fixed latency per link (the link from replica 0
// to replica 1 is slow, 40 cycles; all others take 4), and a crash flag per replica that
// drops everything it sends or should receive. Each replica has its own HBM model.
// Replica 1 leaves reset 32 cycles before the others, so its heartbeat scanner runs ahead
// and it notices a crash first; that makes the permission-switch race below repeatable.
// The script, with the balance worked out by the testbench:
//   1  deposits on every replica (RPC, no coordination)            -> 1000 everywhere
//   2  withdraw 50 at the leader (Mu round, RPC Write-Through)      ->  950
//   3  withdraw 30 at a follower (forwarded to the leader)          ->  920
//   4  withdraw 5000 at a follower (fails the local check)          ->  920, rsp_ok = 0
//   5  withdraw 600 at two followers at once: the leader applies one, logs the other as a
//      no-op because the invariant no longer holds                  ->  320
//   6  host verbs: a follower's host tries to Write another replica's HBM (refused by the
//      QP permission), the leader's host does the same (acknowledged), a host Read returns
//      the remote heartbeat word
//   7  withdraw 20 at the leader; the leader is crashed once replicas 2 and 3 applied it,
//      before its Write-Through reached replica 1 (still on the slow link)
//   8  replica 1 is elected; its first writes are refused by replicas that have not yet
//      switched permissions and are re-sent; its next withdraw (10) first adopts the
//      entry replica 1 missed (20), which replicas 2 and 3 recognise as already applied
//                                                                  ->  290 on 1, 2, 3
//   9  deposit 5 after the crash, only to the live replicas        ->  295
// Every mechanism is counted at the end; one that never happened is a failure.
module tb_safardb_node;
  import safardb_pkg::*;

  localparam int N   = 4;
  localparam int HBP = 128;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;

  logic [N-1:0] rst_n = '0;
  logic [N-1:0] dead = '0;

  // per-replica ports
  logic [N-1:0] req_valid = '0, req_ready, rsp_valid, rsp_ok;
  op_t          req_op [N];
  logic [DATA_W-1:0] rsp_data [N];
  logic [N-1:0] host_sq_valid = '0, host_sq_ready, host_cpl_valid;
  sq_entry_t    host_sq_data [N];
  cpl_t         host_cpl_data [N];
  logic [N-1:0] tx_valid, rx_valid = '0, rx_ready;
  pkt_t         tx_data [N], rx_data [N];
  logic [N-1:0] mreq_valid, mreq_ready, mreq_we, mrsp_valid;
  logic [ADDR_W-1:0] mreq_addr [N];
  logic [DATA_W-1:0] mreq_wdata [N], mrsp_rdata [N];
  logic [NODE_W-1:0] leader_id [N];
  logic [N-1:0] is_leader;
  logic [N-1:0] alive [N];
  logic signed [DATA_W-1:0] balance [N];
  logic [31:0] commits [N], slot [N], verbs_sent [N], dispatched [N];
  logic [15:0] adoptions [N], rejections [N], forwards [N], aborts [N], elections [N],
               removals [N], perm_err [N], perm_switches [N], lost_replies [N],
               duplicates [N], retries [N];

  initial for (int i = 0; i < N; i++) begin
    req_op[i] = '0; host_sq_data[i] = '0; rx_data[i] = '0;
  end

  for (genvar i = 0; i < N; i++) begin : g_node
    safardb_node #(.N_NODES(N), .HB_PERIOD(HBP)) u_node (
      .clk, .rst_n(rst_n[i]), .node_id(NODE_W'(i)),
      .req_valid(req_valid[i]), .req_ready(req_ready[i]), .req_op(req_op[i]),
      .rsp_valid(rsp_valid[i]), .rsp_ok(rsp_ok[i]), .rsp_data(rsp_data[i]),
      .host_sq_valid(host_sq_valid[i]), .host_sq_ready(host_sq_ready[i]),
      .host_sq_data(host_sq_data[i]),
      .host_cpl_valid(host_cpl_valid[i]), .host_cpl_data(host_cpl_data[i]),
      .tx_valid(tx_valid[i]), .tx_ready(1'b1), .tx_data(tx_data[i]),
      .rx_valid(rx_valid[i]), .rx_ready(rx_ready[i]), .rx_data(rx_data[i]),
      .mem_req_valid(mreq_valid[i]), .mem_req_ready(mreq_ready[i]), .mem_req_we(mreq_we[i]),
      .mem_req_addr(mreq_addr[i]), .mem_req_wdata(mreq_wdata[i]),
      .mem_rsp_valid(mrsp_valid[i]), .mem_rsp_rdata(mrsp_rdata[i]),
      .leader_id(leader_id[i]), .is_leader(is_leader[i]), .alive(alive[i]),
      .balance(balance[i]), .commits(commits[i]), .slot(slot[i]),
      .adoptions(adoptions[i]), .rejections(rejections[i]), .forwards(forwards[i]),
      .aborts(aborts[i]), .elections(elections[i]), .removals(removals[i]),
      .perm_err(perm_err[i]), .perm_switches(perm_switches[i]),
      .verbs_sent(verbs_sent[i]), .lost_replies(lost_replies[i]),
      .dispatched(dispatched[i]), .duplicates(duplicates[i]), .retries(retries[i]));

    hbm_model #(.LAT(4 + i), .STALL_EVERY(i == 2 ? 7 : 0)) u_hbm (
      .clk, .rst_n(rst_n[i]),
      .req_valid(mreq_valid[i]), .req_ready(mreq_ready[i]), .req_we(mreq_we[i]),
      .req_addr(mreq_addr[i]), .req_wdata(mreq_wdata[i]),
      .rsp_valid(mrsp_valid[i]), .rsp_rdata(mrsp_rdata[i]));
  end

  // ---------------- switch model ----------------
  typedef struct packed {
    longint unsigned due;
    pkt_t            p;
  } flight_t;
  flight_t q [N][$];
  int unsigned delivered = 0, dropped = 0;
  int unsigned wt_seen_to3 = 0;   // RPC Write-Throughs replica 0 sent to replica 3

  function automatic int lat(int s, int d);
    return (s == 0 && d == 1) ? 40 : 4;
  endfunction

  always @(posedge clk) begin
    for (int d = 0; d < N; d++)
      if (rx_valid[d] && rx_ready[d]) begin
        void'(q[d].pop_front());
        delivered++;
      end
    for (int s = 0; s < N; s++)
      if (tx_valid[s] && rst_n[s]) begin
        int d;
        d = int'(tx_data[s].dst);
        if (s == 0 && tx_data[s].verb == V_RPC_WT && d == 3) wt_seen_to3++;
        if (dead[s] || d >= N || dead[d]) dropped++;
        else begin
          longint unsigned due;
          due = cyc + longint'(lat(s, d));
          q[d].push_back('{due: due, p: tx_data[s]});
        end
      end
    for (int d = 0; d < N; d++) begin
      // each link keeps its order; a packet may wait behind a slower one from another source
      int k;
      k = -1;
      for (int j = 0; j < q[d].size(); j++)
        if (k < 0 && q[d][j].due <= cyc + 1) k = j;
      if (k > 0) begin      // bring the first arrived packet to the head
        flight_t f;
        f = q[d][k];
        q[d].delete(k);
        q[d].push_front(f);
      end
      rx_valid[d] <= rst_n[d] && !dead[d] && (k >= 0);
      rx_data[d]  <= (k >= 0) ? q[d][0].p : '0;
    end
  end

  // Packets are reordered only across sources: a later packet from the same source never
  // overtakes an earlier one, because equal-source packets are queued with rising due times.
  // ('due' grows with cyc and each link has one fixed latency.)

  task automatic crash(input int n);
    dead[n] = 1'b1;
    for (int d = 0; d < N; d++)
      for (int j = q[d].size() - 1; j >= 0; j--)
        if (int'(q[d][j].p.src) == n) begin q[d].delete(j); dropped++; end
    q[n].delete();
  endtask

  // ---------------- client and host helpers ----------------
  task automatic client(input int n, input logic [OPC_W-1:0] opc, input int unsigned p,
                        output bit ok, output longint bal);
    #1;
    req_valid[n] = 1'b1;
    req_op[n]    = '{opcode: opc, param: PARAM_W'(p)};
    @(posedge clk);
    while (!req_ready[n]) @(posedge clk);
    #1 req_valid[n] = 1'b0;
    do @(posedge clk); while (!rsp_valid[n]);
    ok  = rsp_ok[n];
    bal = longint'(rsp_data[n]);
  endtask

  task automatic host_verb(input int n, input verb_e v, input int dst,
                           input logic [ADDR_W-1:0] ra, input logic [DATA_W-1:0] dat,
                           input logic [RTAG_W-1:0] tag);
    #1;
    host_sq_valid[n] = 1'b1;
    host_sq_data[n]  = '{verb: v, dst: NODE_W'(dst), raddr: ra, laddr: 30'h40,
                          data: dat, rtag: tag};
    @(posedge clk);
    while (!host_sq_ready[n]) @(posedge clk);
    #1 host_sq_valid[n] = 1'b0;
  endtask

  // host completions with the tags used below (0x6x: never used by the SMR)
  int host_acks = 0, host_reads = 0;
  logic [DATA_W-1:0] host_read_val = '0;
  always @(posedge clk)
    for (int i = 0; i < N; i++)
      if (host_cpl_valid[i] && host_cpl_data[i].rtag[RTAG_W-1:4] == 4'h6) begin
        if (host_cpl_data[i].is_ack) host_acks++;
        else begin host_reads++; host_read_val = host_cpl_data[i].data; end
      end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  // wait until every live replica holds 'exp', or give up after 'limit' cycles
  task automatic wait_bal(input longint exp, input int limit, input string what);
    int t;
    bit same;
    t = 0;
    do begin
      @(posedge clk);
      same = 1'b1;
      for (int i = 0; i < N; i++) if (!dead[i] && balance[i] != exp) same = 1'b0;
      t++;
    end while (!same && t < limit);
    check(same, what);
    if (!same)
      for (int i = 0; i < N; i++) $display("  replica %0d balance %0d", i, balance[i]);
  endtask

  task automatic mech(input bit happened, input string what, input int n);
    checks++;
    if (!happened) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("mechanism %-40s %0d", what, n);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- script ----------------
  initial begin
    bit ok, ok1, ok3;
    longint bal, b1, b3;
    int s0, t;
    repeat (5) @(posedge clk);
    rst_n[1] <= 1'b1;
    repeat (32) @(posedge clk);
    rst_n <= '1;
    repeat (3 * HBP) @(posedge clk);
    check(is_leader == 4'b0001, "replica 0 leads after start-up");
    for (int i = 0; i < N; i++) check(alive[i] == 4'b1111, "all replicas alive");

    // 1 deposits from every replica at once
    fork
      begin client(0, OP_DEPOSIT, 100, ok, bal); check(ok, "deposit 0 accepted"); end
      begin bit o; longint b; client(1, OP_DEPOSIT, 200, o, b); check(o, "deposit 1"); end
      begin bit o; longint b; client(2, OP_DEPOSIT, 300, o, b); check(o, "deposit 2"); end
      begin bit o; longint b; client(3, OP_DEPOSIT, 400, o, b); check(o, "deposit 3"); end
    join
    wait_bal(1000, 400, "deposits converge to 1000");
    check(commits[0] == 0, "deposits need no consensus");

    // 2 withdraw at the leader
    client(0, OP_WITHDRAW, 50, ok, bal);
    check(ok, "withdraw 50 at leader submitted");
    wait_bal(950, 600, "leader withdraw replicated: 950");

    // 3 withdraw at a follower, forwarded
    client(2, OP_WITHDRAW, 30, ok, bal);
    check(ok, "withdraw 30 at follower submitted");
    wait_bal(920, 800, "forwarded withdraw replicated: 920");
    check(forwards[2] == 1, "follower 2 forwarded one operation");

    // 4 local permissibility check fails
    client(3, OP_WITHDRAW, 5000, ok, bal);
    check(!ok, "overdraw refused locally");
    check(bal == 920, "query value in refusal is the balance");
    repeat (100) @(posedge clk);
    check(balance[3] == 920 && commits[0] == 2, "refused withdraw not replicated");

    // 5 concurrent overdraw: both pass locally, the leader applies only one
    fork
      client(1, OP_WITHDRAW, 600, ok1, b1);
      client(3, OP_WITHDRAW, 600, ok3, b3);
    join
    check(ok1 && ok3, "both 600 withdraws submitted");
    wait_bal(320, 1500, "only one 600 withdraw applied: 320");
    t = 0;
    while (commits[0] != 4 && t < 1000) begin @(posedge clk); t++; end
    check(commits[0] == 4 && rejections[0] == 1, "leader logged the second one as a no-op");
    repeat (50) @(posedge clk);
    check(slot[1] == 4 && slot[2] == 4 && slot[3] == 4, "followers at slot 4");

    // 6 host verbs
    host_verb(3, V_WRITE, 2, 30'h50, 64'hDEAD, 8'h61);   // follower's host: refused
    host_verb(0, V_WRITE, 2, 30'h51, 64'hBEEF, 8'h62);   // leader's host: allowed
    host_verb(3, V_READ,  0, HB_ADDR, '0, 8'h63);
    repeat (100) @(posedge clk);
    check(perm_err[2] == 1, "non-leader write refused by the QP permission");
    check(host_acks == 1, "leader's host write acknowledged");
    check(g_node[2].u_hbm.peek(30'h51) == 64'hBEEF && g_node[2].u_hbm.peek(30'h50) == 0,
          "only the permitted write reached HBM");
    check(host_reads == 1 && host_read_val != 0, "host read returned the heartbeat word");

    // 7 crash the leader in the middle of an Accept
    s0 = int'(slot[0]);
    client(0, OP_WITHDRAW, 20, ok, bal);
    check(ok, "withdraw 20 at leader submitted");
    t = 0;
    while (!(balance[2] == 300 && balance[3] == 300) && t < 800) begin @(posedge clk); t++; end
    check(wt_seen_to3 == 5, "leader sent its fifth entry");
    crash(0);
    check(balance[1] == 320, "replica 1 missed the last entry");
    check(g_node[2].u_hbm.peek(LOG_BASE + ADDR_W'(s0)) != 0, "entry is in replica 2's log");

    // 8 re-election and recovery
    t = 0;
    while (!is_leader[1] && t < 6 * HBP) begin @(posedge clk); t++; end
    check(is_leader[1], "replica 1 elected");
    check(alive[1] == 4'b1110, "replica 1 removed the crashed leader");
    client(1, OP_WITHDRAW, 10, ok, bal);
    check(ok, "withdraw 10 at new leader submitted");
    wait_bal(290, 3000, "adopted entry and new entry applied: 290");
    repeat (50) @(posedge clk);
    check(adoptions[1] == 1, "new leader adopted one entry");
    check(duplicates[2] == 1 && duplicates[3] == 1, "replicas 2, 3 skipped the re-sent entry");
    check(slot[1] == 6 && slot[2] == 6 && slot[3] == 6, "live replicas at slot 6");
    if (slot[1] != 6 || slot[2] != 6 || slot[3] != 6) $display("  slots %0d %0d %0d", slot[1], slot[2], slot[3]);

    // 9 deposit after the crash
    client(3, OP_DEPOSIT, 5, ok, bal);
    wait_bal(295, 400, "deposit after the crash: 295");

    // ---------------- mechanisms ----------------
    begin
      int sw, pe, rt, rm, el, ds, vs;
      sw = 0; pe = 0; rt = 0; rm = 0; el = 0; ds = 0; vs = 0;
      for (int i = 0; i < N; i++) begin
        sw += int'(perm_switches[i]); pe += int'(perm_err[i]); rt += int'(retries[i]);
        rm += int'(removals[i]); el += int'(elections[i]); ds += int'(dispatched[i]);
        vs += int'(verbs_sent[i]);
      end
      mech(ds > 0,              "RPC dispatched to a method", ds);
      mech(commits[0] > 0,      "Mu round committed (leader 0)", int'(commits[0]));
      mech(commits[1] > 0,      "Mu round committed (leader 1)", int'(commits[1]));
      mech(forwards[2] + forwards[1] + forwards[3] > 0, "proposal forwarded to leader",
           int'(forwards[1] + forwards[2] + forwards[3]));
      mech(rejections[0] > 0,   "invariant rejection at the leader", int'(rejections[0]));
      mech(rm > 0,              "failed replica removed", rm);
      mech(el > 0,              "leader re-elected", el);
      mech(sw > 0,              "QP permission switched", sw);
      mech(pe > 0,              "write refused by QP permission", pe);
      mech(rt > 0,              "unanswered verbs re-sent", rt);
      mech(adoptions[1] > 0,    "log entry adopted by new leader", int'(adoptions[1]));
      mech(duplicates[2] > 0,   "duplicate Write-Through skipped", int'(duplicates[2]));
      mech(host_acks + host_reads > 0, "host verb completed", host_acks + host_reads);
      mech(dropped > 0,         "packets lost to the crash", int'(dropped));
      $display("verbs sent %0d, packets delivered %0d, end cycle %0d", vs, delivered, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
