// tb_safardb_full: an eight-replica cluster with every safardb_node parameter at its
// default (8 replicas, 1024-cycle heartbeat period, 2^20-slot log).
//
// The replicas are joined by a switch model with a 4-cycle latency on every link and each
// has its own HBM model. The test runs two heartbeat periods so the scanners exchange
// heartbeats, then one complete operation of each class: a deposit on every replica (RPC,
// conflict-free) and a withdraw submitted at a follower (forwarded, ordered by a Mu round
// on replica 0 and written through to all seven followers). Expected balances are worked
// out here: 8 deposits of 10*(i+1) = 360, minus 60 = 300 on every replica.
module tb_safardb_full;
  import safardb_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  logic rst_n = 1'b0;

  logic [N-1:0] req_valid = '0, req_ready, rsp_valid, rsp_ok;
  op_t          req_op [N];
  logic [DATA_W-1:0] rsp_data [N];
  logic [N-1:0] host_sq_ready, host_cpl_valid;
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

  initial for (int i = 0; i < N; i++) begin req_op[i] = '0; rx_data[i] = '0; end

  for (genvar i = 0; i < N; i++) begin : g_node
    safardb_node u_node (
      .clk, .rst_n, .node_id(NODE_W'(i)),
      .req_valid(req_valid[i]), .req_ready(req_ready[i]), .req_op(req_op[i]),
      .rsp_valid(rsp_valid[i]), .rsp_ok(rsp_ok[i]), .rsp_data(rsp_data[i]),
      .host_sq_valid(1'b0), .host_sq_ready(host_sq_ready[i]), .host_sq_data('0),
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

    hbm_model #(.LAT(6)) u_hbm (
      .clk, .rst_n,
      .req_valid(mreq_valid[i]), .req_ready(mreq_ready[i]), .req_we(mreq_we[i]),
      .req_addr(mreq_addr[i]), .req_wdata(mreq_wdata[i]),
      .rsp_valid(mrsp_valid[i]), .rsp_rdata(mrsp_rdata[i]));
  end

  // switch: one in-order queue per destination, 4-cycle latency
  typedef struct packed {
    longint unsigned due;
    pkt_t            p;
  } flight_t;
  flight_t q [N][$];

  always @(posedge clk) begin
    for (int d = 0; d < N; d++)
      if (rx_valid[d] && rx_ready[d]) void'(q[d].pop_front());
    for (int s = 0; s < N; s++)
      if (tx_valid[s] && rst_n && int'(tx_data[s].dst) < N)
        q[int'(tx_data[s].dst)].push_back('{due: cyc + 4, p: tx_data[s]});
    for (int d = 0; d < N; d++) begin
      rx_valid[d] <= rst_n && q[d].size() != 0 && q[d][0].due <= cyc + 1;
      rx_data[d]  <= (q[d].size() != 0) ? q[d][0].p : '0;
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  task automatic client(input int n, input logic [OPC_W-1:0] opc, input int unsigned p,
                        output bit ok);
    #1;
    req_valid[n] = 1'b1;
    req_op[n]    = '{opcode: opc, param: PARAM_W'(p)};
    @(posedge clk);
    while (!req_ready[n]) @(posedge clk);
    #1 req_valid[n] = 1'b0;
    do @(posedge clk); while (!rsp_valid[n]);
    ok = rsp_ok[n];
  endtask

  task automatic wait_bal(input longint exp, input int limit, input string what);
    int t;
    bit same;
    t = 0;
    do begin
      @(posedge clk);
      same = 1'b1;
      for (int i = 0; i < N; i++) if (balance[i] != exp) same = 1'b0;
      t++;
    end while (!same && t < limit);
    check(same, what);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2 * 1024 + 100) @(posedge clk);
    check(is_leader == 8'h01, "replica 0 leads");
    for (int i = 0; i < N; i++) check(alive[i] == 8'hFF, "all eight replicas alive");
    for (int i = 0; i < N; i++) check(leader_id[i] == 0, "every replica follows replica 0");

    for (int i = 0; i < N; i++) begin
      client(i, OP_DEPOSIT, 10 * (i + 1), ok);
      check(ok, "deposit accepted");
    end
    wait_bal(360, 1000, "deposits converge to 360");

    client(5, OP_WITHDRAW, 60, ok);
    check(ok, "withdraw at follower submitted");
    wait_bal(300, 2000, "withdraw replicated to all eight: 300");
    repeat (50) @(posedge clk);
    check(commits[0] == 1 && forwards[5] == 1, "one forwarded proposal, one commit");
    for (int i = 0; i < N; i++) check(slot[i] == 1, "every replica at slot 1");
    check(g_node[7].u_hbm.peek(LOG_BASE) != 0, "entry in the last replica's log");
    for (int i = 0; i < N; i++) check(perm_err[i] == 0 && removals[i] == 0,
                                      "no refused writes or removals");
    $display("full-size run ended at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
