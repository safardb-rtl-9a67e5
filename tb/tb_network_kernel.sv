// tb_network_kernel: two network kernels (replicas 0 and 1) wired back to back, each with
// its own HBM model.
//
// Directed part: replica 0 Writes a word into replica 1's HBM, Reads it back into its own
// HBM, sends an RPC and an RPC Write-Through; the testbench checks the completions (tag,
// ACK or data), both HBMs and what replica 1's dispatcher port receives. Then replica 1's
// QPC is switched to accept writes only from replica 2: replica 0's next Write is refused
// (perm_err, no completion, HBM unchanged) while its Read still works.
// Random part: both replicas issue 400 random verbs at each other at once; every verb must
// complete exactly once with its own tag; the only RQ / ACK entry lost is the one of the
// refused Write, whose ACK never comes.
module tb_network_kernel;
  import safardb_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [1:0] sq_valid = '0, sq_ready, cpl_valid, rpc_valid, rpc_ready;
  sq_entry_t sq_data [2];
  cpl_t cpl_data [2];
  rpc_t rpc_data [2];
  logic [1:0] mreq_valid, mreq_ready, mreq_we, mrsp_valid;
  logic [ADDR_W-1:0] mreq_addr [2];
  logic [DATA_W-1:0] mreq_wdata [2], mrsp_rdata [2];
  logic [1:0] perm_mod_valid = '0;
  logic [N-1:0] perm_mod_vec [2];
  logic [N-1:0] perm [2];
  logic [1:0] tx_valid, tx_ready, rx_valid = '0, rx_ready;
  pkt_t tx_data [2], rx_data [2];
  logic [15:0] perm_err [2], perm_switches [2], lost_replies [2];
  logic [31:0] verbs_sent [2];

  assign rpc_ready = 2'b11;
  // links 0 -> 1 and 1 -> 0: a switch buffer of unbounded depth, 3 cycles of latency
  assign tx_ready = 2'b11;
  typedef struct packed { longint unsigned due; pkt_t p; } flight_t;
  flight_t lq [2][$];
  longint unsigned cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int d = 0; d < 2; d++) begin
      if (rx_valid[d] && rx_ready[d]) void'(lq[d].pop_front());
      if (tx_valid[1 - d] && rst_n) lq[d].push_back('{due: cyc + 3, p: tx_data[1 - d]});
      rx_valid[d] <= lq[d].size() != 0 && lq[d][0].due <= cyc + 1;
      rx_data[d]  <= (lq[d].size() != 0) ? lq[d][0].p : '0;
    end
  end

  for (genvar i = 0; i < 2; i++) begin : g
    network_kernel #(.N_NODES(N), .SQ_DEPTH(4)) u_nk (
      .clk, .rst_n, .node_id(NODE_W'(i)),
      .sq_valid(sq_valid[i]), .sq_ready(sq_ready[i]), .sq_data(sq_data[i]),
      .cpl_valid(cpl_valid[i]), .cpl_data(cpl_data[i]),
      .rpc_valid(rpc_valid[i]), .rpc_ready(rpc_ready[i]), .rpc_data(rpc_data[i]),
      .mem_req_valid(mreq_valid[i]), .mem_req_ready(mreq_ready[i]), .mem_req_we(mreq_we[i]),
      .mem_req_addr(mreq_addr[i]), .mem_req_wdata(mreq_wdata[i]),
      .mem_rsp_valid(mrsp_valid[i]), .mem_rsp_rdata(mrsp_rdata[i]),
      .perm_mod_valid(perm_mod_valid[i]), .perm_mod_vec(perm_mod_vec[i]), .perm(perm[i]),
      .tx_valid(tx_valid[i]), .tx_ready(tx_ready[i]), .tx_data(tx_data[i]),
      .rx_valid(rx_valid[i]), .rx_ready(rx_ready[i]), .rx_data(rx_data[i]),
      .perm_err(perm_err[i]), .perm_switches(perm_switches[i]),
      .verbs_sent(verbs_sent[i]), .lost_replies(lost_replies[i]));
    hbm_model #(.LAT(5)) u_hbm (
      .clk, .rst_n, .req_valid(mreq_valid[i]), .req_ready(mreq_ready[i]), .req_we(mreq_we[i]),
      .req_addr(mreq_addr[i]), .req_wdata(mreq_wdata[i]),
      .rsp_valid(mrsp_valid[i]), .rsp_rdata(mrsp_rdata[i]));
  end

  cpl_t cpls [2][$];
  rpc_t rpcs [2][$];
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < 2; i++) begin
      if (cpl_valid[i]) cpls[i].push_back(cpl_data[i]);
      if (rpc_valid[i] && rpc_ready[i]) rpcs[i].push_back(rpc_data[i]);
    end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic post(input int i, input verb_e v, input logic [ADDR_W-1:0] ra,
                      input logic [ADDR_W-1:0] la, input logic [DATA_W-1:0] d,
                      input logic [RTAG_W-1:0] tag);
    #1;
    sq_valid[i] = 1'b1;
    sq_data[i]  = '{verb: v, dst: NODE_W'(1 - i), raddr: ra, laddr: la, data: d, rtag: tag};
    @(posedge clk);
    while (!sq_ready[i]) @(posedge clk);
    #1 sq_valid[i] = 1'b0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sq_data[0] = '0; sq_data[1] = '0; rx_data[0] = '0; rx_data[1] = '0;
    perm_mod_vec[0] = '0; perm_mod_vec[1] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // directed
    post(0, V_WRITE, 30'h100, '0, 64'h1234_5678_9ABC_DEF0, 8'h11);
    repeat (40) @(posedge clk);
    check(g[1].u_hbm.peek(30'h100) == 64'h1234_5678_9ABC_DEF0, "remote write in HBM");
    check(cpls[0].size() == 1 && cpls[0][0].is_ack && cpls[0][0].rtag == 8'h11 &&
          cpls[0][0].src == 1, "write acknowledged");
    post(0, V_READ, 30'h100, 30'h20, '0, 8'h12);
    repeat (40) @(posedge clk);
    check(cpls[0].size() == 2 && !cpls[0][1].is_ack && cpls[0][1].rtag == 8'h12 &&
          cpls[0][1].data == 64'h1234_5678_9ABC_DEF0, "read completion with data");
    check(g[0].u_hbm.peek(30'h20) == 64'h1234_5678_9ABC_DEF0, "read payload landed locally");
    post(0, V_RPC, '0, '0, 64'h0000_0001_0000_0007, 8'h13);
    post(0, V_RPC_WT, LOG_BASE, '0, 64'h0000_0002_0000_0009, 8'h14);
    repeat (40) @(posedge clk);
    check(rpcs[1].size() == 2 && rpcs[1][0].verb == V_RPC && rpcs[1][1].verb == V_RPC_WT &&
          rpcs[1][1].addr == LOG_BASE && rpcs[1][1].data == 64'h0000_0002_0000_0009,
          "RPCs reach the remote dispatcher");
    check(g[1].u_hbm.peek(LOG_BASE) == 64'h0000_0002_0000_0009, "write-through in remote log");
    check(cpls[0].size() == 4, "RPCs acknowledged");
    // permission switch at replica 1
    perm_mod_valid[1] <= 1'b1; perm_mod_vec[1] <= 4'b0100;
    @(posedge clk);
    perm_mod_valid[1] <= 1'b0;
    @(posedge clk);
    check(perm[1] == 4'b0100 && perm_switches[1] == 1, "permission switched");
    post(0, V_WRITE, 30'h100, '0, 64'hFFFF, 8'h15);
    post(0, V_READ, 30'h100, 30'h21, '0, 8'h16);
    repeat (40) @(posedge clk);
    check(perm_err[1] == 1 && g[1].u_hbm.peek(30'h100) == 64'h1234_5678_9ABC_DEF0,
          "write refused by the QPC");
    check(cpls[0].size() == 5 && cpls[0][4].rtag == 8'h16, "only the read completed");
    check(lost_replies[0] == 0, "no entry lost");
    // random traffic both ways, permission open again
    perm_mod_valid[1] <= 1'b1; perm_mod_vec[1] <= '1;
    @(posedge clk);
    perm_mod_valid[1] <= 1'b0;
    cpls[0].delete(); cpls[1].delete();
    fork
      for (int k = 0; k < 400; k++) begin
        post(0, verb_e'($urandom_range(0, 3)), 30'h200 + ADDR_W'(k), 30'h300 + ADDR_W'(k % 32),
             {$urandom, $urandom}, RTAG_W'(k));
        repeat ($urandom_range(0, 12)) @(posedge clk);
      end
      for (int k = 0; k < 400; k++) begin
        post(1, verb_e'($urandom_range(0, 3)), 30'h200 + ADDR_W'(k), 30'h300 + ADDR_W'(k % 32),
             {$urandom, $urandom}, RTAG_W'(k));
        repeat ($urandom_range(0, 12)) @(posedge clk);
      end
    join
    repeat (2000) @(posedge clk);
    for (int i = 0; i < 2; i++) begin
      bit got [256];
      bit once;
      for (int k = 0; k < 256; k++) got[k] = 0;
      once = 1;
      foreach (cpls[i][j]) begin
        if (got[cpls[i][j].rtag] && cpls[i][j].rtag >= 8'(400 - 256)) once = 0;
        got[cpls[i][j].rtag] = 1;
      end
      check(cpls[i].size() == 400, "every random verb completed");
      if (cpls[i].size() != 400) $display("  replica %0d: %0d completions, lost %0d, perm_err %0d", i, cpls[i].size(), lost_replies[i], perm_err[1-i]);
      check(once, "no completion twice");
      // the refused Write never got its ACK: its ACK-queue entry is reclaimed (counted as
      // lost) when the NIC tag wraps around during the random part
      check(int'(lost_replies[i]) == (i == 0 ? 1 : 0) && perm_err[1 - i] == 16'(1 - i),
            "only the refused write's entry was lost");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
