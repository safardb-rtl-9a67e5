// tb_rdma_tx: tests the transmit path of the network kernel.
//
// Random send-queue entries (Read, Write, RPC, RPC Write-Through to other replicas) and
// random replies from the receive path compete for a MAC that is ready two cycles in three.
// The testbench checks that a reply always goes first and unchanged, that a send-queue
// entry becomes a packet with this replica as source and a NIC tag that rises by one per
// issued verb, that each Read is posted to the RQ and each write-type verb to the ACK queue
// under that tag with the requester's tag and landing address, and the verbs_sent count.
module tb_rdma_tx;
  import safardb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = 3'd2;
  logic sq_valid = 1'b0, sq_ready, rep_valid = 1'b0, rep_ready, tx_valid, tx_ready = 1'b0;
  sq_entry_t sq_data = '0;
  pkt_t rep_data = '0, tx_data;
  logic rq_ins, ack_ins;
  logic [NTAG_W-1:0] ins_tag;
  vt_entry_t ins_entry;
  logic [31:0] verbs_sent;

  rdma_tx dut (.*);

  int n_sq = 0, n_rep = 0, n_rd = 0, n_wr = 0;
  logic [NTAG_W-1:0] exp_tag = '0;

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    check(int'(verbs_sent) == n_sq, "verbs_sent count");
    check(tx_valid == (sq_valid || rep_valid), "tx_valid when anything waits");
    if (rep_valid) begin
      check(tx_data == rep_data, "reply passes unchanged");
      check(!sq_ready && !rq_ins && !ack_ins, "reply has priority over the send queue");
      if (tx_ready) n_rep++;
    end else if (sq_valid) begin
      check(tx_data.verb == sq_data.verb && tx_data.dst == sq_data.dst &&
            tx_data.addr == sq_data.raddr && tx_data.data == sq_data.data &&
            tx_data.src == node_id && tx_data.tag == exp_tag, "packet built from the SQ entry");
      check(sq_ready == tx_ready, "SQ taken when the MAC is ready");
      check(rq_ins == (tx_ready && sq_data.verb == V_READ), "Read posted to RQ");
      check(ack_ins == (tx_ready && sq_data.verb != V_READ), "write-type posted to ACK queue");
      check(ins_tag == exp_tag && ins_entry.rtag == sq_data.rtag &&
            ins_entry.laddr == sq_data.laddr, "posted entry");
      if (tx_ready) begin
        n_sq++;
        exp_tag++;
        if (sq_data.verb == V_READ) n_rd++; else n_wr++;
      end
    end
    // new stimulus once the old one is taken
    if (!sq_valid || (sq_ready)) begin
      sq_valid <= ($urandom_range(0, 1) == 1);
      sq_data  <= '{verb: verb_e'($urandom_range(0, 3)), dst: NODE_W'($urandom_range(3, 7)),
                   raddr: ADDR_W'($urandom), laddr: ADDR_W'($urandom),
                   data: {$urandom, $urandom}, rtag: RTAG_W'($urandom)};
    end
    if (!rep_valid || rep_ready) begin
      rep_valid <= ($urandom_range(0, 3) == 0);
      rep_data  <= '{verb: ($urandom_range(0, 1) == 1) ? V_ACK : V_READ_RSP,
                    src: node_id, dst: NODE_W'($urandom), addr: ADDR_W'($urandom),
                    data: {$urandom, $urandom}, tag: NTAG_W'($urandom)};
    end
    tx_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5000) @(posedge clk);
    check(n_rd > 100 && n_wr > 100 && n_rep > 100 && n_sq > 300, "all verb kinds sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
