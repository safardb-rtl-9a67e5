// tb_rdma_rx: tests the receive path of the network kernel.
//
// Packets of every verb are sent in random order to a receive path connected to an HBM
// model, a permission vector held in the testbench (the QPC check) and RQ / ACK tables
// held in the testbench. Replies, dispatcher outputs and completions are collected and
// compared with what the testbench expects for each packet:
//   Write / RPC Write-Through: HBM written and ACK returned only when the source may
//     write; otherwise perm_err counts and nothing else happens. RPC Write-Through also
//     reaches the dispatcher with its log address.
//   Read: READ_RSP carrying the HBM word.  RPC: dispatcher, then ACK.
//   READ_RSP: payload written to the landing address of the RQ entry under the packet's
//     tag, completion with the requester's tag.  ACK: completion with the ACK entry's tag.
// The dispatcher and the MAC are ready only part of the time.
module tb_rdma_rx;
  import safardb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = 3'd0;
  logic rx_valid = 1'b0, rx_ready;
  pkt_t rx_data = '0;
  logic [NODE_W-1:0] chk_src;
  logic chk_ok;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [DATA_W-1:0] mem_req_wdata, mem_rsp_rdata;
  logic rep_valid, rep_ready = 1'b0;
  pkt_t rep_data;
  logic rpc_valid, rpc_ready = 1'b0;
  rpc_t rpc_data;
  logic cpl_valid;
  cpl_t cpl_data;
  logic rq_del, ack_del, rq_hit, ack_hit;
  logic [NTAG_W-1:0] del_tag;
  vt_entry_t rq_entry, ack_entry;
  logic [15:0] perm_err;

  logic [7:0] perm = 8'b0000_0010;
  vt_entry_t rq_tab [256], ack_tab [256];
  bit rq_v [256], ack_v [256];

  assign chk_ok    = perm[chk_src];
  assign rq_entry  = rq_tab[del_tag];
  assign rq_hit    = rq_v[del_tag];
  assign ack_entry = ack_tab[del_tag];
  assign ack_hit   = ack_v[del_tag];

  rdma_rx dut (.*);
  hbm_model #(.LAT(3), .STALL_EVERY(4)) u_hbm (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  pkt_t reps[$];
  rpc_t rpcs[$];
  cpl_t cpls[$];
  int n_err = 0;
  int seen [8];

  always @(posedge clk) if (rst_n) begin
    if (rep_valid && rep_ready) reps.push_back(rep_data);
    if (rpc_valid && rpc_ready) rpcs.push_back(rpc_data);
    if (cpl_valid) cpls.push_back(cpl_data);
    if (rq_del) rq_v[del_tag] = 0;
    if (ack_del) ack_v[del_tag] = 0;
    rep_ready <= ($urandom_range(0, 1) == 1);
    rpc_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic send(input pkt_t p);
    rx_valid <= 1'b1;
    rx_data  <= p;
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    rx_valid <= 1'b0;
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  logic [DATA_W-1:0] shadow [logic [ADDR_W-1:0]];

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin rq_v[i] = 0; ack_v[i] = 0; rq_tab[i] = '0; ack_tab[i] = '0; end
    for (int i = 0; i < 8; i++) seen[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int it = 0; it < 600; it++) begin
      pkt_t p;
      verb_e v;
      logic [ADDR_W-1:0] a;
      bit allowed;
      v = verb_e'($urandom_range(0, 5));
      a = ADDR_W'($urandom_range(0, 31));
      p = '{verb: v, src: NODE_W'($urandom_range(1, 3)), dst: node_id, addr: a,
            data: {$urandom, $urandom}, tag: NTAG_W'($urandom)};
      if (v == V_READ_RSP) begin
        rq_tab[p.tag] = '{rtag: RTAG_W'($urandom), laddr: ADDR_W'($urandom_range(32, 63))};
        rq_v[p.tag] = 1;
      end
      if (v == V_ACK) begin
        ack_tab[p.tag] = '{rtag: RTAG_W'($urandom), laddr: '0};
        ack_v[p.tag] = 1;
      end
      allowed = perm[p.src];
      reps.delete(); rpcs.delete(); cpls.delete();
      send(p);
      seen[int'(v)]++;
      case (v)
        V_WRITE, V_RPC_WT: begin
          if (allowed) begin
            shadow[a] = p.data;
            check(u_hbm.peek(a) == p.data, "write reached HBM");
            check(reps.size() == 1 && reps[0].verb == V_ACK && reps[0].dst == p.src &&
                  reps[0].tag == p.tag, "ACK returned");
            check(rpcs.size() == (v == V_RPC_WT ? 1 : 0), "Write-Through reaches dispatcher");
            if (v == V_RPC_WT && rpcs.size() == 1)
              check(rpcs[0].data == p.data && rpcs[0].addr == a && rpcs[0].verb == V_RPC_WT,
                    "dispatcher gets payload and log address");
          end else begin
            n_err++;
            check(reps.size() == 0 && rpcs.size() == 0, "refused write has no effect");
            check(int'(perm_err) == n_err, "perm_err counts refusals");
          end
        end
        V_READ: begin
          logic [DATA_W-1:0] e;
          e = shadow.exists(a) ? shadow[a] : '0;
          check(reps.size() == 1 && reps[0].verb == V_READ_RSP && reps[0].data == e &&
                reps[0].dst == p.src && reps[0].tag == p.tag, "read returns HBM word");
        end
        V_RPC: begin
          check(rpcs.size() == 1 && rpcs[0].data == p.data && rpcs[0].src == p.src,
                "RPC reaches dispatcher");
          check(reps.size() == 1 && reps[0].verb == V_ACK, "RPC acknowledged");
        end
        V_READ_RSP: begin
          check(u_hbm.peek(rq_tab[p.tag].laddr) == p.data, "payload landed");
          shadow[rq_tab[p.tag].laddr] = p.data;
          check(cpls.size() == 1 && !cpls[0].is_ack && cpls[0].rtag == rq_tab[p.tag].rtag &&
                cpls[0].data == p.data && cpls[0].src == p.src, "read completion");
          check(!rq_v[p.tag], "RQ entry retired");
        end
        V_ACK: begin
          check(cpls.size() == 1 && cpls[0].is_ack && cpls[0].rtag == ack_tab[p.tag].rtag &&
                cpls[0].src == p.src, "ACK completion");
          check(!ack_v[p.tag], "ACK entry retired");
          check(reps.size() == 0, "an ACK is not answered");
        end
        default: ;
      endcase
      if (it == 300) perm = 8'b0000_1000;   // leader switch to replica 3
    end
    for (int i = 0; i < 6; i++) check(seen[i] > 50, "every verb received");
    check(n_err > 50, "refusals exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
