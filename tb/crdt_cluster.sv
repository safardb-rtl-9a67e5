// crdt_cluster: testbench harness, N replicas of safardb_node running the application
// kernel chosen by APP (a CRDT, or the Courseware WRDT), each with its own HBM model, joined
// by a switch model with a fixed per-link latency (one in-order queue per destination). A
// test drives the clients through the client() task and reads each replica's application
// state from 'state'.
module crdt_cluster
  import safardb_pkg::*;
#(
  parameter int N   = 8,
  parameter int APP = 1,
  parameter int LAT = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic signed [DATA_W-1:0] state [N],
  output logic [31:0] verbs [N],
  output logic [31:0] disp [N]
);
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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
  logic [31:0] commits [N], slot [N];
  logic [15:0] adoptions [N], rejections [N], forwards [N], aborts [N], elections [N],
               removals [N], perm_err [N], perm_switches [N], lost_replies [N],
               duplicates [N], retries [N];

  initial for (int i = 0; i < N; i++) begin req_op[i] = '0; rx_data[i] = '0; end

  for (genvar i = 0; i < N; i++) begin : g_node
    safardb_node #(.N_NODES(N), .HB_PERIOD(256), .APP(APP)) u_node (
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
      .balance(state[i]), .commits(commits[i]), .slot(slot[i]),
      .adoptions(adoptions[i]), .rejections(rejections[i]), .forwards(forwards[i]),
      .aborts(aborts[i]), .elections(elections[i]), .removals(removals[i]),
      .perm_err(perm_err[i]), .perm_switches(perm_switches[i]),
      .verbs_sent(verbs[i]), .lost_replies(lost_replies[i]),
      .dispatched(disp[i]), .duplicates(duplicates[i]), .retries(retries[i]));

    hbm_model #(.LAT(6)) u_hbm (
      .clk, .rst_n,
      .req_valid(mreq_valid[i]), .req_ready(mreq_ready[i]), .req_we(mreq_we[i]),
      .req_addr(mreq_addr[i]), .req_wdata(mreq_wdata[i]),
      .rsp_valid(mrsp_valid[i]), .rsp_rdata(mrsp_rdata[i]));
  end

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
        q[int'(tx_data[s].dst)].push_back('{due: cyc + LAT, p: tx_data[s]});
    for (int d = 0; d < N; d++) begin
      rx_valid[d] <= rst_n && q[d].size() != 0 && q[d][0].due <= cyc + 1;
      rx_data[d]  <= (q[d].size() != 0) ? q[d][0].p : '0;
    end
  end

  // one request at replica n; returns its response
  task automatic client(input int n, input logic [OPC_W-1:0] opc, input int unsigned p,
                        output bit ok, output logic [DATA_W-1:0] d);
    #1;
    req_valid[n] = 1'b1;
    req_op[n]    = '{opcode: opc, param: PARAM_W'(p)};
    @(posedge clk);
    while (!req_ready[n]) @(posedge clk);
    #1 req_valid[n] = 1'b0;
    do @(posedge clk); while (!rsp_valid[n]);
    ok = rsp_ok[n];
    d  = rsp_data[n];
  endtask
endmodule
