// network_kernel: the replica's soft RDMA NIC.
//
// The paper builds on an FPGA RoCEv2 stack (StRoM) and draws its network kernel as a
// transmit path, a receive path and a Queue Pair Context, fed by an AXI-Stream send queue
// and holding a Receive Queue; there is no completion queue. This block wires exactly
// those parts: send queue (axis_fifo) -> rdma_tx -> Ethernet MAC, Ethernet MAC -> rdma_rx,
// with the QPC consulted by the receive path and modified directly by the SMR, and two
// verb_tables as the RQ and the ACK queue. Packet framing (Ethernet/IP/UDP/BTH headers,
// ICRC) belongs to the MAC and the RoCE stack the paper reuses and is not modelled: a
// packet here is the pkt_t record.
// Interfaces: send queue in (sq_*), completions out (cpl_*), remote operations to the
// dispatcher (rpc_*), HBM port (mem_*), QPC modify port (perm_*), MAC stream (tx_*, rx_*).
module network_kernel
  import safardb_pkg::*;
#(
  parameter int N_NODES  = 8,
  parameter int SQ_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NODE_W-1:0]  node_id,
  input  logic               sq_valid,
  output logic               sq_ready,
  input  sq_entry_t          sq_data,
  output logic               cpl_valid,
  output cpl_t               cpl_data,
  output logic               rpc_valid,
  input  logic               rpc_ready,
  output rpc_t               rpc_data,
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [ADDR_W-1:0]  mem_req_addr,
  output logic [DATA_W-1:0]  mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  logic [DATA_W-1:0]  mem_rsp_rdata,
  input  logic               perm_mod_valid,
  input  logic [N_NODES-1:0] perm_mod_vec,
  output logic [N_NODES-1:0] perm,
  output logic               tx_valid,
  input  logic               tx_ready,
  output pkt_t               tx_data,
  input  logic               rx_valid,
  output logic               rx_ready,
  input  pkt_t               rx_data,
  output logic [15:0]        perm_err,
  output logic [15:0]        perm_switches,
  output logic [31:0]        verbs_sent,
  output logic [15:0]        lost_replies
);
  logic      q_valid, q_ready;
  sq_entry_t q_data;
  logic [$clog2(SQ_DEPTH):0] q_count;
  logic      rep_valid, rep_ready;
  pkt_t      rep_data;
  logic      rq_ins, ack_ins, rq_del, ack_del;
  logic [NTAG_W-1:0] ins_tag, del_tag;
  vt_entry_t ins_entry, rq_entry, ack_entry;
  logic      rq_hit, ack_hit;
  logic [NODE_W-1:0] chk_src;
  logic      chk_ok;
  logic [15:0] rq_pend, ack_pend, rq_lost, ack_lost;

  axis_fifo #(.WIDTH($bits(sq_entry_t)), .DEPTH(SQ_DEPTH)) u_sq (
    .clk, .rst_n,
    .s_valid(sq_valid), .s_ready(sq_ready), .s_data(sq_data),
    .m_valid(q_valid), .m_ready(q_ready), .m_data(q_data), .count(q_count));

  rdma_tx u_tx (
    .clk, .rst_n, .node_id,
    .sq_valid(q_valid), .sq_ready(q_ready), .sq_data(q_data),
    .rep_valid, .rep_ready, .rep_data,
    .tx_valid, .tx_ready, .tx_data,
    .rq_ins, .ack_ins, .ins_tag, .ins_entry, .verbs_sent);

  rdma_rx u_rx (
    .clk, .rst_n, .node_id,
    .rx_valid, .rx_ready, .rx_data,
    .chk_src, .chk_ok,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .rep_valid, .rep_ready, .rep_data,
    .rpc_valid, .rpc_ready, .rpc_data,
    .cpl_valid, .cpl_data,
    .rq_del, .ack_del, .del_tag, .rq_entry, .rq_hit, .ack_entry, .ack_hit,
    .perm_err);

  qpc #(.N_NODES(N_NODES)) u_qpc (
    .clk, .rst_n, .chk_src, .chk_ok,
    .mod_valid(perm_mod_valid), .mod_perm(perm_mod_vec), .perm, .switch_count(perm_switches));

  verb_table u_rq (
    .clk, .rst_n, .ins_valid(rq_ins), .ins_tag, .ins_entry,
    .del_valid(rq_del), .del_tag, .del_entry(rq_entry), .del_hit(rq_hit),
    .pending(rq_pend), .lost(rq_lost));

  verb_table u_ackq (
    .clk, .rst_n, .ins_valid(ack_ins), .ins_tag, .ins_entry,
    .del_valid(ack_del), .del_tag, .del_entry(ack_entry), .del_hit(ack_hit),
    .pending(ack_pend), .lost(ack_lost));

  assign lost_replies = rq_lost + ack_lost;
endmodule
