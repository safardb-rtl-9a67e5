// rdma_tx: transmit path of the soft RDMA NIC (network kernel).
//
// Follows the paper's FPGA Read and Write paths: the network kernel pops a verb from the
// send queue (step 2), posts an RQE to the Receive Queue for a Read (step 4) or an expected
// ACK to the ACK queue for a write-type verb, and packages the packet for the Ethernet MAC
// (step 5). The same output also carries the packets the receive path generates for remote
// requesters: Read payloads (step a) and ACKs. Those go first, so a replica always answers
// its peers even while its own send queue is busy (this design's choice).
// Each verb gets the next value of a free-running NIC tag; the tag indexes the RQ / ACK
// queue and comes back in the reply. The QPC check on the sending side is omitted: the
// paper's QPC also holds connection information (addresses) that this packet format does
// not need, and write permission is enforced at the receiver.
// Timing: combinational from inputs to the packet output; one packet per cycle.
module rdma_tx
  import safardb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] node_id,
  // send queue head
  input  logic              sq_valid,
  output logic              sq_ready,
  input  sq_entry_t         sq_data,
  // replies built by the receive path
  input  logic              rep_valid,
  output logic              rep_ready,
  input  pkt_t              rep_data,
  // to the Ethernet MAC
  output logic              tx_valid,
  input  logic              tx_ready,
  output pkt_t              tx_data,
  // RQ / ACK queue posts
  output logic              rq_ins,
  output logic              ack_ins,
  output logic [NTAG_W-1:0] ins_tag,
  output vt_entry_t         ins_entry,
  output logic [31:0]       verbs_sent
);
  logic [NTAG_W-1:0] ntag;
  logic take_sq;

  assign take_sq   = !rep_valid && sq_valid;
  assign tx_valid  = rep_valid || sq_valid;
  assign rep_ready = tx_ready;
  assign sq_ready  = tx_ready && !rep_valid;

  always_comb begin
    if (rep_valid) begin
      tx_data = rep_data;
    end else begin
      tx_data.verb = sq_data.verb;
      tx_data.src  = node_id;
      tx_data.dst  = sq_data.dst;
      tx_data.addr = sq_data.raddr;
      tx_data.data = sq_data.data;
      tx_data.tag  = ntag;
    end
  end

  assign ins_tag         = ntag;
  assign ins_entry.rtag  = sq_data.rtag;
  assign ins_entry.laddr = sq_data.laddr;
  assign rq_ins  = take_sq && tx_ready && (sq_data.verb == V_READ);
  assign ack_ins = take_sq && tx_ready && (sq_data.verb inside {V_WRITE, V_RPC, V_RPC_WT});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ntag <= '0;
      verbs_sent <= '0;
    end else if (take_sq && tx_ready) begin
      ntag <= ntag + 1'b1;
      verbs_sent <= verbs_sent + 1'b1;
    end
  end

  a_sq_verb: assert property (@(posedge clk) disable iff (!rst_n)
    sq_valid |-> sq_data.verb inside {V_READ, V_WRITE, V_RPC, V_RPC_WT});
  a_no_self: assert property (@(posedge clk) disable iff (!rst_n)
    sq_valid |-> sq_data.dst != node_id);
endmodule
