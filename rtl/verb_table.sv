// verb_table: table of outstanding verbs, indexed by the NIC tag.
//
// The network kernel keeps two of these. As the Receive Queue (RQ) it holds one Receive
// Queue Entry per RDMA Read in flight: the paper's Network kernel "posts an RQE to the RQ,
// which resides in on-chip BRAM" when it sends a Read and "pops the RQE" when the payload
// returns. As the ACK queue it holds one expected acknowledgement per write-type verb in
// flight: "before transmitting an RDMA packet, the Network kernel posts an expected ACK into
// the ACK queue" and "removes the expected ACK" when the ACK arrives.
// Because replies from different replicas may come back in any order, this design indexes
// the entries by the tag carried in the packet instead of popping them in order.
// Interface: post (ins_valid, ins_tag, ins_entry) from the transmit path; retire (del_valid,
// del_tag) from the receive path, which reads del_entry/del_hit combinationally in the same
// cycle. Timing: one post and one retire per cycle. A post to a tag that is still pending
// overwrites it and counts it in 'lost': the paper assumes a reliable network and gives no
// retransmission timer, so a reply that never comes (a crashed replica) only costs a slot.
module verb_table
  import safardb_pkg::*;
#(
  parameter int TAG_W = NTAG_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ins_valid,
  input  logic [TAG_W-1:0]  ins_tag,
  input  vt_entry_t         ins_entry,
  input  logic              del_valid,
  input  logic [TAG_W-1:0]  del_tag,
  output vt_entry_t         del_entry,
  output logic              del_hit,
  output logic [15:0]       pending,
  output logic [15:0]       lost
);
  localparam int DEPTH = 1 << TAG_W;
  vt_entry_t         ent [DEPTH];
  logic [DEPTH-1:0]  vld;

  assign del_entry = ent[del_tag];
  assign del_hit   = vld[del_tag];

  always_ff @(posedge clk) begin
    if (ins_valid) ent[ins_tag] <= ins_entry;
  end

  logic inc, dec;
  assign inc = ins_valid && !vld[ins_tag];
  assign dec = del_valid && vld[del_tag] && !(ins_valid && ins_tag == del_tag);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; pending <= '0; lost <= '0;
    end else begin
      if (del_valid) vld[del_tag] <= 1'b0;
      if (ins_valid) vld[ins_tag] <= 1'b1;
      if (ins_valid && vld[ins_tag] && !(del_valid && del_tag == ins_tag)) lost <= lost + 1'b1;
      pending <= pending + 16'(inc) - 16'(dec);
    end
  end
endmodule
