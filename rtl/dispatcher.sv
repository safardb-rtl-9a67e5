// dispatcher: turns an incoming RPC payload into a method invocation.
//
// The paper's FPGA-specific RPC verb carries "a transaction ID (opcode) and parameters";
// on the receiving FPGA a Dispatcher "selects the appropriate accelerator, forwards the
// parameters, and invokes the accelerator" (Figure 1: op_code | parameters, a small buffer
// in front of the Dispatcher, and Method 1..3 behind it). This block implements that:
//   * a small input buffer (axis_fifo, depth RPC_DEPTH) between the NIC receive path and
//     the decoder, as drawn in Figure 1 (the figure prints no depth);
//   * a decoder that raises meth_valid[opcode] for one cycle with the parameter, for every
//     opcode below NUM_METHODS other than 0 (no-op: an operation the leader rejected);
//   * meth_committed tells the method the payload came by RPC Write-Through, i.e. it is a
//     totally ordered conflicting operation committed by the SMR;
//   * a Write-Through for a log slot other than the one the SMR expects next is a
//     re-send (a new leader re-sending an entry it adopted): its log word is rewritten by
//     the NIC, but it invokes no method, so no replica applies an entry twice;
//   * seen_commit pulses for every Write-Through, no-ops included, so the SMR can track
//     the log position;
//   * an RPC whose flag word is RPC_FLAG_FWD is a conflicting operation a follower forwards
//     to the leader; it goes to the SMR proposal port (fwd_*) instead of a method. The paper
//     does not say how a follower's conflicting operation reaches the leader; this is the
//     design's choice, reusing the same RPC verb.
// Timing: one RPC per cycle leaves the buffer. A forwarded operation that meets fwd_ready low
// is dropped and counted in fwd_drops (this design's choice:
// the paper says nothing on flow control for forwarded operations).
module dispatcher
  import safardb_pkg::*;
#(
  parameter int NUM_METHODS = NUM_OPCODES,
  parameter int RPC_DEPTH   = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   rpc_valid,
  output logic                   rpc_ready,
  input  rpc_t                   rpc_data,
  input  logic [ADDR_W-1:0]      next_log_addr,  // log slot the SMR expects next
  output logic [NUM_METHODS-1:0] meth_valid,
  output logic [PARAM_W-1:0]     meth_param,
  output logic                   meth_committed,
  output logic                   fwd_valid,
  input  logic                   fwd_ready,
  output op_t                    fwd_op,
  output logic                   seen_commit,
  output logic [15:0]            duplicates,
  output logic [15:0]            fwd_drops,      // forwards dropped because fwd_ready was low
  output logic [31:0]            dispatched
);
  logic  b_valid, b_ready;
  rpc_t  b_data;
  op_t   op;
  logic  is_fwd, is_dup;
  logic [$clog2(RPC_DEPTH):0] b_count;

  axis_fifo #(.WIDTH($bits(rpc_t)), .DEPTH(RPC_DEPTH)) u_buf (
    .clk, .rst_n,
    .s_valid(rpc_valid), .s_ready(rpc_ready), .s_data(rpc_data),
    .m_valid(b_valid), .m_ready(b_ready), .m_data(b_data), .count(b_count));

  assign op     = op_t'(b_data.data[OP_W-1:0]);
  assign is_fwd = (b_data.verb == V_RPC) && (b_data.data[DATA_W-1:OP_W] == RPC_FLAG_FWD);
  assign is_dup = (b_data.verb == V_RPC_WT) && (b_data.addr != next_log_addr);
  // A forwarded proposal is never allowed to hold up the buffer: if the SMR cannot take it
  // this cycle it is dropped and counted. Holding it would block the NIC receive path, and
  // with it the ACKs the leader's own Accept rounds are waiting for (a deadlock).
  assign b_ready = 1'b1;

  assign fwd_valid = b_valid && is_fwd;
  assign fwd_op    = op;

  always_comb begin
    meth_valid = '0;
    if (b_valid && !is_fwd && !is_dup && op.opcode != OP_NOP && int'(op.opcode) < NUM_METHODS)
      meth_valid[op.opcode] = 1'b1;
  end
  assign meth_param     = op.param;
  assign meth_committed = (b_data.verb == V_RPC_WT);
  assign seen_commit    = b_valid && (b_data.verb == V_RPC_WT) && !is_dup;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dispatched <= '0; duplicates <= '0; fwd_drops <= '0;
    end else if (b_valid && b_ready) begin
      dispatched <= dispatched + 1'b1;
      if (is_dup) duplicates <= duplicates + 1'b1;
      if (is_fwd && !fwd_ready) fwd_drops <= fwd_drops + 1'b1;
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(meth_valid));
endmodule
