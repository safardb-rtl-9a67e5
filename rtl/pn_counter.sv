// pn_counter: FPGA-resident PN-Counter CRDT (positive-negative counter).
//
// As the paper describes it, the counter is two grow-only counters, one summing increments
// (P) and one summing decrements (N); its value is P - N. Both methods are reducible: they
// commute, need no coordination and no invariant, so each is applied locally and sent as an
// RDMA RPC to every other live replica, whose dispatcher applies it straight to P or N.
//   * Client port (same as the other application kernels): req_op in; opcode 1 increments
//     by the parameter, opcode 2 decrements, opcode 3 queries. One response per request:
//     an update answers once its RPCs are queued, a query answers at once with P - N.
//   * Method port (from the dispatcher): meth_valid[1] adds to P, meth_valid[2] to N.
//   * Updates landing in the same cycle (local and remote) are all applied.
// An update is sent as one RPC per replica rather than summed locally first (the paper
// notes repeated increments "can be summed locally"; batching is not built). P and N are
// 64-bit unsigned (width not given by the paper). The parameter is an unsigned 32-bit amount.
module pn_counter
  import safardb_pkg::*;
#(
  parameter int N_NODES = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NODE_W-1:0]      node_id,
  input  logic [N_NODES-1:0]     live,
  input  logic                   req_valid,
  output logic                   req_ready,
  input  op_t                    req_op,
  output logic                   rsp_valid,
  output logic                   rsp_ok,
  output logic [DATA_W-1:0]      rsp_data,
  input  logic [NUM_OPCODES-1:0] meth_valid,
  input  logic [PARAM_W-1:0]     meth_param,
  output logic                   sq_valid,
  input  logic                   sq_ready,
  output sq_entry_t              sq_data,
  output logic [DATA_W-1:0]      value
);
  localparam logic [OPC_W-1:0] OP_INC = 8'd1, OP_DEC = 8'd2;
  typedef enum logic [1:0] {S_IDLE, S_BCAST, S_RSP} state_e;
  state_e st;
  op_t cur;
  logic [N_NODES-1:0] todo;
  logic [NODE_W-1:0]  dst;
  logic [DATA_W-1:0]  p_cnt, n_cnt, dp, dn;

  assign req_ready = (st == S_IDLE);
  assign value     = p_cnt - n_cnt;

  always_comb begin
    dst = '0;
    for (int k = N_NODES-1; k >= 0; k--) if (todo[k]) dst = NODE_W'(k);
  end

  assign sq_valid      = (st == S_BCAST) && (todo != '0);
  assign sq_data.verb  = V_RPC;
  assign sq_data.dst   = dst;
  assign sq_data.raddr = '0;
  assign sq_data.laddr = '0;
  assign sq_data.data  = {RPC_FLAG_NONE, cur};
  assign sq_data.rtag  = '1;   // rtag[7]=1 on an ACK: never taken for an SMR round's answer

  assign rsp_valid = (st == S_RSP);
  assign rsp_ok    = 1'b1;
  assign rsp_data  = value;

  always_comb begin
    dp = '0; dn = '0;
    if (meth_valid[OP_INC]) dp += DATA_W'(meth_param);
    if (meth_valid[OP_DEC]) dn += DATA_W'(meth_param);
    if (st == S_IDLE && req_valid && req_op.opcode == OP_INC) dp += DATA_W'(req_op.param);
    if (st == S_IDLE && req_valid && req_op.opcode == OP_DEC) dn += DATA_W'(req_op.param);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; todo <= '0; p_cnt <= '0; n_cnt <= '0;
    end else begin
      case (st)
        S_IDLE: if (req_valid) begin
          cur <= req_op;
          if (req_op.opcode == OP_INC || req_op.opcode == OP_DEC) begin
            todo <= live & ~(N_NODES'(1) << node_id);
            st <= S_BCAST;
          end else st <= S_RSP;
        end
        S_BCAST: if (todo == '0) st <= S_RSP;
                 else if (sq_ready) todo[dst] <= 1'b0;
        S_RSP:   st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      p_cnt <= p_cnt + dp;
      n_cnt <= n_cnt + dn;
    end
  end
endmodule
