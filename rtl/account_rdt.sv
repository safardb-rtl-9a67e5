// account_rdt: FPGA-resident Bank Account WRDT (well-coordinated replicated data type).
//
// State is one balance B, kept on chip. The paper classifies its methods as: deposit(d)
// reducible (conflict-free, summarizable), withdraw(w) conflicting with invariant
// B - w >= 0 (one synchronization group), and query() read-only. This block follows the
// paper's main configuration, RDMA RPC, for the reducible method: a local deposit updates B
// and is sent as an RPC to every other live replica, whose dispatcher applies it straight
// to B (path d of the paper's reducible-transaction figure, no HBM array).
//   * Client port: req_op (opcode, parameter) in, one rsp per request: query returns B;
//     deposit answers once its RPCs are queued; withdraw first runs the permissibility
//     check B >= w (rejected: rsp_ok = 0), then hands the operation to the SMR (rsp_ok = 1
//     means "submitted for ordering"; it takes effect when the SMR commits it).
//   * Method port (from the dispatcher): meth_valid[OP_DEPOSIT] adds, meth_valid
//     [OP_WITHDRAW] (a committed, totally ordered withdraw) subtracts.
//   * Execute port (from the local SMR when this replica leads): the leader re-checks the
//     invariant when it executes a withdraw (exec_ok, combinational) and applies it only if
//     it holds; an operation adopted from an earlier leader (exec_check = 0) is applied as
//     decided. Re-checking at the leader is this design's choice: the paper lists the
//     invariant and says the leader "executes the conflicting transaction".
// All updates that land in the same cycle are summed, so no update is ever lost.
// B is a signed 64-bit value (width not given by the paper).
module account_rdt
  import safardb_pkg::*;
#(
  parameter int N_NODES = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NODE_W-1:0]      node_id,
  input  logic [N_NODES-1:0]     live,        // correct set from the SMR
  // client
  input  logic                   req_valid,
  output logic                   req_ready,
  input  op_t                    req_op,
  output logic                   rsp_valid,
  output logic                   rsp_ok,
  output logic [DATA_W-1:0]      rsp_data,
  // dispatcher methods
  input  logic [NUM_OPCODES-1:0] meth_valid,
  input  logic [PARAM_W-1:0]     meth_param,
  // RPC verbs out
  output logic                   sq_valid,
  input  logic                   sq_ready,
  output sq_entry_t              sq_data,
  // conflicting operations to the SMR
  output logic                   prop_valid,
  input  logic                   prop_ready,
  output op_t                    prop_op,
  // leader execution
  input  logic                   exec_valid,
  input  op_t                    exec_op,
  input  logic                   exec_check,
  output logic                   exec_ok,
  output logic signed [DATA_W-1:0] balance
);
  typedef enum logic [2:0] {S_IDLE, S_BCAST, S_PROP, S_RSP} state_e;
  state_e st;
  op_t cur;
  logic [N_NODES-1:0] todo;
  logic [NODE_W-1:0]  dst;
  logic ok_r;

  function automatic logic signed [DATA_W-1:0] amt(input logic [PARAM_W-1:0] p);
    return $signed({{(DATA_W-PARAM_W){1'b0}}, p});
  endfunction

  assign req_ready = (st == S_IDLE);

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

  assign prop_valid = (st == S_PROP);
  assign prop_op    = cur;

  assign rsp_valid = (st == S_RSP);
  assign rsp_ok    = ok_r;
  assign rsp_data  = balance;

  assign exec_ok = (exec_op.opcode != OP_WITHDRAW) || (balance >= amt(exec_op.param));

  // sum of every balance change arriving this cycle: a remote deposit or committed withdraw
  // from the dispatcher, a withdraw executed by the SMR on the leader, a local deposit
  logic signed [DATA_W-1:0] delta;
  always_comb begin
    delta = '0;
    if (meth_valid[OP_DEPOSIT])  delta += amt(meth_param);
    if (meth_valid[OP_WITHDRAW]) delta -= amt(meth_param);
    if (exec_valid && exec_op.opcode == OP_WITHDRAW && (!exec_check || exec_ok))
      delta -= amt(exec_op.param);
    if (exec_valid && exec_op.opcode == OP_DEPOSIT)
      delta += amt(exec_op.param);
    if (st == S_IDLE && req_valid && req_op.opcode == OP_DEPOSIT)
      delta += amt(req_op.param);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; todo <= '0; ok_r <= 1'b0; balance <= '0;
    end else begin
      case (st)
        S_IDLE: if (req_valid) begin
          cur <= req_op;
          ok_r <= 1'b1;
          case (req_op.opcode)
            OP_DEPOSIT: begin
              todo <= live & ~(N_NODES'(1) << node_id);
              st <= S_BCAST;
            end
            OP_WITHDRAW: begin
              if (balance >= amt(req_op.param)) st <= S_PROP;
              else begin ok_r <= 1'b0; st <= S_RSP; end
            end
            default: st <= S_RSP;       // query
          endcase
        end
        S_BCAST: if (todo == '0) st <= S_RSP;
                 else if (sq_ready) todo[dst] <= 1'b0;
        S_PROP:  if (prop_ready) st <= S_RSP;
        S_RSP:   st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      balance <= balance + delta;
    end
  end
endmodule
