// lww_register: FPGA-resident LWW-Register CRDT (last writer wins).
//
// State is the register R and the timestamp T of the write it holds, as in the paper's CRDT
// table. assign(v) stamps the value with a timestamp unique across replicas, applies it
// locally and sends it as an RDMA RPC to every other live replica; every replica keeps the
// value with the larger timestamp, so all converge to the last write in timestamp order
// whatever order the RPCs arrive in.
//   * Timestamp: a Lamport clock, {13-bit counter, 3-bit replica id}. A local assign uses
//     (highest counter seen + 1); every received timestamp raises the counter. The replica
//     id breaks ties, which makes timestamps unique. The clock form is this design's choice;
//     the paper says only "Unique timestamps are associated with each assignment".
//   * RPC parameter: {16-bit value, 16-bit timestamp}. Values are 16 bits wide (assumed) so
//     that value and timestamp share the one 32-bit parameter of an operation.
//   * Client port: opcode 1 assigns param[15:0]; opcode 3 queries and returns R. One
//     response per request; an assign answers once its RPCs are queued.
//   * Method port: meth_valid[1] merges a received {value, timestamp}. If a received write
//     and a local assign land in the same cycle, the larger timestamp wins.
// The 13-bit counter wraps after 8191 writes; wrap-around is not handled.
module lww_register
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
  output logic [15:0]            reg_value,
  output logic [15:0]            reg_ts
);
  localparam logic [OPC_W-1:0] OP_ASSIGN = 8'd1;
  localparam int CLK_W = 16 - NODE_W;
  typedef enum logic [1:0] {S_IDLE, S_BCAST, S_RSP} state_e;
  state_e st;
  logic [PARAM_W-1:0] cur;           // {value, timestamp} being broadcast
  logic [N_NODES-1:0] todo;
  logic [NODE_W-1:0]  dst;
  logic [CLK_W-1:0]   lclock;
  logic               loc_w;
  logic [15:0]        loc_ts, nv, nt;
  logic [CLK_W-1:0]   nclk;

  assign req_ready = (st == S_IDLE);
  assign loc_w  = (st == S_IDLE) && req_valid && (req_op.opcode == OP_ASSIGN);
  assign loc_ts = {lclock + 1'b1, node_id};

  always_comb begin
    dst = '0;
    for (int k = N_NODES-1; k >= 0; k--) if (todo[k]) dst = NODE_W'(k);
  end

  assign sq_valid      = (st == S_BCAST) && (todo != '0);
  assign sq_data.verb  = V_RPC;
  assign sq_data.dst   = dst;
  assign sq_data.raddr = '0;
  assign sq_data.laddr = '0;
  assign sq_data.data  = {RPC_FLAG_NONE, OP_ASSIGN, cur};
  assign sq_data.rtag  = '1;   // rtag[7]=1 on an ACK: never taken for an SMR round's answer

  assign rsp_valid = (st == S_RSP);
  assign rsp_ok    = 1'b1;
  assign rsp_data  = DATA_W'(reg_value);

  // merge of the held write, a received write and a local assign: largest timestamp wins
  always_comb begin
    nv = reg_value; nt = reg_ts; nclk = lclock;
    if (meth_valid[OP_ASSIGN]) begin
      if (meth_param[15:0] > nt) begin nv = meth_param[31:16]; nt = meth_param[15:0]; end
      if (meth_param[15:NODE_W] > nclk) nclk = meth_param[15:NODE_W];
    end
    if (loc_w) begin
      if (loc_ts > nt) begin nv = req_op.param[15:0]; nt = loc_ts; end
      if (loc_ts[15:NODE_W] > nclk) nclk = loc_ts[15:NODE_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; todo <= '0; lclock <= '0; reg_value <= '0; reg_ts <= '0;
    end else begin
      case (st)
        S_IDLE: if (req_valid) begin
          if (loc_w) begin
            cur  <= {req_op.param[15:0], loc_ts};
            todo <= live & ~(N_NODES'(1) << node_id);
            st   <= S_BCAST;
          end else st <= S_RSP;
        end
        S_BCAST: if (todo == '0) st <= S_RSP;
                 else if (sq_ready) todo[dst] <= 1'b0;
        S_RSP:   st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      reg_value <= nv; reg_ts <= nt; lclock <= nclk;
    end
  end
endmodule
