// set_crdt: FPGA-resident set CRDTs of the paper: G-Set, PN-Set and 2P-Set.
//
// Elements are the integers 0 .. SET_SIZE-1 (the parameter's low bits); the paper gives no
// element type or set size, so a set is kept as on-chip bit vectors or counters indexed by
// element, SET_SIZE = 256 by default (assumed).
//   KIND = 0  G-Set:  one bit per element (set S). insert sets it; remove is refused.
//   KIND = 1  PN-Set: one signed 16-bit counter per element (array C). insert increments,
//             remove decrements; an element is present while its counter is positive.
//   KIND = 2  2P-Set: two bit vectors (added A, removed R), i.e. two G-Sets. insert sets A,
//             remove sets R; present = A and not R, so a removed element can never return.
//             A remove of an element that is not present is refused (the usual 2P-Set
//             precondition; the paper states only that removed elements cannot return).
// Every accepted update is applied locally and sent as an RDMA RPC to every other live
// replica, whose dispatcher applies it straight to the set: all these updates commute, so
// no coordination is needed, as the paper classifies them (conflict-free).
//   * Client port: opcode 1 insert(e), opcode 2 remove(e), opcode 3 lookup(e), which
//     answers rsp_data = 1 if e is present. A refused update answers rsp_ok = 0 and sends
//     nothing. An accepted update answers once its RPCs are queued.
//   * Method port: meth_valid[1] / meth_valid[2] apply a remote insert / remove.
//   * members: presence bit per element; size: number of elements present (combinational).
module set_crdt
  import safardb_pkg::*;
#(
  parameter int N_NODES  = 8,
  parameter int KIND     = 0,
  parameter int SET_SIZE = 256
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
  output logic [SET_SIZE-1:0]    members,
  output logic [31:0]            size
);
  localparam int EW = $clog2(SET_SIZE);
  localparam logic [OPC_W-1:0] OP_INS = 8'd1, OP_REM = 8'd2;
  typedef enum logic [1:0] {S_IDLE, S_BCAST, S_RSP} state_e;
  state_e st;
  op_t cur;
  logic [N_NODES-1:0] todo;
  logic [NODE_W-1:0]  dst;
  logic ok_r;
  logic [DATA_W-1:0] rd_r;

  logic [SET_SIZE-1:0] a_set, r_set;                 // G-Set / 2P-Set
  logic signed [15:0]  cnt [SET_SIZE];               // PN-Set

  logic [EW-1:0] loc_e, rem_e;
  logic loc_ins, loc_rem, accept;
  assign loc_e = req_op.param[EW-1:0];
  assign rem_e = meth_param[EW-1:0];

  always_comb begin
    for (int e = 0; e < SET_SIZE; e++)
      case (KIND)
        1:       members[e] = (cnt[e] > 16'sd0);
        2:       members[e] = a_set[e] && !r_set[e];
        default: members[e] = a_set[e];
      endcase
  end
  always_comb begin
    size = '0;
    for (int e = 0; e < SET_SIZE; e++) size += 32'(members[e]);
  end

  // local permissibility: G-Set has no remove; 2P-Set removes only a present element
  always_comb begin
    case (req_op.opcode)
      OP_INS:  accept = 1'b1;
      OP_REM:  accept = (KIND == 1) || (KIND == 2 && members[loc_e]);
      default: accept = 1'b0;
    endcase
  end
  assign loc_ins = (st == S_IDLE) && req_valid && req_op.opcode == OP_INS;
  assign loc_rem = (st == S_IDLE) && req_valid && req_op.opcode == OP_REM && accept;

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

  assign rsp_valid = (st == S_RSP);
  assign rsp_ok    = ok_r;
  assign rsp_data  = rd_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; todo <= '0; ok_r <= 1'b0; rd_r <= '0;
      a_set <= '0; r_set <= '0;
      for (int e = 0; e < SET_SIZE; e++) cnt[e] <= '0;
    end else begin
      case (st)
        S_IDLE: if (req_valid) begin
          cur  <= req_op;
          ok_r <= accept || (req_op.opcode != OP_INS && req_op.opcode != OP_REM);
          rd_r <= DATA_W'(members[loc_e]);
          if (accept) begin
            todo <= live & ~(N_NODES'(1) << node_id);
            st <= S_BCAST;
          end else st <= S_RSP;
        end
        S_BCAST: if (todo == '0) st <= S_RSP;
                 else if (sq_ready) todo[dst] <= 1'b0;
        S_RSP:   st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      // local and remote updates of this cycle
      if (KIND == 1) begin
        for (int e = 0; e < SET_SIZE; e++)
          cnt[e] <= cnt[e]
                  + ((loc_ins && loc_e == EW'(e)) ? 16'sd1 : 16'sd0)
                  - ((loc_rem && loc_e == EW'(e)) ? 16'sd1 : 16'sd0)
                  + ((meth_valid[OP_INS] && rem_e == EW'(e)) ? 16'sd1 : 16'sd0)
                  - ((meth_valid[OP_REM] && rem_e == EW'(e)) ? 16'sd1 : 16'sd0);
      end else begin
        if (loc_ins) a_set[loc_e] <= 1'b1;
        if (meth_valid[OP_INS]) a_set[rem_e] <= 1'b1;
        if (KIND == 2) begin
          if (loc_rem) r_set[loc_e] <= 1'b1;
          if (meth_valid[OP_REM]) r_set[rem_e] <= 1'b1;
        end
      end
    end
  end
endmodule
