// courseware_rdt: FPGA-resident Courseware WRDT (a university registrar).
//
// State is three sets, as in the paper's WRDT table: students S, courses C and enrolments
// E (pairs of student and course). Methods, with their invariants and classes from that
// table:
//   1 addStudent(s)   s not in S                      conflict-free: applied locally and sent
//                                                     by RPC to every live replica
//   2 addCourse(c)    c not in C                      conflicting: ordered by the SMR
//   3 deleteCourse(c) c in C                          conflicting
//   4 enroll(s, c)    s in S, c in C, (s,c) not in E  conflicting
//   5 query(s, c)     read only: answers {E(s,c), C(c), S(s)} as bits 2..0
// All conflicting methods form one synchronization group, so they share the replica's one
// SMR and one replication log.
//   * Client port: a request whose invariant fails on this replica's state is refused at
//     once (rsp_ok = 0). Otherwise addStudent is applied and broadcast, and a conflicting
//     method is handed to the SMR (rsp_ok = 1 means submitted for ordering).
//   * Method port (dispatcher): meth_valid[op] applies a received addStudent or a committed
//     conflicting operation, as decided.
//   * Execute port (leader): exec_ok reports whether the operation's invariant holds now;
//     a checked operation is applied only then (the leader logs a no-op otherwise), while
//     an adopted one (exec_check = 0) is applied as decided.
// Sets are bit vectors over N_STU students and N_CRS courses (64 each by default, not given
// by the paper); E is an N_STU x N_CRS bit matrix. Parameter encoding: s in param[31:16], c in
// param[15:0]. Deleting a course leaves its enrolments in E (the paper does not say), and
// enroll requires the course to exist, so they can no longer grow.
// n_enrolled is a plain N_STU x N_CRS adder loop (4096 terms by default); a synthesis flow
// with a small loop-unroll limit needs the limit raised for it.
// All updates landing in one cycle are applied: the leader's execution, a dispatcher method
// and a local addStudent. They touch disjoint bits, or the same bit in the same direction,
// except deleteCourse against addCourse of the same course, which the SMR never issues in
// one cycle.
module courseware_rdt
  import safardb_pkg::*;
#(
  parameter int N_NODES = 8,
  parameter int N_STU   = 64,
  parameter int N_CRS   = 64
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
  output logic                   prop_valid,
  input  logic                   prop_ready,
  output op_t                    prop_op,
  input  logic                   exec_valid,
  input  op_t                    exec_op,
  input  logic                   exec_check,
  output logic                   exec_ok,
  output logic [N_STU-1:0]       students,
  output logic [N_CRS-1:0]       courses,
  output logic [15:0]            n_enrolled
);
  localparam int SW = $clog2(N_STU), CW = $clog2(N_CRS);
  localparam logic [OPC_W-1:0] OP_ADD_STU = 8'd1, OP_ADD_CRS = 8'd2, OP_DEL_CRS = 8'd3,
                               OP_ENROLL  = 8'd4, OP_CQUERY  = 8'd5;
  typedef enum logic [2:0] {S_IDLE, S_BCAST, S_PROP, S_RSP} state_e;
  state_e st;
  op_t cur;
  logic [N_NODES-1:0] todo;
  logic [NODE_W-1:0]  dst;
  logic ok_r;
  logic [DATA_W-1:0] rd_r;
  logic [N_STU-1:0] s_set;
  logic [N_CRS-1:0] c_set;
  logic [N_CRS-1:0] e_set [N_STU];   // e_set[s][c]: student s enrolled in course c

  function automatic logic [SW-1:0] stu(input op_t o); return o.param[16 +: SW]; endfunction
  function automatic logic [CW-1:0] crs(input op_t o); return o.param[CW-1:0];   endfunction

  // invariant of an operation against this replica's state
  function automatic logic holds(input op_t o);
    case (o.opcode)
      OP_ADD_STU: return !s_set[stu(o)];
      OP_ADD_CRS: return !c_set[crs(o)];
      OP_DEL_CRS: return  c_set[crs(o)];
      OP_ENROLL:  return  s_set[stu(o)] && c_set[crs(o)] && !e_set[stu(o)][crs(o)];
      default:    return 1'b1;
    endcase
  endfunction

  op_t m_op;
  assign m_op = '{opcode: OPC_W'(0), param: meth_param};

  assign req_ready = (st == S_IDLE);
  assign exec_ok   = holds(exec_op);
  assign students  = s_set;
  assign courses   = c_set;

  always_comb begin
    n_enrolled = '0;
    for (int s = 0; s < N_STU; s++)
      for (int c = 0; c < N_CRS; c++) n_enrolled += 16'(e_set[s][c] && c_set[c]);
  end

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
  assign rsp_data  = rd_r;

  // the three update sources of this cycle
  logic loc_add, ex_do;
  assign loc_add = (st == S_IDLE) && req_valid && req_op.opcode == OP_ADD_STU && holds(req_op);
  assign ex_do   = exec_valid && (!exec_check || exec_ok);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; todo <= '0; ok_r <= 1'b0; rd_r <= '0;
      s_set <= '0; c_set <= '0;
      for (int s = 0; s < N_STU; s++) e_set[s] <= '0;
    end else begin
      case (st)
        S_IDLE: if (req_valid) begin
          cur  <= req_op;
          ok_r <= holds(req_op);
          rd_r <= DATA_W'({e_set[stu(req_op)][crs(req_op)], c_set[crs(req_op)], s_set[stu(req_op)]});
          if (!holds(req_op)) st <= S_RSP;
          else case (req_op.opcode)
            OP_ADD_STU: begin todo <= live & ~(N_NODES'(1) << node_id); st <= S_BCAST; end
            OP_ADD_CRS, OP_DEL_CRS, OP_ENROLL: st <= S_PROP;
            default: st <= S_RSP;
          endcase
        end
        S_BCAST: if (todo == '0) st <= S_RSP;
                 else if (sq_ready) todo[dst] <= 1'b0;
        S_PROP:  if (prop_ready) st <= S_RSP;
        S_RSP:   st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      if (loc_add) s_set[stu(req_op)] <= 1'b1;
      if (meth_valid[OP_ADD_STU]) s_set[stu(m_op)] <= 1'b1;
      if (meth_valid[OP_ADD_CRS]) c_set[crs(m_op)] <= 1'b1;
      if (meth_valid[OP_DEL_CRS]) c_set[crs(m_op)] <= 1'b0;
      if (meth_valid[OP_ENROLL])  e_set[stu(m_op)][crs(m_op)] <= 1'b1;
      if (ex_do)
        case (exec_op.opcode)
          OP_ADD_STU: s_set[stu(exec_op)] <= 1'b1;
          OP_ADD_CRS: c_set[crs(exec_op)] <= 1'b1;
          OP_DEL_CRS: c_set[crs(exec_op)] <= 1'b0;
          OP_ENROLL:  e_set[stu(exec_op)][crs(exec_op)] <= 1'b1;
          default: ;
        endcase
    end
  end
endmodule
