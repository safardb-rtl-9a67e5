// smr: the state machine replication kernel, an FPGA implementation of Mu.
//
// Mirrors the paper's SMR figure. Replication plane: phase_manager (Propose / Prepare /
// Accept) driving communication_manager (the leader's RDMA Reads and Writes to the
// followers). Leader switch plane: heartbeat_scanner (liveness) and leader_election
// (lowest live id, permission switch written straight into the NIC's QPC). The verbs of
// the heartbeat scanner and the communication manager share the outgoing RDMA path
// through a multiplexer, as drawn. Conflicting operations come from the local application
// or, at the leader, from followers (forwarded RPCs, buffered in a FWD_DEPTH queue);
// the two are merged round-robin into the phase manager's proposal port.
// The paper builds one SMR instance per synchronization group; Bank Account has one.
// Interfaces: verbs out (sq_*), completions in (cpl_*), proposals in (app_prop_*, fwd_*),
// leader execution (exec_*), two HBM write ports (hb_mem_*, pm_mem_*), QPC modify port.
module smr
  import safardb_pkg::*;
#(
  parameter int N_NODES    = 8,
  parameter int HB_PERIOD  = 1024,
  parameter int FAIL_READS = 3,
  parameter int LOG_SLOTS  = 1 << 20,
  parameter int FWD_DEPTH  = 16,
  parameter int RETRY      = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NODE_W-1:0]  node_id,
  output logic               sq_valid,
  input  logic               sq_ready,
  output sq_entry_t          sq_data,
  input  logic               cpl_valid,
  input  cpl_t               cpl_data,
  input  logic               app_prop_valid,
  output logic               app_prop_ready,
  input  op_t                app_prop_op,
  input  logic               fwd_valid,
  output logic               fwd_ready,
  input  op_t                fwd_op,
  input  logic               seen_commit,
  output logic               exec_valid,
  output op_t                exec_op,
  output logic               exec_check,
  input  logic               exec_ok,
  output logic               hb_mem_valid,
  input  logic               hb_mem_ready,
  output logic [ADDR_W-1:0]  hb_mem_addr,
  output logic [DATA_W-1:0]  hb_mem_wdata,
  output logic               pm_mem_valid,
  input  logic               pm_mem_ready,
  output logic [ADDR_W-1:0]  pm_mem_addr,
  output logic [DATA_W-1:0]  pm_mem_wdata,
  output logic               perm_mod_valid,
  output logic [N_NODES-1:0] perm_mod_vec,
  output logic [N_NODES-1:0] alive,
  output logic [NODE_W-1:0]  leader_id,
  output logic               is_leader,
  output logic [31:0]        slot,
  output logic [31:0]        commits,
  output logic [15:0]        adoptions,
  output logic [15:0]        rejections,
  output logic [15:0]        forwards,
  output logic [15:0]        aborts,
  output logic [15:0]        elections,
  output logic [15:0]        removals,
  output logic [15:0]        retries
);
  logic      hb_sq_valid, hb_sq_ready, cm_sq_valid, cm_sq_ready;
  sq_entry_t hb_sq_data, cm_sq_data;
  logic [1:0] mux_ready;
  logic      switching;
  logic [N_NODES-1:0] followers;
  logic [DATA_W-1:0] my_hb;
  logic      fq_valid, fq_ready;
  op_t       fq_op;
  logic [$clog2(FWD_DEPTH):0] fq_count;
  logic      p_valid, p_ready;
  op_t       p_op;
  logic [1:0] pmux_ready;
  logic      cm_abort, job_valid, job_ready, done, res_any;
  verb_e     job_verb;
  logic [N_NODES-1:0] job_dst;
  logic [NODE_W:0]    job_quorum;
  logic [ADDR_W-1:0]  job_addr;
  logic [DATA_W-1:0]  job_data;
  logic [PROP_W-1:0]  res_max_prop;
  log_entry_t         res_best;

  heartbeat_scanner #(.N_NODES(N_NODES), .PERIOD(HB_PERIOD), .FAIL_READS(FAIL_READS)) u_hb (
    .clk, .rst_n, .node_id,
    .sq_valid(hb_sq_valid), .sq_ready(hb_sq_ready), .sq_data(hb_sq_data),
    .cpl_valid, .cpl_data,
    .mem_req_valid(hb_mem_valid), .mem_req_ready(hb_mem_ready),
    .mem_req_addr(hb_mem_addr), .mem_req_wdata(hb_mem_wdata),
    .alive, .my_hb, .removals);

  leader_election #(.N_NODES(N_NODES)) u_le (
    .clk, .rst_n, .node_id, .alive, .leader_id, .is_leader, .switching, .followers,
    .perm_mod_valid, .perm_mod_vec, .elections);

  axis_rr_mux #(.N(2), .WIDTH($bits(sq_entry_t))) u_vmux (
    .clk, .rst_n,
    .s_valid({cm_sq_valid, hb_sq_valid}), .s_ready(mux_ready), .s_data({cm_sq_data, hb_sq_data}),
    .m_valid(sq_valid), .m_ready(sq_ready), .m_data(sq_data));
  assign hb_sq_ready = mux_ready[0];
  assign cm_sq_ready = mux_ready[1];

  axis_fifo #(.WIDTH($bits(op_t)), .DEPTH(FWD_DEPTH)) u_fwdq (
    .clk, .rst_n,
    .s_valid(fwd_valid), .s_ready(fwd_ready), .s_data(fwd_op),
    .m_valid(fq_valid), .m_ready(fq_ready), .m_data(fq_op), .count(fq_count));

  axis_rr_mux #(.N(2), .WIDTH($bits(op_t))) u_pmux (
    .clk, .rst_n,
    .s_valid({fq_valid, app_prop_valid}), .s_ready(pmux_ready), .s_data({fq_op, app_prop_op}),
    .m_valid(p_valid), .m_ready(p_ready), .m_data(p_op));
  assign app_prop_ready = pmux_ready[0];
  assign fq_ready       = pmux_ready[1];

  phase_manager #(.N_NODES(N_NODES), .LOG_SLOTS(LOG_SLOTS)) u_pm (
    .clk, .rst_n, .leader_id, .is_leader, .switching, .followers, .seen_commit,
    .prop_valid(p_valid), .prop_ready(p_ready), .prop_op(p_op),
    .cm_abort, .job_valid, .job_ready, .job_verb, .job_dst, .job_quorum, .job_addr, .job_data,
    .done, .res_max_prop, .res_any, .res_best,
    .exec_valid, .exec_op, .exec_check, .exec_ok,
    .mem_req_valid(pm_mem_valid), .mem_req_ready(pm_mem_ready),
    .mem_req_addr(pm_mem_addr), .mem_req_wdata(pm_mem_wdata),
    .slot, .commits, .adoptions, .rejections, .forwards, .aborts);

  communication_manager #(.N_NODES(N_NODES), .RETRY(RETRY)) u_cm (
    .clk, .rst_n, .abort(cm_abort),
    .job_valid, .job_ready, .job_verb, .job_dst, .job_quorum, .job_addr, .job_data,
    .done, .res_max_prop, .res_any, .res_best,
    .sq_valid(cm_sq_valid), .sq_ready(cm_sq_ready), .sq_data(cm_sq_data),
    .cpl_valid, .cpl_data, .retries);
endmodule
