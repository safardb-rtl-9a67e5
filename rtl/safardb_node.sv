// safardb_node: one SafarDB replica, the FPGA of the paper's architecture figure in
// FPGA-only mode, running the Bank Account WRDT.
//
// SafarDB replicates a database over network-attached FPGAs. Each replica hosts, on one
// chip, the replicated data type's handlers (user kernel) next to a soft RDMA NIC (network
// kernel), so verbs move over on-chip AXI streams instead of PCIe, and the NIC gets verbs
// no commodity RNIC has: an RPC verb that invokes a remote handler directly and an RPC
// Write-Through verb that also appends to the remote replication log. Conflict-free
// operations replicate by RPC without coordination; conflicting ones are ordered by an
// on-chip Mu consensus engine (SMR) that reads and writes the followers' HBM and switches
// QP permissions directly in the NIC.
// Blocks: account_rdt (application), dispatcher, smr, network_kernel, mem_arbiter. The
// RDMA send queue is shared by the application, the SMR and a host port (hybrid mode: the
// host CPU may issue verbs over PCIe), merged round-robin. HBM is shared by the NIC
// receive path (priority), the heartbeat scanner and the phase manager.
// Outside the chip model, as ports: the Ethernet MAC (CMAC IP) stream tx_*/rx_*, the HBM
// port mem_* (in-order read data), and the host verb/completion port host_*.
// node_id is an input, so all replicas run the same design; it must be stable after reset.
// APP selects the application kernel (default 0, Bank Account; 6 Courseware WRDT). The CRDT
// kernels (1..5) use only RPC replication; the SMR then runs heartbeats and leader election
// but orders nothing. 'balance' reports the application's state: the balance, the PN-Counter
// value, the LWW register {value, timestamp}, the number of set members, or for Courseware
// {students, courses, enrolments in existing courses} as three 16-bit counts.
module safardb_node
  import safardb_pkg::*;
#(
  parameter int N_NODES    = 8,
  parameter int HB_PERIOD  = 1024,
  parameter int FAIL_READS = 3,
  parameter int LOG_SLOTS  = 1 << 20,
  parameter int SQ_DEPTH   = 16,
  parameter int APP        = 0     // 0 Bank Account, 1 PN-Counter, 2 LWW-Register,
                                   // 3 G-Set, 4 PN-Set, 5 2P-Set, 6 Courseware
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NODE_W-1:0]  node_id,
  // client of the FPGA-resident application
  input  logic               req_valid,
  output logic               req_ready,
  input  op_t                req_op,
  output logic               rsp_valid,
  output logic               rsp_ok,
  output logic [DATA_W-1:0]  rsp_data,
  // host (hybrid mode): verbs over PCIe, and the completions they get back
  input  logic               host_sq_valid,
  output logic               host_sq_ready,
  input  sq_entry_t          host_sq_data,
  output logic               host_cpl_valid,
  output cpl_t               host_cpl_data,
  // Ethernet MAC (CMAC) streams
  output logic               tx_valid,
  input  logic               tx_ready,
  output pkt_t               tx_data,
  input  logic               rx_valid,
  output logic               rx_ready,
  input  pkt_t               rx_data,
  // HBM
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [ADDR_W-1:0]  mem_req_addr,
  output logic [DATA_W-1:0]  mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  logic [DATA_W-1:0]  mem_rsp_rdata,
  // status
  output logic [NODE_W-1:0]  leader_id,
  output logic               is_leader,
  output logic [N_NODES-1:0] alive,
  output logic signed [DATA_W-1:0] balance,
  output logic [31:0]        commits,
  output logic [31:0]        slot,
  output logic [15:0]        adoptions,
  output logic [15:0]        rejections,
  output logic [15:0]        forwards,
  output logic [15:0]        aborts,
  output logic [15:0]        elections,
  output logic [15:0]        removals,
  output logic [15:0]        perm_err,
  output logic [15:0]        perm_switches,
  output logic [31:0]        verbs_sent,
  output logic [15:0]        lost_replies,
  output logic [31:0]        dispatched,
  output logic [15:0]        duplicates,
  output logic [15:0]        retries
);
  // verb issuers
  logic      app_sq_valid, app_sq_ready, smr_sq_valid, smr_sq_ready;
  sq_entry_t app_sq_data, smr_sq_data;
  logic [2:0] vready;
  logic      sq_valid, sq_ready;
  sq_entry_t sq_data;
  // NIC outputs
  logic      cpl_valid;
  cpl_t      cpl_data;
  logic      rpc_valid, rpc_ready;
  rpc_t      rpc_data;
  logic      perm_mod_valid;
  logic [N_NODES-1:0] perm_mod_vec, perm;
  // dispatcher
  logic [NUM_OPCODES-1:0] meth_valid;
  logic [PARAM_W-1:0] meth_param;
  logic      meth_committed, seen_commit;
  logic      fwd_valid, fwd_ready;
  op_t       fwd_op;
  // app <-> smr
  logic      prop_valid, prop_ready;
  op_t       prop_op;
  logic      exec_valid, exec_check, exec_ok;
  op_t       exec_op;
  // memory masters
  logic [2:0] m_valid, m_ready, m_we, m_rsp_valid;
  logic [2:0][ADDR_W-1:0] m_addr;
  logic [2:0][DATA_W-1:0] m_wdata;
  logic [DATA_W-1:0] m_rdata;
  logic      hb_mem_valid, pm_mem_valid;
  logic [ADDR_W-1:0] hb_mem_addr, pm_mem_addr, rx_mem_addr;
  logic [DATA_W-1:0] hb_mem_wdata, pm_mem_wdata, rx_mem_wdata;
  logic      rx_mem_valid, rx_mem_we;
  logic [31:0] slot_i;

  // application kernel: the Bank Account WRDT, or one of the CRDTs, whose updates are all
  // conflict-free and replicated by RPC only (they never propose to the SMR)
  if (APP == 0) begin : g_account
    account_rdt #(.N_NODES(N_NODES)) u_app (
      .clk, .rst_n, .node_id, .live(alive),
      .req_valid, .req_ready, .req_op, .rsp_valid, .rsp_ok, .rsp_data,
      .meth_valid, .meth_param,
      .sq_valid(app_sq_valid), .sq_ready(app_sq_ready), .sq_data(app_sq_data),
      .prop_valid, .prop_ready, .prop_op,
      .exec_valid, .exec_op, .exec_check, .exec_ok, .balance);
  end else if (APP == 6) begin : g_course
    logic [63:0] students, courses;
    logic [15:0] n_enrolled;
    courseware_rdt #(.N_NODES(N_NODES)) u_app (
      .clk, .rst_n, .node_id, .live(alive),
      .req_valid, .req_ready, .req_op, .rsp_valid, .rsp_ok, .rsp_data,
      .meth_valid, .meth_param,
      .sq_valid(app_sq_valid), .sq_ready(app_sq_ready), .sq_data(app_sq_data),
      .prop_valid, .prop_ready, .prop_op,
      .exec_valid, .exec_op, .exec_check, .exec_ok, .students, .courses, .n_enrolled);
    assign balance = $signed({16'd0, 16'($countones(students)), 16'($countones(courses)),
                              n_enrolled});
  end else begin : g_crdt
    assign prop_valid = 1'b0;
    assign prop_op    = '0;
    assign exec_ok    = 1'b1;
    if (APP == 1) begin : g_pn_counter
      logic [DATA_W-1:0] value;
      pn_counter #(.N_NODES(N_NODES)) u_app (
        .clk, .rst_n, .node_id, .live(alive),
        .req_valid, .req_ready, .req_op, .rsp_valid, .rsp_ok, .rsp_data,
        .meth_valid, .meth_param,
        .sq_valid(app_sq_valid), .sq_ready(app_sq_ready), .sq_data(app_sq_data), .value);
      assign balance = $signed(value);
    end else if (APP == 2) begin : g_lww
      logic [15:0] reg_value, reg_ts;
      lww_register #(.N_NODES(N_NODES)) u_app (
        .clk, .rst_n, .node_id, .live(alive),
        .req_valid, .req_ready, .req_op, .rsp_valid, .rsp_ok, .rsp_data,
        .meth_valid, .meth_param,
        .sq_valid(app_sq_valid), .sq_ready(app_sq_ready), .sq_data(app_sq_data),
        .reg_value, .reg_ts);
      assign balance = $signed({32'd0, reg_value, reg_ts});
    end else begin : g_set
      logic [255:0] members;
      logic [31:0]  size;
      set_crdt #(.N_NODES(N_NODES), .KIND(APP - 3)) u_app (
        .clk, .rst_n, .node_id, .live(alive),
        .req_valid, .req_ready, .req_op, .rsp_valid, .rsp_ok, .rsp_data,
        .meth_valid, .meth_param,
        .sq_valid(app_sq_valid), .sq_ready(app_sq_ready), .sq_data(app_sq_data),
        .members, .size);
      assign balance = $signed({32'd0, size});
    end
  end

  dispatcher #(.NUM_METHODS(NUM_OPCODES)) u_disp (
    .clk, .rst_n, .rpc_valid, .rpc_ready, .rpc_data,
    .meth_valid, .meth_param, .meth_committed, .fwd_valid, .fwd_ready, .fwd_op,
    .next_log_addr(LOG_BASE + ADDR_W'(slot_i % LOG_SLOTS)),
    .seen_commit, .duplicates, .fwd_drops(), .dispatched);

  smr #(.N_NODES(N_NODES), .HB_PERIOD(HB_PERIOD), .FAIL_READS(FAIL_READS),
        .LOG_SLOTS(LOG_SLOTS)) u_smr (
    .clk, .rst_n, .node_id,
    .sq_valid(smr_sq_valid), .sq_ready(smr_sq_ready), .sq_data(smr_sq_data),
    .cpl_valid, .cpl_data,
    .app_prop_valid(prop_valid), .app_prop_ready(prop_ready), .app_prop_op(prop_op),
    .fwd_valid, .fwd_ready, .fwd_op, .seen_commit,
    .exec_valid, .exec_op, .exec_check, .exec_ok,
    .hb_mem_valid, .hb_mem_ready(m_ready[1]), .hb_mem_addr, .hb_mem_wdata,
    .pm_mem_valid, .pm_mem_ready(m_ready[2]), .pm_mem_addr, .pm_mem_wdata,
    .perm_mod_valid, .perm_mod_vec,
    .alive, .leader_id, .is_leader, .slot(slot_i), .commits, .adoptions, .rejections,
    .forwards, .aborts, .elections, .removals, .retries);
  assign slot = slot_i;

  axis_rr_mux #(.N(3), .WIDTH($bits(sq_entry_t))) u_vmux (
    .clk, .rst_n,
    .s_valid({host_sq_valid, smr_sq_valid, app_sq_valid}), .s_ready(vready),
    .s_data({host_sq_data, smr_sq_data, app_sq_data}),
    .m_valid(sq_valid), .m_ready(sq_ready), .m_data(sq_data));
  assign app_sq_ready  = vready[0];
  assign smr_sq_ready  = vready[1];
  assign host_sq_ready = vready[2];

  network_kernel #(.N_NODES(N_NODES), .SQ_DEPTH(SQ_DEPTH)) u_nk (
    .clk, .rst_n, .node_id,
    .sq_valid, .sq_ready, .sq_data,
    .cpl_valid, .cpl_data,
    .rpc_valid, .rpc_ready, .rpc_data,
    .mem_req_valid(rx_mem_valid), .mem_req_ready(m_ready[0]), .mem_req_we(rx_mem_we),
    .mem_req_addr(rx_mem_addr), .mem_req_wdata(rx_mem_wdata),
    .mem_rsp_valid(m_rsp_valid[0]), .mem_rsp_rdata(m_rdata),
    .perm_mod_valid, .perm_mod_vec, .perm,
    .tx_valid, .tx_ready, .tx_data, .rx_valid, .rx_ready, .rx_data,
    .perm_err, .perm_switches, .verbs_sent, .lost_replies);

  // Host completions: every completion is visible to the host port; the host recognises
  // its own by the requester tag it chose.
  assign host_cpl_valid = cpl_valid;
  assign host_cpl_data  = cpl_data;

  assign m_valid = {pm_mem_valid, hb_mem_valid, rx_mem_valid};
  assign m_we    = {1'b1, 1'b1, rx_mem_we};
  assign m_addr  = {pm_mem_addr, hb_mem_addr, rx_mem_addr};
  assign m_wdata = {pm_mem_wdata, hb_mem_wdata, rx_mem_wdata};

  mem_arbiter #(.NM(3)) u_marb (
    .clk, .rst_n,
    .req_valid(m_valid), .req_ready(m_ready), .req_we(m_we), .req_addr(m_addr),
    .req_wdata(m_wdata), .rsp_valid(m_rsp_valid), .rsp_rdata(m_rdata),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata);
endmodule
