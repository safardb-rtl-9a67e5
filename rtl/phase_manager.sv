// phase_manager: the Mu replication plane of the SMR (Propose, Prepare, Accept).
//
// Follows the paper's description of SafarDB's accelerated Mu, one log slot per round:
//   Propose  (A) the leader takes a conflicting operation from its proposal port. A replica
//            that is not the leader forwards the operation to the leader as an RPC instead
//            (how followers reach the leader is not described; this is the design's choice).
//   Prepare  (B) Read the followers' proposal numbers (G), pick the next one above all of
//            them and its own, Write it to the followers (and to its own HBM), then Read
//            every follower's copy of the log slot it intends to fill (I). If a quorum's
//            slots are empty it keeps its own operation; otherwise it adopts the entry with
//            the highest proposal number.
//   Accept   (J) execute the operation locally (exec port; for its own withdraw the app
//            re-checks the invariant, and a rejected operation is logged as a no-op), append
//            {proposal, operation} to its own log, and send it with the RPC Write-Through
//            verb to every follower: the followers' logs are written and their state is
//            updated straight from the network (L), with no log polling (K).
//   If the slot held an adopted operation, the leader prepares again for its own one on the
//   next slot; otherwise it returns to Propose.
// Followers advance their slot counter on every committed entry they receive, so a newly
// elected leader continues at the next free slot.
// Each RDMA step is a communication_manager job waiting for N_NODES/2 follower answers
// (a majority with the leader). Rounds stop (abort) when this replica stops being leader.
// Log entries and proposal numbers are HBM words (safardb_pkg map); the log is LOG_SLOTS
// words long and used circularly (the paper gives no size; truncation is not described,
// so slot reuse after a wrap is not guarded).
module phase_manager
  import safardb_pkg::*;
#(
  parameter int N_NODES   = 8,
  parameter int LOG_SLOTS = 1 << 20
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NODE_W-1:0]  leader_id,
  input  logic               is_leader,
  input  logic               switching,
  input  logic [N_NODES-1:0] followers,
  input  logic               seen_commit,  // a committed entry arrived by Write-Through
  // proposals (conflicting operations)
  input  logic               prop_valid,
  output logic               prop_ready,
  input  op_t                prop_op,
  // communication manager
  output logic               cm_abort,
  output logic               job_valid,
  input  logic               job_ready,
  output verb_e              job_verb,
  output logic [N_NODES-1:0] job_dst,
  output logic [NODE_W:0]    job_quorum,
  output logic [ADDR_W-1:0]  job_addr,
  output logic [DATA_W-1:0]  job_data,
  input  logic               done,
  input  logic [PROP_W-1:0]  res_max_prop,
  input  logic               res_any,
  input  log_entry_t         res_best,
  // local execution at the leader ("Totally Ordered" output)
  output logic               exec_valid,
  output op_t                exec_op,
  output logic               exec_check,
  input  logic               exec_ok,
  // HBM writes (own proposal number, own log)
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [ADDR_W-1:0]  mem_req_addr,
  output logic [DATA_W-1:0]  mem_req_wdata,
  // status
  output logic [31:0]        slot,
  output logic [31:0]        commits,
  output logic [15:0]        adoptions,
  output logic [15:0]        rejections,
  output logic [15:0]        forwards,
  output logic [15:0]        aborts
);
  typedef enum logic [3:0] {
    S_IDLE, S_FWD, S_FWD_W, S_RDPROP, S_RDPROP_W, S_LWPROP, S_WRPROP, S_WRPROP_W,
    S_RDSLOT, S_RDSLOT_W, S_EXEC, S_LOGW, S_ACCEPT, S_ACCEPT_W
  } state_e;
  state_e st;
  op_t own, acc;
  logic adopted, check;
  logic [PROP_W-1:0] my_prop, new_prop;
  logic [ADDR_W-1:0] slot_addr;
  logic leading_state;

  localparam logic [NODE_W:0] QUORUM = (NODE_W+1)'(N_NODES / 2);

  assign slot_addr = LOG_BASE + ADDR_W'(slot % LOG_SLOTS);
  assign prop_ready = (st == S_IDLE) && !switching;
  assign leading_state = !(st inside {S_IDLE, S_FWD, S_FWD_W});
  assign cm_abort = leading_state && !is_leader;

  always_comb begin
    job_valid  = 1'b0;
    job_verb   = V_READ;
    job_dst    = followers;
    job_quorum = QUORUM;
    job_addr   = PROP_ADDR;
    job_data   = '0;
    case (st)
      S_FWD: begin
        job_valid = 1'b1; job_verb = V_RPC; job_dst = N_NODES'(1) << leader_id;
        job_quorum = '0; job_data = {RPC_FLAG_FWD, own};
      end
      S_RDPROP: job_valid = 1'b1;
      S_WRPROP: begin
        job_valid = 1'b1; job_verb = V_WRITE; job_data = {new_prop, {OP_W{1'b0}}};
      end
      S_RDSLOT: begin job_valid = 1'b1; job_addr = slot_addr; end
      S_ACCEPT: begin
        job_valid = 1'b1; job_verb = V_RPC_WT; job_addr = slot_addr; job_data = {new_prop, acc};
      end
      default: ;
    endcase
  end

  assign exec_valid = (st == S_EXEC);
  assign exec_op    = acc;
  assign exec_check = check;

  assign mem_req_valid = (st == S_LWPROP) || (st == S_LOGW);
  assign mem_req_addr  = (st == S_LWPROP) ? PROP_ADDR : slot_addr;
  assign mem_req_wdata = (st == S_LWPROP) ? {new_prop, {OP_W{1'b0}}} : {new_prop, acc};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; own <= '0; acc <= '0; adopted <= 1'b0; check <= 1'b0;
      my_prop <= '0; new_prop <= '0; slot <= '0; commits <= '0; adoptions <= '0;
      rejections <= '0; forwards <= '0; aborts <= '0;
    end else if (cm_abort) begin
      st <= S_IDLE;
      aborts <= aborts + 1'b1;
    end else begin
      case (st)
        S_IDLE: if (prop_valid && !switching) begin
          own <= prop_op;
          st <= is_leader ? S_RDPROP : S_FWD;
        end
        S_FWD:      if (job_ready) st <= S_FWD_W;
        S_FWD_W:    if (done) begin forwards <= forwards + 1'b1; st <= S_IDLE; end
        S_RDPROP:   if (job_ready) st <= S_RDPROP_W;
        S_RDPROP_W: if (done) begin
          new_prop <= ((res_max_prop > my_prop) ? res_max_prop : my_prop) + 1'b1;
          my_prop  <= ((res_max_prop > my_prop) ? res_max_prop : my_prop) + 1'b1;
          st <= S_LWPROP;
        end
        S_LWPROP:   if (mem_req_ready) st <= S_WRPROP;
        S_WRPROP:   if (job_ready) st <= S_WRPROP_W;
        S_WRPROP_W: if (done) st <= S_RDSLOT;
        S_RDSLOT:   if (job_ready) st <= S_RDSLOT_W;
        S_RDSLOT_W: if (done) begin
          if (res_any) begin
            acc <= res_best.op; adopted <= 1'b1; check <= 1'b0;
            adoptions <= adoptions + 1'b1;
          end else begin
            acc <= own; adopted <= 1'b0; check <= 1'b1;
          end
          st <= S_EXEC;
        end
        S_EXEC: begin
          if (check && !exec_ok) begin
            acc.opcode <= OP_NOP;
            rejections <= rejections + 1'b1;
          end
          st <= S_LOGW;
        end
        S_LOGW:     if (mem_req_ready) st <= S_ACCEPT;
        S_ACCEPT:   if (job_ready) st <= S_ACCEPT_W;
        S_ACCEPT_W: if (done) begin
          slot <= slot + 1'b1;
          commits <= commits + 1'b1;
          st <= adopted ? S_RDPROP : S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
      // A follower follows the log position from the Write-Throughs it receives, so that
      // it continues from the right slot if it is elected.
      if (seen_commit && !leading_state) slot <= slot + 1'b1;
    end
  end
endmodule
