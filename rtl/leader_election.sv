// leader_election: picks the leader and performs the permission switch.
//
// The paper: "If a leader is thought to have failed, then a new leader is elected: the live
// replica with the smallest ID." and "Each follower has one open QP that grants write
// permission to a leader. If a follower determines that a leader has failed, it closes its
// QP with the leader, and then opens a new QP with the new leader" (step 5, the permission
// switch), which SafarDB does by writing the NIC's QP state directly.
// This block takes the correct set from the heartbeat scanner, computes the lowest live id
// every cycle, and when it differs from the current leader (and once after reset) runs the
// switch as two QPC writes: close (all permissions off) in the first cycle, open (only the
// new leader) in the second. 'switching' is high while that runs, and the SMR does not
// start new rounds then. The correct set is also passed on to the leader's communication
// manager as its follower list (the paper's "Update Followers").
// Timing: leader_id changes in the cycle after the correct set does; the switch ends two
// cycles later.
module leader_election
  import safardb_pkg::*;
#(
  parameter int N_NODES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NODE_W-1:0]  node_id,
  input  logic [N_NODES-1:0] alive,
  output logic [NODE_W-1:0]  leader_id,
  output logic               is_leader,
  output logic               switching,
  output logic [N_NODES-1:0] followers,
  output logic               perm_mod_valid,
  output logic [N_NODES-1:0] perm_mod_vec,
  output logic [15:0]        elections
);
  typedef enum logic [1:0] {S_INIT, S_STEADY, S_CLOSE, S_OPEN} state_e;
  state_e st;
  logic [NODE_W-1:0] cand;

  always_comb begin
    cand = node_id;
    for (int k = N_NODES-1; k >= 0; k--) if (alive[k]) cand = NODE_W'(k);
  end

  assign is_leader = (leader_id == node_id) && (st == S_STEADY);
  assign switching = (st != S_STEADY);
  assign followers = alive & ~(N_NODES'(1) << node_id);
  assign perm_mod_valid = (st == S_CLOSE) || (st == S_OPEN);
  assign perm_mod_vec   = (st == S_OPEN) ? (N_NODES'(1) << leader_id) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_INIT; leader_id <= '0; elections <= '0;
    end else begin
      case (st)
        S_INIT:   begin leader_id <= cand; st <= S_CLOSE; end
        S_STEADY: if (cand != leader_id) begin
                    leader_id <= cand; elections <= elections + 1'b1; st <= S_CLOSE;
                  end
        S_CLOSE:  st <= S_OPEN;
        S_OPEN:   st <= S_STEADY;
        default:  st <= S_INIT;
      endcase
    end
  end
endmodule
