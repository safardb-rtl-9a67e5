// qpc: Queue Pair Context of the soft RDMA NIC: per-remote-replica QP state and write
// permission.
//
// In Mu, and so in SafarDB, each follower keeps exactly one QP open for writing, towards
// the leader; writes from any other replica into its replication log must fail. The paper
// makes this state directly accessible to the SMR kernel ("the SMR kernel can access the QP
// state directly"), so a permission switch is a register write instead of a PCIe round
// trip. This block holds one permission bit per remote replica.
//   * Check port (receive path): chk_src -> chk_ok, combinational. Only the write-type verbs
//     that touch the replication log (Write, RPC Write-Through) are checked; Reads and plain
//     RPCs of conflict-free operations are always allowed (this design's choice: the paper
//     does not list which verbs a permission covers).
//   * Modify port (SMR): mod_valid with mod_perm replaces the whole permission vector in one
//     cycle. Closing the old leader's QP and opening the new one is done by the leader
//     election block as two such writes.
// Reset: every QP open (no leader has been elected yet), a choice of this design.
module qpc
  import safardb_pkg::*;
#(
  parameter int N_NODES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NODE_W-1:0]  chk_src,
  output logic               chk_ok,
  input  logic               mod_valid,
  input  logic [N_NODES-1:0] mod_perm,
  output logic [N_NODES-1:0] perm,
  output logic [15:0]        switch_count
);
  assign chk_ok = (int'(chk_src) < N_NODES) ? perm[chk_src] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perm <= '1;
      switch_count <= '0;
    end else if (mod_valid) begin
      perm <= mod_perm;
      switch_count <= switch_count + 1'b1;
    end
  end
endmodule
