// communication_manager: the SMR's RDMA front end for one consensus step.
//
// In the paper's SMR figure the Phase Manager drives a Communication Manager, which issues
// the leader's RDMA Reads and Writes to the followers (C) and gathers what they return
// (proposal numbers, G; remote log slots, I). This block runs one such step per job:
// issue the same verb (Read, Write or RPC Write-Through) to every replica in job_dst (the
// current followers from the correct set), then wait until job_quorum distinct replicas have
// answered (Read payloads or ACKs). Mu needs a majority of all replicas; the leader counts
// itself, so the phase manager asks for N_NODES/2 follower answers. For Reads it reports
// the largest proposal number seen and the non-empty log entry with the largest proposal
// number, which is what the Prepare phase needs. A job with quorum 0 completes as soon as
// its verbs are queued (used to forward an operation to the leader).
// Every job gets a new round number carried in the requester tag (rtag = {0, round}), so
// answers that arrive after their job has finished are ignored.
// 'abort' drops the job at once (the phase manager uses it when this replica stops being
// the leader: its writes are then refused and the quorum would never come).
// If the quorum has not answered RETRY cycles after the job started (or after the last
// re-send), the verb is sent again to the replicas that have not answered: a follower
// refuses the new leader's writes until its own permission switch is done, and the paper's
// NIC has no retransmission of refused writes. Reads and writes are idempotent and a
// re-sent Write-Through is recognised by the followers' dispatchers, so re-sending is safe.
// Timing: one verb per cycle while sq_ready; done pulses for one cycle.
module communication_manager
  import safardb_pkg::*;
#(
  parameter int N_NODES = 8,
  parameter int RETRY   = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               abort,
  input  logic               job_valid,
  output logic               job_ready,
  input  verb_e              job_verb,
  input  logic [N_NODES-1:0] job_dst,
  input  logic [NODE_W:0]    job_quorum,
  input  logic [ADDR_W-1:0]  job_addr,
  input  logic [DATA_W-1:0]  job_data,
  output logic               done,
  output logic [PROP_W-1:0]  res_max_prop,
  output logic               res_any,
  output log_entry_t         res_best,
  output logic               sq_valid,
  input  logic               sq_ready,
  output sq_entry_t          sq_data,
  input  logic               cpl_valid,
  input  cpl_t               cpl_data,
  output logic [15:0]        retries
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e st;
  logic [RTAG_W-2:0] round;
  verb_e verb;
  logic [N_NODES-1:0] dmask, todo, answered;
  logic [NODE_W:0] quorum, cnt;
  logic [ADDR_W-1:0] addr;
  logic [DATA_W-1:0] data;
  logic [NODE_W-1:0] dst;
  logic hit;
  log_entry_t e;
  logic [$clog2(RETRY+1)-1:0] timer;

  always_comb begin
    dst = '0;
    for (int k = N_NODES-1; k >= 0; k--) if (todo[k]) dst = NODE_W'(k);
  end

  assign job_ready = (st == S_IDLE);
  assign done      = (st == S_DONE);

  assign sq_valid      = (st == S_RUN) && (todo != '0);
  assign sq_data.verb  = verb;
  assign sq_data.dst   = dst;
  assign sq_data.raddr = addr;
  assign sq_data.laddr = RD_LAND_BASE + ADDR_W'(dst);
  assign sq_data.data  = data;
  assign sq_data.rtag  = {1'b0, round};

  assign e   = log_entry_t'(cpl_data.data);
  assign hit = cpl_valid && (st == S_RUN) && (cpl_data.rtag == {1'b0, round}) &&
               (int'(cpl_data.src) < N_NODES) && dmask[cpl_data.src] &&
               !answered[cpl_data.src] && (cpl_data.is_ack == (verb != V_READ));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; round <= '0; verb <= V_READ; dmask <= '0; todo <= '0; answered <= '0;
      quorum <= '0; cnt <= '0; addr <= '0; data <= '0;
      res_max_prop <= '0; res_any <= 1'b0; res_best <= '0; timer <= '0; retries <= '0;
    end else if (abort) begin
      st <= S_IDLE;
    end else begin
      case (st)
        S_IDLE: if (job_valid) begin
          verb <= job_verb; dmask <= job_dst; todo <= job_dst; quorum <= job_quorum;
          addr <= job_addr; data <= job_data; answered <= '0; cnt <= '0;
          res_max_prop <= '0; res_any <= 1'b0; res_best <= '0;
          round <= round + 1'b1;
          timer <= '0;
          st <= S_RUN;
        end
        S_RUN: begin
          timer <= timer + 1'b1;
          if (sq_valid && sq_ready) todo[dst] <= 1'b0;
          if (int'(timer) == RETRY - 1) begin
            // Re-send to the replicas that have not answered (a write refused during a
            // permission switch, or a reply lost with a crashed replica).
            timer <= '0;
            todo <= dmask & ~answered;
            retries <= retries + 1'b1;
          end
          if (hit) begin
            answered[cpl_data.src] <= 1'b1;
            cnt <= cnt + 1'b1;
            if (verb == V_READ) begin
              if (e.prop > res_max_prop) res_max_prop <= e.prop;
              if (e.prop != '0 && (!res_any || e.prop > res_best.prop)) begin
                res_any <= 1'b1; res_best <= e;
              end
            end
          end
          if ((todo == '0 || (todo == (N_NODES'(1) << dst) && sq_ready)) &&
              (cnt + NODE_W'(hit)) >= quorum)
            st <= S_DONE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
