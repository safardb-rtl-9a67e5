// heartbeat_scanner: failure detector of the SMR's leader switch plane.
//
// Follows the paper: each replica keeps an RDMA-exposed heartbeat counter in HBM and
// periodically increments it (step 1 of the SMR figure); it RDMA-reads the heartbeats of
// the remote replicas (steps 2, 4); "if a remote replica's heartbeat is constant after
// several reads, then the replica is assumed to have failed, and it is removed from the
// set of correct replicas" (step 3). A replica whose heartbeat moves again is put back
// (the paper allows a crashed replica to "return to functionality").
// Every PERIOD cycles the block: (1) judges the last round: for each remote replica, a
// Read that returned a new value resets its stale count; an unchanged value, or no answer
// at all (a crashed replica's NIC answers nothing), adds one; FAIL_READS in a row mark it
// failed; (2) writes its own incremented counter to HBM_ADDR; (3) issues one Read per
// remote replica through the SMR's verb multiplexer.
// PERIOD and FAIL_READS ("several") are this design's choices; the paper gives neither.
// Interfaces: verb out (sq_*), completions in (cpl_*, only those with rtag[7] = 1 are the
// scanner's), HBM write port (mem_*), correct set out (alive, own bit always 1).
module heartbeat_scanner
  import safardb_pkg::*;
#(
  parameter int N_NODES    = 8,
  parameter int PERIOD     = 1024,
  parameter int FAIL_READS = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NODE_W-1:0]  node_id,
  output logic               sq_valid,
  input  logic               sq_ready,
  output sq_entry_t          sq_data,
  input  logic               cpl_valid,
  input  cpl_t               cpl_data,
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [ADDR_W-1:0]  mem_req_addr,
  output logic [DATA_W-1:0]  mem_req_wdata,
  output logic [N_NODES-1:0] alive,
  output logic [DATA_W-1:0]  my_hb,
  output logic [15:0]        removals
);
  localparam int SW = $clog2(FAIL_READS + 1);
  localparam int TW = $clog2(PERIOD + 1);
  typedef enum logic [1:0] {S_WAIT, S_WR, S_RD} state_e;
  state_e st;
  logic [TW-1:0] timer;
  logic [N_NODES-1:0] todo, got, changed;
  logic [N_NODES-1:0][DATA_W-1:0] last;
  logic [N_NODES-1:0][SW-1:0] stale;
  logic [NODE_W-1:0] dst;
  logic tick, mine;

  assign tick = (timer == TW'(PERIOD - 1));
  assign mine = cpl_valid && !cpl_data.is_ack && cpl_data.rtag[RTAG_W-1] &&
                (int'(cpl_data.src) < N_NODES);

  always_comb begin
    dst = '0;
    for (int k = N_NODES-1; k >= 0; k--) if (todo[k]) dst = NODE_W'(k);
  end

  assign sq_valid      = (st == S_RD) && (todo != '0);
  assign sq_data.verb  = V_READ;
  assign sq_data.dst   = dst;
  assign sq_data.raddr = HB_ADDR;
  assign sq_data.laddr = RD_LAND_BASE + ADDR_W'(dst);
  assign sq_data.data  = '0;
  assign sq_data.rtag  = {1'b1, {(RTAG_W-1-NODE_W){1'b0}}, dst};

  assign mem_req_valid = (st == S_WR);
  assign mem_req_addr  = HB_ADDR;
  assign mem_req_wdata = my_hb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_WAIT; timer <= '0; todo <= '0; got <= '0; changed <= '0;
      last <= '0; stale <= '0; alive <= '1; my_hb <= '0; removals <= '0;
    end else begin
      timer <= tick ? '0 : timer + 1'b1;
      if (tick) begin
        for (int j = 0; j < N_NODES; j++) begin
          if (j == int'(node_id)) begin
            alive[j] <= 1'b1; stale[j] <= '0;
          end else if (got[j] && changed[j]) begin
            alive[j] <= 1'b1; stale[j] <= '0;
          end else begin
            if (stale[j] != SW'(FAIL_READS)) stale[j] <= stale[j] + 1'b1;
            if (int'(stale[j]) + 1 >= FAIL_READS) begin
              if (alive[j]) removals <= removals + 1'b1;
              alive[j] <= 1'b0;
            end
          end
        end
        got <= '0; changed <= '0;
        my_hb <= my_hb + 1'b1;
        todo <= ~(N_NODES'(1) << node_id);
        st <= S_WR;
      end else begin
        case (st)
          S_WR: if (mem_req_ready) st <= S_RD;
          S_RD: if (todo == '0) st <= S_WAIT;
                else if (sq_ready) todo[dst] <= 1'b0;
          default: ;
        endcase
      end
      if (mine) begin
        got[cpl_data.src] <= 1'b1;
        if (cpl_data.data != last[cpl_data.src]) changed[cpl_data.src] <= 1'b1;
        last[cpl_data.src] <= cpl_data.data;
      end
    end
  end
endmodule
