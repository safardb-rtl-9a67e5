// rdma_rx: receive path of the soft RDMA NIC (network kernel).
//
// Handles one packet at a time from the Ethernet MAC, following the paper's FPGA Read and
// Write paths and its FPGA-specific verbs:
//   Read        read the HBM word (step 10) and send it back as a READ_RSP (step a).
//   Write       check the QPC write permission (step 9), write HBM (step 10), send an ACK.
//   RPC         hand opcode and parameters straight to the dispatcher (the "direct update"
//               path, no HBM access), send an ACK.
//   RPC_WT      Write-Through: permission check, write HBM (the replication log) and hand
//               the same payload to the dispatcher, send an ACK.
//   READ_RSP    retire the RQE of that tag (step f), write the payload to the local HBM
//               address the RQE names, and give the requester a completion.
//   ACK         retire the expected ACK of that tag (step d) and give a completion.
// A write-type packet without permission is dropped and counted (perm_err); no ACK is sent,
// so the sender never counts it (the paper: "RDMA Writes to a closed QP fail").
// Timing: a packet is taken in one cycle and then needs one cycle per HBM access, reply or
// dispatcher hand-off, each stalling on the corresponding ready. The completion output has
// no back-pressure: its consumers take one per cycle.
module rdma_rx
  import safardb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] node_id,
  // from the Ethernet MAC
  input  logic              rx_valid,
  output logic              rx_ready,
  input  pkt_t              rx_data,
  // QPC permission check
  output logic [NODE_W-1:0] chk_src,
  input  logic              chk_ok,
  // HBM port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [DATA_W-1:0] mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [DATA_W-1:0] mem_rsp_rdata,
  // replies to the transmit path
  output logic              rep_valid,
  input  logic              rep_ready,
  output pkt_t              rep_data,
  // to the dispatcher
  output logic              rpc_valid,
  input  logic              rpc_ready,
  output rpc_t              rpc_data,
  // completions to the requesters
  output logic              cpl_valid,
  output cpl_t              cpl_data,
  // RQ / ACK queue retire
  output logic              rq_del,
  output logic              ack_del,
  output logic [NTAG_W-1:0] del_tag,
  input  vt_entry_t         rq_entry,
  input  logic              rq_hit,
  input  vt_entry_t         ack_entry,
  input  logic              ack_hit,
  output logic [15:0]       perm_err
);
  typedef enum logic [2:0] {S_IDLE, S_MEMRD, S_MEMWAIT, S_MEMWR, S_RPC, S_REPLY, S_RDRSP} state_e;
  state_e st;
  pkt_t cur;
  logic [DATA_W-1:0] rdata;

  assign rx_ready = (st == S_IDLE);
  assign chk_src  = rx_data.src;
  assign del_tag  = (st == S_IDLE) ? rx_data.tag : cur.tag;

  // HBM requests
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = cur.addr;
    mem_req_wdata = cur.data;
    case (st)
      S_MEMRD: mem_req_valid = 1'b1;
      S_MEMWR: begin mem_req_valid = 1'b1; mem_req_we = 1'b1; end
      S_RDRSP: begin
        mem_req_valid = rq_hit; mem_req_we = 1'b1; mem_req_addr = rq_entry.laddr;
      end
      default: ;
    endcase
  end

  // replies
  always_comb begin
    rep_valid     = (st == S_REPLY);
    rep_data.src  = node_id;
    rep_data.dst  = cur.src;
    rep_data.addr = cur.addr;
    rep_data.tag  = cur.tag;
    rep_data.verb = (cur.verb == V_READ) ? V_READ_RSP : V_ACK;
    rep_data.data = (cur.verb == V_READ) ? rdata : '0;
  end

  assign rpc_valid     = (st == S_RPC);
  assign rpc_data.verb = cur.verb;
  assign rpc_data.src  = cur.src;
  assign rpc_data.addr = cur.addr;
  assign rpc_data.data = cur.data;

  // retire + completion
  assign rq_del  = (st == S_RDRSP) && (!rq_hit || mem_req_ready);
  assign ack_del = (st == S_IDLE) && rx_valid && (rx_data.verb == V_ACK);
  always_comb begin
    cpl_valid       = 1'b0;
    cpl_data.src    = cur.src;
    cpl_data.data   = cur.data;
    cpl_data.is_ack = 1'b0;
    cpl_data.rtag   = rq_entry.rtag;
    if (st == S_RDRSP && rq_hit && mem_req_ready) cpl_valid = 1'b1;
    if (ack_del && ack_hit) begin
      cpl_valid       = 1'b1;
      cpl_data.src    = rx_data.src;
      cpl_data.data   = '0;
      cpl_data.is_ack = 1'b1;
      cpl_data.rtag   = ack_entry.rtag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      cur <= '0;
      rdata <= '0;
      perm_err <= '0;
    end else begin
      case (st)
        S_IDLE: if (rx_valid) begin
          cur <= rx_data;
          case (rx_data.verb)
            V_READ:     st <= S_MEMRD;
            V_WRITE,
            V_RPC_WT:   if (chk_ok) st <= S_MEMWR;
                        else perm_err <= perm_err + 1'b1;
            V_RPC:      st <= S_RPC;
            V_READ_RSP: st <= S_RDRSP;
            default:    st <= S_IDLE;   // V_ACK is retired in this cycle
          endcase
        end
        S_MEMRD:   if (mem_req_ready) st <= S_MEMWAIT;
        S_MEMWAIT: if (mem_rsp_valid) begin rdata <= mem_rsp_rdata; st <= S_REPLY; end
        S_MEMWR:   if (mem_req_ready) st <= (cur.verb == V_RPC_WT) ? S_RPC : S_REPLY;
        S_RPC:     if (rpc_ready) st <= S_REPLY;
        S_REPLY:   if (rep_ready) st <= S_IDLE;
        S_RDRSP:   if (!rq_hit || mem_req_ready) st <= S_IDLE;
        default:   st <= S_IDLE;
      endcase
    end
  end
endmodule
