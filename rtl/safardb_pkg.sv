// safardb_pkg: types and constants shared by every block of the SafarDB replica.
//
// A replica is one network-attached FPGA. Its soft RDMA NIC (the network kernel) moves
// one-sided verbs between replicas; the user kernel holds the replicated data type (RDT)
// handlers and the state machine replication (SMR) engine. This package fixes:
//   * the verb set: the two one-sided verbs of RDMA (Read, Write) plus the FPGA-specific
//     RPC verb (payload is an opcode and parameters, delivered straight to the dispatcher)
//     and the RPC Write-Through verb (written to HBM and delivered to the dispatcher at once),
//     as the paper defines them; READ_RSP and ACK are the NIC's own reply packets;
//   * the send-queue entry the user kernel pushes, the packet that crosses the network, and
//     the completion the NIC hands back;
//   * the operation word (opcode + parameter) and the replication-log entry
//     (proposal number + operation), the pair the paper describes for each log slot;
//   * the HBM word map used by the SMR (heartbeat counter, proposal number, log).
// All widths and the memory map are this design's choices; the paper gives none of them.
package safardb_pkg;

  localparam int DATA_W    = 64;   // one HBM word, one verb payload
  localparam int ADDR_W    = 30;   // 8 GB of HBM in 8-byte words
  localparam int NODE_W    = 3;    // replica id: up to 8 replicas (the paper evaluates 3..8)
  localparam int MAX_NODES = 1 << NODE_W;
  localparam int RTAG_W    = 8;    // tag chosen by the requester, returned in its completion
  localparam int PROP_W    = 24;   // proposal number field of a log entry
  localparam int OPC_W     = 8;    // opcode field of an operation
  localparam int PARAM_W   = 32;   // parameter field of an operation
  localparam int OP_W      = OPC_W + PARAM_W;

  typedef enum logic [2:0] {
    V_READ     = 3'd0,  // one-sided RDMA Read from remote HBM
    V_WRITE    = 3'd1,  // one-sided RDMA Write to remote HBM
    V_RPC      = 3'd2,  // FPGA-specific RPC: payload goes to the remote dispatcher
    V_RPC_WT   = 3'd3,  // RPC Write-Through: remote HBM write and dispatcher at once
    V_READ_RSP = 3'd4,  // NIC-generated: payload of a Read
    V_ACK      = 3'd5   // NIC-generated: acknowledgement of a Write/RPC/RPC_WT
  } verb_e;

  // Operation: opcode plus one parameter (paper: "a transaction ID (opcode) and parameters").
  typedef struct packed {
    logic [OPC_W-1:0]   opcode;
    logic [PARAM_W-1:0] param;
  } op_t;

  // Opcodes. Opcode 0 is the empty/no-op operation; the dispatcher drives one method per
  // opcode below NUM_OPCODES.
  localparam logic [OPC_W-1:0] OP_NOP      = 8'd0;
  localparam logic [OPC_W-1:0] OP_DEPOSIT  = 8'd1;  // Bank Account: reducible
  localparam logic [OPC_W-1:0] OP_WITHDRAW = 8'd2;  // Bank Account: conflicting
  localparam logic [OPC_W-1:0] OP_QUERY    = 8'd3;  // local read only, never replicated
  localparam int NUM_OPCODES = 8;   // method strobes: up to 7 methods per application

  // Replication-log entry: one HBM word. An all-zero proposal number marks an empty slot.
  typedef struct packed {
    logic [PROP_W-1:0] prop;
    op_t               op;
  } log_entry_t;

  // Flag word of an RPC payload (bits above the operation). FWD marks a conflicting
  // operation forwarded by a follower to the leader's SMR.
  localparam logic [DATA_W-OP_W-1:0] RPC_FLAG_NONE = '0;
  localparam logic [DATA_W-OP_W-1:0] RPC_FLAG_FWD  = 1;

  // HBM word map (word addresses).
  localparam logic [ADDR_W-1:0] HB_ADDR       = 30'h0;     // own heartbeat counter
  localparam logic [ADDR_W-1:0] PROP_ADDR     = 30'h1;     // Mu proposal number
  localparam logic [ADDR_W-1:0] RD_LAND_BASE  = 30'h10;    // landing words for read replies
  localparam logic [ADDR_W-1:0] LOG_BASE      = 30'h1000;  // replication log, one word per slot

  // Send-queue entry: what a requester pushes into the SQ.
  typedef struct packed {
    verb_e              verb;
    logic [NODE_W-1:0]  dst;
    logic [ADDR_W-1:0]  raddr;  // remote HBM address (Read, Write, RPC_WT)
    logic [ADDR_W-1:0]  laddr;  // local HBM address where a Read's payload lands
    logic [DATA_W-1:0]  data;   // payload (Write, RPC, RPC_WT)
    logic [RTAG_W-1:0]  rtag;   // returned in the completion
  } sq_entry_t;

  localparam int NTAG_W = 8;    // NIC tag: index into the RQ / ACK queue

  // Packet between replicas (what the NIC hands to, and takes from, the Ethernet MAC).
  typedef struct packed {
    verb_e              verb;
    logic [NODE_W-1:0]  src;
    logic [NODE_W-1:0]  dst;
    logic [ADDR_W-1:0]  addr;
    logic [DATA_W-1:0]  data;
    logic [NTAG_W-1:0]  tag;
  } pkt_t;

  // Completion of a locally issued verb (Read payload or ACK of a write-type verb).
  typedef struct packed {
    logic [NODE_W-1:0]  src;
    logic [RTAG_W-1:0]  rtag;
    logic               is_ack;
    logic [DATA_W-1:0]  data;
  } cpl_t;

  // Remote operation delivered by the NIC's receive path to the dispatcher.
  typedef struct packed {
    verb_e              verb;   // V_RPC or V_RPC_WT
    logic [NODE_W-1:0]  src;
    logic [ADDR_W-1:0]  addr;   // log address of a Write-Through
    logic [DATA_W-1:0]  data;
  } rpc_t;

  // Entry of the RQ / ACK queue: who asked, and where a Read's payload lands.
  typedef struct packed {
    logic [RTAG_W-1:0]  rtag;
    logic [ADDR_W-1:0]  laddr;
  } vt_entry_t;

endpackage
