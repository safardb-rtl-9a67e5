// peer_model: behavioural model of the remote replicas as one replica's requesters see them
// through the NIC (not synthesizable).
//
// It takes send-queue entries (always ready) and returns the completions the network
// kernel would deliver: a Read returns the addressed word of the destination replica's
// memory (its heartbeat word HB_ADDR reads as a counter that advances while the replica is
// alive), a Write or RPC Write-Through stores the word and is acknowledged, an RPC is only
// acknowledged. A replica marked dead never answers; a replica marked in 'refuse' drops
// writes as its QP permission would (no store, no ACK). Completions come back LAT cycles
// after the verb, one per cycle, in issue order.
module peer_model
  import safardb_pkg::*;
#(
  parameter int N_NODES = 4,
  parameter int LAT     = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sq_valid,
  output logic               sq_ready,
  input  sq_entry_t          sq_data,
  output logic               cpl_valid,
  output cpl_t               cpl_data,
  input  logic [N_NODES-1:0] dead,
  input  logic [N_NODES-1:0] refuse
);
  typedef struct packed { longint unsigned due; cpl_t c; } pend_t;
  pend_t q[$];
  logic [DATA_W-1:0] mem [N_NODES][logic [ADDR_W-1:0]];
  logic [DATA_W-1:0] hb [N_NODES];
  longint unsigned cyc = 0;
  int unsigned n_read = 0, n_write = 0, n_rpc = 0, n_wt = 0, n_refused = 0;
  sq_entry_t rpcs[$];

  assign sq_ready = 1'b1;

  function automatic logic [DATA_W-1:0] peek(input int n, input logic [ADDR_W-1:0] a);
    return mem[n].exists(a) ? mem[n][a] : '0;
  endfunction
  function automatic void poke(input int n, input logic [ADDR_W-1:0] a,
                               input logic [DATA_W-1:0] d);
    mem[n][a] = d;
  endfunction

  initial for (int i = 0; i < N_NODES; i++) hb[i] = 64'd1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < N_NODES; i++) if (!dead[i]) hb[i] <= hb[i] + 1;
    if (!rst_n) begin
      q.delete();
      cpl_valid <= 1'b0;
      cpl_data  <= '0;
    end else begin
      if (sq_valid) begin
        int d;
        cpl_t c;
        d = int'(sq_data.dst);
        c = '{src: sq_data.dst, rtag: sq_data.rtag, is_ack: 1'b1, data: '0};
        if (d < N_NODES && !dead[d]) begin
          case (sq_data.verb)
            V_READ: begin
              n_read++;
              c.is_ack = 1'b0;
              c.data = (sq_data.raddr == HB_ADDR) ? hb[d] : peek(d, sq_data.raddr);
              q.push_back('{due: cyc + longint'(LAT), c: c});
            end
            V_WRITE, V_RPC_WT: begin
              if (refuse[d]) n_refused++;
              else begin
                if (sq_data.verb == V_WRITE) n_write++;
                else begin n_wt++; rpcs.push_back(sq_data); end
                mem[d][sq_data.raddr] = sq_data.data;
                q.push_back('{due: cyc + longint'(LAT), c: c});
              end
            end
            default: begin
              n_rpc++;
              rpcs.push_back(sq_data);
              q.push_back('{due: cyc + longint'(LAT), c: c});
            end
          endcase
        end
      end
      if (q.size() != 0 && q[0].due <= cyc) begin
        cpl_valid <= 1'b1;
        cpl_data  <= q[0].c;
        void'(q.pop_front());
      end else begin
        cpl_valid <= 1'b0;
      end
    end
  end
endmodule
