// hbm_model: behavioural model of one replica's HBM channel (not synthesizable).
//
// The HBM stacks beside the FPGA hold each replica's log, proposal number and heartbeat
// word. This model stores 64-bit words in a sparse associative array (an unwritten word
// reads as 0), accepts one request per cycle, and returns read data in request order a
// fixed LAT cycles after the request. When STALL_EVERY is non-zero it refuses a request
// (req_ready low) one cycle in every STALL_EVERY, so that back-pressure is exercised.
// Ports follow the node's memory port: req_valid/req_ready/req_we/req_addr/req_wdata,
// rsp_valid/rsp_rdata. Latency and stall pattern are this model's own choices.
module hbm_model
  import safardb_pkg::*;
#(
  parameter int LAT         = 4,
  parameter int STALL_EVERY = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [DATA_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [DATA_W-1:0] rsp_rdata
);
  typedef struct packed {
    longint unsigned due;
    logic [DATA_W-1:0] data;
  } rd_t;

  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  rd_t q[$];
  longint unsigned cyc = 0;
  int unsigned reads = 0, writes = 0;

  assign req_ready = (STALL_EVERY == 0) || ((cyc % longint'(STALL_EVERY)) != 0);

  function automatic logic [DATA_W-1:0] peek(input logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      q.delete();
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[req_addr] = req_wdata;
          writes++;
        end else begin
          q.push_back('{due: cyc + longint'(LAT), data: peek(req_addr)});
          reads++;
        end
      end
      if (q.size() != 0 && q[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q[0].data;
        void'(q.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
