// mem_arbiter: shares the replica's single HBM port among several memory masters.
//
// The paper's Figure 3 draws memory-mapped AXI read/write paths from the network kernel,
// the application and the SMR into HBM without describing the interconnect. This block is
// the simplest one that does the job: fixed priority (master 0 first), one request per
// cycle, and an in-order record of which master issued each read, so that read data goes
// back to the right master. The HBM side must return reads in request order.
// Interface per master: req_valid/req_ready/req_we/req_addr/req_wdata, rsp_valid/rsp_rdata.
// Timing: a granted request leaves in the same cycle; a read's data returns to its master
// in the cycle the HBM returns it.
module mem_arbiter
  import safardb_pkg::*;
#(
  parameter int NM = 3,
  parameter int MAX_RD = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NM-1:0]             req_valid,
  output logic [NM-1:0]             req_ready,
  input  logic [NM-1:0]             req_we,
  input  logic [NM-1:0][ADDR_W-1:0] req_addr,
  input  logic [NM-1:0][DATA_W-1:0] req_wdata,
  output logic [NM-1:0]             rsp_valid,
  output logic [DATA_W-1:0]         rsp_rdata,
  output logic                      mem_req_valid,
  input  logic                      mem_req_ready,
  output logic                      mem_req_we,
  output logic [ADDR_W-1:0]         mem_req_addr,
  output logic [DATA_W-1:0]         mem_req_wdata,
  input  logic                      mem_rsp_valid,
  input  logic [DATA_W-1:0]         mem_rsp_rdata
);
  localparam int IW = (NM > 1) ? $clog2(NM) : 1;
  logic [IW-1:0] g;
  logic any;
  logic id_s_valid, id_s_ready, id_m_valid;
  logic [IW-1:0] id_m_data;
  logic [$clog2(MAX_RD):0] id_count;

  always_comb begin
    any = 1'b0;
    g = '0;
    for (int k = NM-1; k >= 0; k--) begin
      if (req_valid[k]) begin
        any = 1'b1;
        g = IW'(k);
      end
    end
  end

  // A read may only go out if its master id can be recorded.
  assign mem_req_valid = any && (req_we[g] || id_s_ready);
  assign mem_req_we    = req_we[g];
  assign mem_req_addr  = req_addr[g];
  assign mem_req_wdata = req_wdata[g];
  always_comb begin
    req_ready = '0;
    req_ready[g] = any && mem_req_ready && (req_we[g] || id_s_ready);
  end
  assign id_s_valid = mem_req_valid && mem_req_ready && !mem_req_we;

  axis_fifo #(.WIDTH(IW), .DEPTH(MAX_RD)) u_ids (
    .clk, .rst_n,
    .s_valid(id_s_valid), .s_ready(id_s_ready), .s_data(g),
    .m_valid(id_m_valid), .m_ready(mem_rsp_valid), .m_data(id_m_data),
    .count(id_count));

  always_comb begin
    rsp_valid = '0;
    rsp_valid[id_m_data] = mem_rsp_valid && id_m_valid;
  end
  assign rsp_rdata = mem_rsp_rdata;

  a_no_orphan: assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> id_m_valid);
endmodule
