// axis_rr_mux: round-robin merge of several AXI-Stream sources into one.
//
// SafarDB has several issuers of RDMA verbs sharing one send queue: the FPGA-resident
// application, the SMR (itself a merge of its heartbeat scanner and communication manager,
// drawn as a multiplexer in front of the outgoing RDMA path) and, in hybrid mode, the host.
// Interface: N sources (valid/ready/data), one sink. Timing: combinational; the grant
// pointer moves past a source after each transfer it makes, so no source starves.
// The arbitration policy is this design's choice; the paper only draws the multiplexer.
module axis_rr_mux #(
  parameter int N     = 2,
  parameter int WIDTH = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0]           s_valid,
  output logic [N-1:0]           s_ready,
  input  logic [N-1:0][WIDTH-1:0] s_data,
  output logic                   m_valid,
  input  logic                   m_ready,
  output logic [WIDTH-1:0]       m_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr, sel;
  logic found;
  logic [IW:0] idx;   // ptr + k, wrapped into 0..N-1

  always_comb begin
    found = 1'b0;
    sel = ptr;
    idx = '0;
    for (int k = 0; k < N; k++) begin
      idx = (IW+1)'(ptr) + (IW+1)'(k);
      if (idx >= (IW+1)'(N)) idx = idx - (IW+1)'(N);
      if (!found && s_valid[IW'(idx)]) begin
        found = 1'b1;
        sel = IW'(idx);
      end
    end
  end

  // kept apart from the search above so that m_valid never appears to depend on m_ready
  assign m_valid = found;
  assign m_data  = s_data[sel];
  always_comb begin
    s_ready = '0;
    s_ready[sel] = found && m_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (m_valid && m_ready) ptr <= (int'(sel) == N-1) ? '0 : sel + 1'b1;
  end
endmodule
