// axis_fifo: synchronous first-in first-out queue with AXI-Stream style handshakes.
//
// In SafarDB this is the send queue (SQ): the user kernel pushes verbs into it and the
// network kernel's transmit path pops them, exactly as the paper describes the SQ ("an AXI
// stream that is written by the application and is read by the Network kernel"). The SMR
// reuses it to hold conflicting operations forwarded by followers.
// Interface: s_valid/s_ready/s_data in, m_valid/m_ready/m_data out; a beat moves when
// valid and ready are both high. Timing: an entry pushed in cycle t can leave in t+1; a full
// queue deasserts s_ready. Depth (power of two) and width are this design's choices.
module axis_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [WIDTH-1:0] s_data,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [WIDTH-1:0] m_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign s_ready = (count != DEPTH[AW:0]);
  assign m_valid = (count != '0);
  assign m_data  = mem[rp];
  assign push = s_valid && s_ready;
  assign pop  = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // AXI-Stream rule: once valid is up with data, it stays until taken.
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
