// tb_send_queue: tests the send queue (axis_fifo holding sq_entry_t, 16 deep).
//
// Random pushes and pops, 3000 cycles, against a reference queue in the testbench: every
// popped entry must be the oldest one pushed, count must equal the reference size, s_ready
// must drop exactly when 16 entries are held and m_valid exactly when none are. A burst of
// pushes with the output stalled checks that the queue holds 16 and refuses the 17th.
module tb_send_queue;
  import safardb_pkg::*;
  localparam int DEPTH = 16;
  localparam int W = $bits(sq_entry_t);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic s_valid = 1'b0, s_ready, m_valid, m_ready = 1'b0;
  logic [W-1:0] s_data = '0, m_data;
  logic [$clog2(DEPTH):0] count;
  logic [W-1:0] ref_q[$];
  int popped = 0, full_seen = 0;

  axis_fifo #(.WIDTH(W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [W-1:0] rnd_entry();
    sq_entry_t e;
    e.verb = verb_e'($urandom_range(0, 3));
    e.dst = NODE_W'($urandom); e.raddr = ADDR_W'($urandom); e.laddr = ADDR_W'($urandom);
    e.data = {$urandom, $urandom}; e.rtag = RTAG_W'($urandom);
    return e;
  endfunction

  // compare with the reference before each edge, then update it with the handshakes
  always @(posedge clk) if (rst_n) begin
    check(int'(count) == ref_q.size(), "count matches");
    check(s_ready == (ref_q.size() < DEPTH), "s_ready only when not full");
    check(m_valid == (ref_q.size() > 0), "m_valid only when not empty");
    if (m_valid && ref_q.size() > 0) check(m_data == ref_q[0], "oldest entry at head");
    if (m_valid && m_ready) begin void'(ref_q.pop_front()); popped++; end
    if (s_valid && s_ready) ref_q.push_back(s_data);
    if (!s_ready) full_seen++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // fill with the output stalled: 16 accepted, then full
    for (int i = 0; i < DEPTH + 4; i++) begin
      s_valid <= 1'b1; s_data <= rnd_entry();
      @(posedge clk);
    end
    s_valid <= 1'b0;
    @(posedge clk);
    check(int'(count) == DEPTH, "holds exactly 16");
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      s_valid <= ($urandom_range(0, 3) != 0);
      s_data  <= rnd_entry();
      m_ready <= ($urandom_range(0, 2) != 0);
      @(posedge clk);
    end
    s_valid <= 1'b0; m_ready <= 1'b1;
    repeat (DEPTH + 2) @(posedge clk);
    check(count == 0, "drained");
    check(popped > 1000 && full_seen > 0, "traffic and full condition exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
