// tb_communication_manager: tests one-step RDMA jobs of the SMR against the peer model.
//
// Five replicas, this one is 0, retry timeout 64 cycles. Jobs and expected outcomes:
//   Read of a log slot from replicas 1..4, quorum 4: their slots hold nothing, {5,a},
//     {9,b}, {7,c}; done with max proposal 9 and best entry {9,b}.
//   Same Read, quorum 2, replicas 3 and 4 dead: done on the answers of 1 and 2 only:
//     best {5,a}.
//   Read of the proposal word with every slot empty: res_any stays low.
//   Write with quorum 2 while replicas 1..3 refuse writes: not done within the timeout;
//     after replica 1 and 2 accept again the re-sent Writes complete the job; one retry or
//     more is counted and every accepting replica holds the word.
//   Write with quorum 3 where only two can answer, then abort: the job is dropped.
//   RPC to one replica with quorum 0 (a forward): done as soon as it is queued.
// Each job must send its verb once to each destination (before any re-send).
module tb_communication_manager;
  import safardb_pkg::*;
  localparam int N = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic abort = 1'b0, job_valid = 1'b0, job_ready, done, res_any;
  verb_e job_verb = V_READ;
  logic [N-1:0] job_dst = '0, dead = '0, refuse = '0;
  logic [NODE_W:0] job_quorum = '0;
  logic [ADDR_W-1:0] job_addr = '0;
  logic [DATA_W-1:0] job_data = '0;
  logic [PROP_W-1:0] res_max_prop;
  log_entry_t res_best;
  logic sq_valid, sq_ready, cpl_valid;
  sq_entry_t sq_data;
  cpl_t cpl_data;
  logic [15:0] retries;

  communication_manager #(.N_NODES(N), .RETRY(64)) dut (.*);
  peer_model #(.N_NODES(N), .LAT(7)) u_peers (
    .clk, .rst_n, .sq_valid, .sq_ready, .sq_data, .cpl_valid, .cpl_data, .dead, .refuse);

  int sent = 0, dones = 0;
  always @(posedge clk) if (rst_n) begin
    if (sq_valid && sq_ready) sent++;
    if (done) dones++;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // start a job, return the cycles until done (or -1 after 'limit' cycles)
  task automatic run(input verb_e v, input logic [N-1:0] dm, input int q,
                     input logic [ADDR_W-1:0] a, input logic [DATA_W-1:0] d,
                     input int limit, output int t);
    #1;
    job_valid = 1'b1; job_verb = v; job_dst = dm; job_quorum = (NODE_W+1)'(q);
    job_addr = a; job_data = d;
    @(posedge clk);
    while (!job_ready) @(posedge clk);
    #1 job_valid = 1'b0;
    t = 0;
    while (!done && t < limit) begin @(posedge clk); #1; t++; end
    if (!done) t = -1;
    @(posedge clk);
  endtask

  function automatic logic [DATA_W-1:0] ent(input int p, input int o);
    log_entry_t e;
    e.prop = PROP_W'(p); e.op = '{opcode: OP_WITHDRAW, param: PARAM_W'(o)};
    return DATA_W'(e);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, s0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    u_peers.poke(2, LOG_BASE + 3, ent(5, 111));
    u_peers.poke(3, LOG_BASE + 3, ent(9, 222));
    u_peers.poke(4, LOG_BASE + 3, ent(7, 333));
    u_peers.poke(1, PROP_ADDR, ent(4, 0));
    u_peers.poke(3, PROP_ADDR, ent(6, 0));
    @(posedge clk);

    s0 = sent;
    run(V_READ, 5'b11110, 4, LOG_BASE + 3, '0, 200, t);
    check(t > 0, "read job done");
    check(sent - s0 == 4, "one read per follower");
    check(res_any && res_max_prop == 9 && res_best == log_entry_t'(ent(9, 222)),
          "highest-numbered entry adopted");

    dead <= 5'b11000;
    run(V_READ, 5'b11110, 2, LOG_BASE + 3, '0, 200, t);
    check(t > 0, "quorum of two reached without the dead replicas");
    check(res_any && res_best == log_entry_t'(ent(5, 111)) && res_max_prop == 5,
          "best of the answers received");

    run(V_READ, 5'b00110, 2, LOG_BASE + 9, '0, 200, t);
    check(t > 0 && !res_any && res_max_prop == 0, "empty slots: nothing to adopt");
    run(V_READ, 5'b00110, 2, PROP_ADDR, '0, 200, t);
    check(t > 0 && res_max_prop == 4, "largest proposal number");

    // refused writes and re-send
    dead <= '0;
    refuse <= 5'b01110;
    fork
      run(V_WRITE, 5'b11110, 2, 30'h77, 64'hABCD, 1000, t);
      begin
        repeat (100) @(posedge clk);
        check(!done && retries >= 1, "not done while writes are refused; re-sent");
        refuse <= 5'b01000;
      end
    join
    check(t > 100, "write job done after the refusals end");
    check(retries >= 2, "retries counted");
    check(u_peers.peek(1, 30'h77) == 64'hABCD && u_peers.peek(4, 30'h77) == 64'hABCD &&
          u_peers.peek(3, 30'h77) == 0, "accepting replicas hold the word");

    // abort a job that cannot finish
    dead <= 5'b01100;
    refuse <= '0;
    fork
      run(V_WRITE, 5'b11110, 3, 30'h78, 64'h1, 150, t);
      begin repeat (120) @(posedge clk); #1 abort = 1'b1; @(posedge clk); #1 abort = 1'b0; end
    join
    check(t == -1 && job_ready, "aborted job dropped");

    // forward: quorum 0
    dead <= '0;
    s0 = sent;
    run(V_RPC, 5'b00001 << 2, 0, '0, 64'h55, 20, t);
    check(t >= 0 && t <= 3 && sent - s0 == 1, "forward done once queued");
    check(u_peers.rpcs.size() == 1 && u_peers.rpcs[0].data == 64'h55, "RPC delivered");
    @(posedge clk);
    check(dones == 6, "one done pulse per finished job");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
