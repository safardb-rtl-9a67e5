// tb_heartbeat_scanner: tests failure detection by heartbeat reads.
//
// Replica 0's scanner (4 replicas, 64-cycle period, 3 failed reads) runs against the peer
// model, whose replicas' heartbeat words advance while they live. The testbench checks
// that every period the scanner increments its own heartbeat, writes it to HB_ADDR in its
// own memory and sends one Read of HB_ADDR to each other replica; that a replica stopped
// at some cycle is removed after three periods without a change (no earlier than two
// periods, no later than four), exactly once; that a replica whose counter moves again is
// taken back after one period; and that the other replicas stay alive throughout.
module tb_heartbeat_scanner;
  import safardb_pkg::*;
  localparam int N = 4, P = 64, F = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = '0;
  logic sq_valid, sq_ready, cpl_valid, mem_req_valid, mem_req_ready = 1'b1;
  sq_entry_t sq_data;
  cpl_t cpl_data;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [DATA_W-1:0] mem_req_wdata, my_hb;
  logic [N-1:0] alive, dead = '0;
  logic [15:0] removals;

  heartbeat_scanner #(.N_NODES(N), .PERIOD(P), .FAIL_READS(F)) dut (.*);
  peer_model #(.N_NODES(N), .LAT(9)) u_peers (
    .clk, .rst_n, .sq_valid, .sq_ready(), .sq_data, .cpl_valid, .cpl_data,
    .dead, .refuse('0));
  assign sq_ready = 1'b1;

  int reads_to [N];
  int hb_writes = 0;
  logic [DATA_W-1:0] last_written = '0;
  always @(posedge clk) if (rst_n) begin
    if (sq_valid && sq_ready) begin
      check(sq_data.verb == V_READ && sq_data.raddr == HB_ADDR && sq_data.dst != node_id,
            "heartbeat read of another replica");
      reads_to[sq_data.dst]++;
    end
    if (mem_req_valid && mem_req_ready) begin
      check(mem_req_addr == HB_ADDR && mem_req_wdata == last_written + 1, "own heartbeat written");
      last_written = mem_req_wdata;
      hb_writes++;
    end
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    for (int i = 0; i < N; i++) reads_to[i] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    repeat (10 * P) @(posedge clk);
    check(alive == '1 && removals == 0, "all alive while all beat");
    check(hb_writes >= 9 && hb_writes <= 10 && my_hb == last_written, "one heartbeat per period");
    for (int i = 1; i < N; i++) check(reads_to[i] == hb_writes, "one read per replica per period");
    // stop replica 2
    dead[2] <= 1'b1;
    t = 0;
    while (alive[2] && t < 6 * P) begin @(posedge clk); t++; end
    check(!alive[2], "stopped replica removed");
    check(t >= 2 * P && t <= 4 * P + 20, "removed after about three periods");
    check(removals == 1 && alive == 4'b1011, "only replica 2 removed, once");
    repeat (3 * P) @(posedge clk);
    check(removals == 1, "removal counted once");
    // revive it
    dead[2] <= 1'b0;
    t = 0;
    while (!alive[2] && t < 4 * P) begin @(posedge clk); t++; end
    check(alive[2] && t <= 2 * P + 20, "replica taken back once it beats again");
    check(alive == '1, "all alive again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
