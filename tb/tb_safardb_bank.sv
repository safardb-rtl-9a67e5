// tb_safardb_bank: the Bank Account benchmark mix on three replicas (heartbeat period 256).
//
// Every replica runs its own client at once: 150 operations each, a quarter of them
// updates (half deposits of 1..100, half withdrawals of 1..150) and the rest queries.
// Withdrawals at followers are forwarded to the leader, replica 0, and withdrawals from
// different replicas race. Checked:
//   * on every cycle, no replica's balance is ever negative (the invariant B - w >= 0);
//   * every query returns a non-negative balance;
//   * after the load, all replicas hold the same balance and the same log-slot count;
//   * that balance is the sum of all deposits minus the withdrawals in the leader's log.
//     A withdrawal rejected by the leader's re-check is logged as a no-op, so the log
//     decides which withdrawals took effect. The testbench reads the log slot by slot;
//   * every submitted withdrawal has a log slot, except forwards the leader dropped because
//     its forward queue was full (counted by its dispatcher). Followers here forward
//     faster than the leader commits, so some drops are expected under this load.
module tb_safardb_bank;
  import safardb_pkg::*;
  localparam int N = 3, OPS = 150;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] st [N];
  logic [31:0] vb [N], ds [N];

  crdt_cluster #(.N(N), .APP(0)) u_b (.clk, .rst_n, .state(st), .verbs(vb), .disp(ds));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  int negative = 0;
  always @(posedge clk) if (rst_n)
    for (int n = 0; n < N; n++) if (st[n] < 0) negative++;

  longint deposits = 0;
  int submitted = 0, refused = 0, bad_query = 0;

  task automatic run(input int n);
    bit ok; logic [DATA_W-1:0] d; int v;
    for (int i = 0; i < OPS; i++) begin
      case ($urandom_range(0, 7))
        0: begin v = $urandom_range(1, 100); u_b.client(n, OP_DEPOSIT, v, ok, d); deposits += v; end
        1: begin
          v = $urandom_range(1, 150);
          u_b.client(n, OP_WITHDRAW, v, ok, d);
          if (ok) submitted++; else refused++;
        end
        default: begin
          u_b.client(n, OP_QUERY, 0, ok, d);
          if ($signed(d) < 0) bad_query++;
        end
      endcase
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint withdrawn;
    int noops, wd, drops;
    logic [DATA_W-1:0] e;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3 * 256) @(posedge clk);
    check(u_b.is_leader == 3'b001, "replica 0 leads");
    for (int n = 0; n < N; n++) begin
      automatic int k = n;
      fork run(k); join_none
    end
    wait fork;
    repeat (3000) @(posedge clk);
    check(negative == 0, "no balance ever negative");
    check(bad_query == 0, "no query returned a negative balance");
    for (int n = 1; n < N; n++) check(st[n] == st[0], "replicas agree on the balance");
    for (int n = 1; n < N; n++) check(u_b.slot[n] == u_b.slot[0], "replicas agree on the log length");
    drops = int'(u_b.g_node[0].u_node.u_disp.fwd_drops);
    check(int'(u_b.slot[0]) + drops == submitted,
          "one log slot per submitted withdrawal, less forwards the leader dropped");
    withdrawn = 0; noops = 0; wd = 0;
    for (int s = 0; s < int'(u_b.slot[0]); s++) begin
      e = u_b.g_node[0].u_hbm.peek(LOG_BASE + ADDR_W'(s));
      if (e[39:32] == OP_WITHDRAW) begin withdrawn += longint'(e[31:0]); wd++; end
      else noops++;
    end
    check(st[0] == deposits - withdrawn, "balance = deposits - logged withdrawals");
    check(submitted > 0 && refused > 0, "withdrawals both submitted and refused locally");
    $display("deposits %0d, withdrawals logged %0d (sum %0d), leader no-ops %0d, local refusals %0d, dropped forwards %0d, balance %0d",
             deposits, wd, withdrawn, noops, refused, drops, st[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
