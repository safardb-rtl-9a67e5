// tb_safardb_crdt: the CRDT micro-benchmark mix on three eight-replica clusters, one
// running the PN-Counter, one the LWW-Register and one the 2P-Set.
//
// Every replica runs its own client at once: 120 operations each, of which a quarter
// are updates and the rest queries (the highest update share of the benchmark mix).
// Clients never wait for other replicas. After the load stops every cluster must
// converge:
//   * PN-Counter: every replica holds the sum of all increments minus all decrements,
//     worked out here.
//   * LWW-Register: every replica holds the same {value, timestamp}, and the value is one
//     that some client wrote.
//   * 2P-Set: every replica holds the same member count. That count equals the elements
//     inserted anywhere minus those whose remove was accepted anywhere, tracked here from
//     the responses.
// The test also checks that every update reached all seven peers: the dispatch counters
// add up to 7 times the accepted updates.
module tb_safardb_crdt;
  import safardb_pkg::*;
  localparam int N = 8, OPS = 120, ELEMS = 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic signed [DATA_W-1:0] st_pn [N], st_lww [N], st_set [N];
  logic [31:0] vb_pn [N], vb_lww [N], vb_set [N], ds_pn [N], ds_lww [N], ds_set [N];

  crdt_cluster #(.N(N), .APP(1)) u_pn  (.clk, .rst_n, .state(st_pn),  .verbs(vb_pn),  .disp(ds_pn));
  crdt_cluster #(.N(N), .APP(2)) u_lww (.clk, .rst_n, .state(st_lww), .verbs(vb_lww), .disp(ds_lww));
  crdt_cluster #(.N(N), .APP(5)) u_set (.clk, .rst_n, .state(st_set), .verbs(vb_set), .disp(ds_set));

  // RPC counts of the LWW cluster: handed to the NICs, sent, and received
  int app_sent = 0, wire_tx = 0, wire_rx = 0;
  for (genvar n = 0; n < N; n++) begin : g_dbg
    always @(posedge clk) if (rst_n) begin
      if (u_lww.g_node[n].u_node.app_sq_valid && u_lww.g_node[n].u_node.app_sq_ready) app_sent++;
      if (u_lww.tx_valid[n] && u_lww.tx_data[n].verb == V_RPC) wire_tx++;
      if (u_lww.rx_valid[n] && u_lww.rx_ready[n] && u_lww.rx_data[n].verb == V_RPC) wire_rx++;
    end
  end
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  longint pn_ref = 0;
  int pn_upd = 0, lww_upd = 0, set_upd = 0;
  bit [ELEMS-1:0] ins_any = '0, rem_any = '0;
  int unsigned written [$];

  task automatic run_pn(input int n);
    bit ok; logic [DATA_W-1:0] d; int v;
    for (int i = 0; i < OPS; i++) begin
      v = $urandom_range(1, 1000);
      case ($urandom_range(0, 7))
        0: begin u_pn.client(n, 8'd1, v, ok, d); pn_ref += v; pn_upd++; end
        1: begin u_pn.client(n, 8'd2, v, ok, d); pn_ref -= v; pn_upd++; end
        default: u_pn.client(n, 8'd3, 0, ok, d);
      endcase
    end
  endtask

  task automatic run_lww(input int n);
    bit ok; logic [DATA_W-1:0] d; int v;
    for (int i = 0; i < OPS; i++) begin
      v = $urandom_range(1, 65535);
      if ($urandom_range(0, 3) == 0) begin
        u_lww.client(n, 8'd1, v, ok, d); written.push_back(v); lww_upd++;
      end else u_lww.client(n, 8'd3, 0, ok, d);
    end
  endtask

  task automatic run_set(input int n);
    bit ok; logic [DATA_W-1:0] d; int e;
    for (int i = 0; i < OPS; i++) begin
      e = $urandom_range(0, ELEMS-1);
      case ($urandom_range(0, 7))
        0: begin u_set.client(n, 8'd1, e, ok, d); ins_any[e] = 1'b1; set_upd++; end
        1: begin u_set.client(n, 8'd2, e, ok, d); if (ok) begin rem_any[e] = 1'b1; set_upd++; end end
        default: u_set.client(n, 8'd3, e, ok, d);
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
    bit same, found;
    longint dsum;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (20) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      automatic int k = n;
      fork
        run_pn(k);
        run_lww(k);
        run_set(k);
      join_none
    end
    wait fork;
    repeat (4000) @(posedge clk);
    // PN-Counter
    for (int n = 0; n < N; n++) check(st_pn[n] == pn_ref, "PN-Counter converges to the reference");
    dsum = 0;
    for (int n = 0; n < N; n++) dsum += ds_pn[n];
    check(dsum == 7 * pn_upd, "PN-Counter: every update applied at all seven peers");
    check(pn_upd > 0, "PN-Counter updates happened");
    // LWW-Register
    same = 1'b1;
    for (int n = 1; n < N; n++) if (st_lww[n] != st_lww[0]) same = 1'b0;
    check(same, "LWW-Register: all replicas hold the same write");
    found = 1'b0;
    foreach (written[i]) if (written[i] == st_lww[0][31:16]) found = 1'b1;
    check(found, "LWW-Register: the value held was written by a client");
    dsum = 0;
    for (int n = 0; n < N; n++) dsum += ds_lww[n];
    check(dsum == 7 * lww_upd, "LWW-Register: every assign applied at all seven peers");
    check(app_sent == 7 * lww_upd && wire_tx == app_sent && wire_rx == wire_tx,
          "LWW-Register: every RPC sent by the kernels crossed the network");
    // 2P-Set
    for (int n = 0; n < N; n++)
      check(st_set[n] == $countones(ins_any & ~rem_any), "2P-Set converges to inserted minus removed");
    dsum = 0;
    for (int n = 0; n < N; n++) dsum += ds_set[n];
    check(dsum == 7 * set_upd, "2P-Set: every accepted update applied at all seven peers");
    $display("updates: pn %0d lww %0d set %0d", pn_upd, lww_upd, set_upd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
