// tb_qpc: tests the queue-pair context's permission store.
//
// After reset every peer may write (chk_ok = 1 for ids 0..7). A modify loads a new write-
// permission vector in one cycle and counts one switch; the check is combinational, so
// chk_ok follows chk_src in the same cycle. Random vectors and ids are compared with the
// vector last written; an id at or above N_NODES is always refused.
module tb_qpc;
  import safardb_pkg::*;
  localparam int N = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] chk_src = '0;
  logic chk_ok, mod_valid = 1'b0;
  logic [N-1:0] mod_perm = '0, perm, model;
  logic [15:0] switch_count;
  int nmods = 0;

  qpc #(.N_NODES(N)) dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    model = '1;
    for (int s = 0; s < N; s++) begin chk_src = NODE_W'(s); #1 check(chk_ok, "open after reset"); end
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      mod_valid = ($urandom_range(0, 3) == 0);
      mod_perm  = N'($urandom);
      chk_src   = NODE_W'($urandom_range(0, 7));
      #1;
      check(chk_ok == ((int'(chk_src) < N) ? model[chk_src] : 1'b0), "chk_ok matches vector");
      check(perm == model, "perm output");
      @(posedge clk);
      if (mod_valid) begin model = mod_perm; nmods++; end
      #1 check(int'(switch_count) == nmods, "switch count");
    end
    // leader switch sequence: close everything, then open one
    @(negedge clk); mod_valid = 1'b1; mod_perm = '0;
    @(negedge clk); mod_perm = N'(1) << 3;
    @(negedge clk); mod_valid = 1'b0;
    for (int s = 0; s < 8; s++) begin chk_src = NODE_W'(s); #1 check(chk_ok == (s == 3), "only the leader may write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
