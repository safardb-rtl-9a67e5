// tb_dispatcher: tests the RPC dispatcher.
//
// Random RPCs and RPC Write-Throughs enter the dispatcher's buffer. A model in the
// testbench keeps the expected log address (it advances on each accepted Write-Through,
// as the SMR's slot counter does) and predicts, for each buffered operation in order:
//   forwarded proposal (RPC with the FWD flag) -> fwd port; dropped and counted in
//                                                 fwd_drops if fwd_ready is low;
//   Write-Through for another log address      -> skipped, 'duplicates' counts it;
//   anything else                              -> exactly one method strobe for its opcode,
//                                                 with its parameter (none for NOP), and
//                                                 seen_commit for a Write-Through.
module tb_dispatcher;
  import safardb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic rpc_valid = 1'b0, rpc_ready, fwd_valid, fwd_ready = 1'b0, meth_committed, seen_commit;
  rpc_t rpc_data = '0;
  logic [ADDR_W-1:0] next_log_addr = LOG_BASE;
  logic [NUM_OPCODES-1:0] meth_valid;
  logic [PARAM_W-1:0] meth_param;
  op_t fwd_op;
  logic [15:0] duplicates, fwd_drops;
  logic [31:0] dispatched;

  dispatcher dut (.*);

  rpc_t exp_q[$];
  int n_meth = 0, n_fwd = 0, n_drop = 0, n_dup = 0, n_wt = 0, n_out = 0;

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

  always @(posedge clk) if (rst_n) begin
    check(int'(fwd_drops) == n_drop && int'(duplicates) == n_dup && int'(dispatched) == n_out, "counters");
    if (exp_q.size() > 0) begin
      rpc_t r;
      op_t o;
      bit fwd, dup;
      r = exp_q[0];
      o = op_t'(r.data[OP_W-1:0]);
      fwd = (r.verb == V_RPC) && (r.data[DATA_W-1:OP_W] == RPC_FLAG_FWD);
      dup = (r.verb == V_RPC_WT) && (r.addr != next_log_addr);
      check(fwd_valid == fwd, "forwarded proposal goes to the fwd port");
      if (fwd) check(fwd_op == o && meth_valid == '0, "fwd op");
      if (!fwd && !dup && o.opcode != OP_NOP)
        check(meth_valid == (NUM_OPCODES'(1) << o.opcode) && meth_param == o.param,
              "one method strobe with the parameter");
      else check(meth_valid == '0, "no method strobe");
      check(seen_commit == (r.verb == V_RPC_WT && !dup), "seen_commit on a new entry");
      begin
        void'(exp_q.pop_front());
        n_out++;
        if (fwd && fwd_ready) n_fwd++;
        if (fwd && !fwd_ready) n_drop++;
        if (dup) n_dup++;
        if (!fwd && !dup && o.opcode != OP_NOP) n_meth++;
        if (r.verb == V_RPC_WT && !dup) begin
          next_log_addr <= next_log_addr + 1'b1;
          n_wt++;
        end
      end
    end else begin
      check(meth_valid == '0 && !fwd_valid && !seen_commit, "idle when empty");
    end
    if (rpc_valid && rpc_ready) exp_q.push_back(rpc_data);
    if (!rpc_valid || rpc_ready) begin
      rpc_t r;
      r.verb = ($urandom_range(0, 1) == 1) ? V_RPC_WT : V_RPC;
      r.src  = NODE_W'($urandom);
      r.addr = next_log_addr + ADDR_W'(($urandom_range(0, 3) == 0) ? -1 : 0);
      r.data = {($urandom_range(0, 2) == 0) ? RPC_FLAG_FWD : RPC_FLAG_NONE,
                8'($urandom_range(0, 3)), 32'($urandom)};
      if (r.verb == V_RPC_WT) r.data[DATA_W-1:OP_W] = RPC_FLAG_NONE;
      rpc_valid <= ($urandom_range(0, 1) == 1);
      rpc_data  <= r;
    end
    fwd_ready <= ($urandom_range(0, 2) == 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5000) @(posedge clk);
    check(n_meth > 300 && n_fwd > 30 && n_drop > 30 && n_dup > 50 && n_wt > 300, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
