// tb_account_rdt: tests the Bank Account replicated data type on one replica (id 1 of 4).
//
// A reference balance is kept in the testbench. Directed steps check: query returns the
// balance; a local deposit is applied at once and sent as one RPC {deposit, amount} to
// each other live replica (only live ones), through a send queue that stalls at random;
// a withdraw larger than the balance is refused locally (rsp_ok = 0, nothing proposed);
// an affordable withdraw is handed to the SMR unchanged and changes nothing until it is
// committed; committed withdraws and remote deposits from the dispatcher are applied; the
// leader-execution port reports whether the invariant holds (exec_ok) and applies a
// checked withdraw only then; updates arriving together in one cycle are all applied.
// A random phase then mixes remote deposits, committed withdraws and executions.
module tb_account_rdt;
  import safardb_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = 3'd1;
  logic [N-1:0] live = '1;
  logic req_valid = 1'b0, req_ready, rsp_valid, rsp_ok;
  op_t req_op = '0;
  logic [DATA_W-1:0] rsp_data;
  logic [NUM_OPCODES-1:0] meth_valid = '0;
  logic [PARAM_W-1:0] meth_param = '0;
  logic sq_valid, sq_ready = 1'b0;
  sq_entry_t sq_data;
  logic prop_valid, prop_ready = 1'b1;
  op_t prop_op;
  logic exec_valid = 1'b0, exec_check = 1'b0, exec_ok;
  op_t exec_op = '0;
  logic signed [DATA_W-1:0] balance;

  account_rdt #(.N_NODES(N)) dut (.*);

  sq_entry_t sent[$];
  op_t props[$];
  always @(posedge clk) if (rst_n) begin
    if (sq_valid && sq_ready) sent.push_back(sq_data);
    if (prop_valid && prop_ready) props.push_back(prop_op);
    sq_ready <= ($urandom_range(0, 1) == 1);
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic client(input logic [OPC_W-1:0] o, input int v, output bit ok,
                        output longint b);
    #1;
    req_valid = 1'b1; req_op = '{opcode: o, param: PARAM_W'(v)};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 1'b0;
    do @(posedge clk); while (!rsp_valid);
    ok = rsp_ok; b = longint'(rsp_data);
    @(posedge clk);
  endtask

  task automatic meth(input logic [OPC_W-1:0] o, input int v);
    #1 meth_valid = NUM_OPCODES'(1) << o; meth_param = PARAM_W'(v);
    @(posedge clk);
    #1 meth_valid = '0;
  endtask

  task automatic exec(input logic [OPC_W-1:0] o, input int v, input bit chk, output bit ok);
    #1 exec_valid = 1'b1; exec_op = '{opcode: o, param: PARAM_W'(v)}; exec_check = chk;
    #1 ok = exec_ok;
    @(posedge clk);
    #1 exec_valid = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    longint b, model;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    client(OP_QUERY, 0, ok, b);
    check(ok && b == 0, "query of the empty account");
    client(OP_DEPOSIT, 100, ok, b);
    check(ok && balance == 100, "local deposit applied");
    check(sent.size() == 3 && sent[0].dst == 0 && sent[1].dst == 2 && sent[2].dst == 3,
          "one RPC to each other replica");
    foreach (sent[i])
      check(sent[i].verb == V_RPC && sent[i].data == {RPC_FLAG_NONE, OP_DEPOSIT, 32'd100},
            "RPC carries the deposit");
    meth(OP_DEPOSIT, 50);
    check(balance == 150, "remote deposit applied");
    client(OP_WITHDRAW, 200, ok, b);
    check(!ok && props.size() == 0 && balance == 150, "overdraw refused locally");
    client(OP_WITHDRAW, 100, ok, b);
    check(ok && props.size() == 1 && props[0] == op_t'({OP_WITHDRAW, 32'd100}),
          "withdraw handed to the SMR");
    check(balance == 150, "not applied before commit");
    meth(OP_WITHDRAW, 100);
    check(balance == 50, "committed withdraw applied");
    exec(OP_WITHDRAW, 30, 1'b1, ok);
    check(ok && balance == 20, "leader executes an affordable withdraw");
    exec(OP_WITHDRAW, 30, 1'b1, ok);
    check(!ok && balance == 20, "leader refuses an overdraw");
    exec(OP_DEPOSIT, 5, 1'b0, ok);
    check(balance == 25, "adopted deposit applied");
    // three updates in one cycle
    #1;
    meth_valid = 4'b0010; meth_param = 32'd1000;
    exec_valid = 1'b1; exec_op = '{OP_WITHDRAW, 32'd7}; exec_check = 1'b1;
    req_valid = 1'b1; req_op = '{OP_DEPOSIT, 32'd3};
    @(posedge clk);
    #1 meth_valid = '0; exec_valid = 1'b0; req_valid = 1'b0;
    check(balance == 25 + 1000 - 7 + 3, "simultaneous updates all applied");
    do @(posedge clk); while (!rsp_valid);
    @(posedge clk);
    // live set without replica 2
    live = 4'b1011;
    sent.delete();
    client(OP_DEPOSIT, 1, ok, b);
    check(sent.size() == 2 && sent[0].dst == 0 && sent[1].dst == 3, "only live replicas");
    // random
    model = longint'(balance);
    for (int i = 0; i < 500; i++) begin
      int v;
      v = $urandom_range(1, 400);
      case ($urandom_range(0, 2))
        0: begin meth(OP_DEPOSIT, v); model += v; end
        1: begin meth(OP_WITHDRAW, v); model -= v; end
        default: begin
          exec(OP_WITHDRAW, v, 1'b1, ok);
          check(ok == (model >= v), "exec_ok is the invariant");
          if (ok) model -= v;
        end
      endcase
      check(longint'(balance) == model, "balance follows the reference");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
