// tb_pn_counter: tests the PN-Counter CRDT on one replica (id 1 of 4, replica 2 dead).
//
// A reference counter is kept in the testbench. A random sequence mixes local increments
// and decrements, queries, and remote increments and decrements from the dispatcher, with
// the send queue stalling at random. After every step the counter value must equal the
// reference, a query must return it, and every local update must have been sent as exactly
// one RPC {opcode, amount} to each live peer (0 and 3) and to no one else. Then a local
// update and a remote update are made to land in the same cycle; both must count.
module tb_pn_counter;
  import safardb_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = 3'd1;
  logic [N-1:0] live = 4'b1011;
  logic req_valid = 1'b0, req_ready, rsp_valid, rsp_ok;
  op_t req_op = '0;
  logic [DATA_W-1:0] rsp_data, value;
  logic [NUM_OPCODES-1:0] meth_valid = '0;
  logic [PARAM_W-1:0] meth_param = '0;
  logic sq_valid, sq_ready = 1'b0;
  sq_entry_t sq_data;

  pn_counter #(.N_NODES(N)) dut (.*);

  sq_entry_t sent[$];
  always @(posedge clk) if (rst_n) begin
    if (sq_valid && sq_ready) sent.push_back(sq_data);
    sq_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic client(input logic [OPC_W-1:0] o, input int v, output longint d);
    #1;
    req_valid = 1'b1; req_op = '{opcode: o, param: PARAM_W'(v)};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 1'b0;
    do @(posedge clk); while (!rsp_valid);
    d = longint'(rsp_data);
    check(rsp_ok, "response ok");
    @(posedge clk);
  endtask

  task automatic meth(input logic [OPC_W-1:0] o, input int v);
    #1 meth_valid = NUM_OPCODES'(1) << o; meth_param = PARAM_W'(v);
    @(posedge clk);
    #1 meth_valid = '0;
  endtask

  task automatic check_sent(input logic [OPC_W-1:0] o, input int v);
    bit [N-1:0] got = '0;
    check(sent.size() == 2, "one RPC per live peer");
    foreach (sent[i]) begin
      check(sent[i].verb == V_RPC && sent[i].data[OP_W-1:0] == {o, PARAM_W'(v)},
            "RPC carries the update");
      got[sent[i].dst[1:0]] = 1'b1;
    end
    check(got == 4'b1001, "RPCs go to replicas 0 and 3");
    sent.delete();
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_v = 0, d;
    int v, r;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < 600; i++) begin
      r = $urandom_range(0, 4);
      v = $urandom_range(0, 100000);
      case (r)
        0: begin client(8'd1, v, d); ref_v += v; check_sent(8'd1, v); end
        1: begin client(8'd2, v, d); ref_v -= v; check_sent(8'd2, v); end
        2: begin client(8'd3, 0, d); check(d == ref_v, "query returns P - N");
                 check(sent.size() == 0, "query sends nothing"); end
        3: begin meth(8'd1, v); ref_v += v; end
        default: begin meth(8'd2, v); ref_v -= v; end
      endcase
      @(posedge clk);
      check(longint'(value) == ref_v, "counter value");
    end
    // local increment and remote decrement in the same cycle
    #1 req_valid = 1'b1; req_op = '{opcode: 8'd1, param: 32'd77};
    meth_valid = 4'b0100; meth_param = 32'd5;
    @(posedge clk);
    #1 req_valid = 1'b0; meth_valid = '0;
    do @(posedge clk); while (!rsp_valid);
    ref_v += 77 - 5;
    @(posedge clk);
    check(longint'(value) == ref_v, "same-cycle local and remote updates both applied");
    check_sent(8'd1, 77);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
