// tb_set_crdt: tests the three set CRDTs (G-Set, PN-Set, 2P-Set) on one replica (id 0 of 4,
// replica 3 dead), over a 16-element universe so that elements repeat often.
//
// One instance of each kind runs the same random sequence of local inserts, removes and
// lookups and of remote inserts and removes from the dispatcher; each has a reference
// model in the testbench (a bit set; a counter per element; an added and a removed set).
// Checked after every step: the presence vector and element count; the lookup answer; that
// a refused update (G-Set remove, 2P-Set remove of an absent element) answers rsp_ok = 0 and
// sends nothing; and that an accepted update is sent as one RPC to each of replicas 1 and 2.
// The 2P-Set must never show an element again once removed; the PN-Set counters may go
// negative and then need several inserts to bring an element back.
module tb_set_crdt;
  import safardb_pkg::*;
  localparam int N = 4, S = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = 3'd0;
  logic [N-1:0] live = 4'b0111;
  logic [2:0] req_valid = '0, req_ready, rsp_valid, rsp_ok;
  op_t req_op = '0;
  logic [DATA_W-1:0] rsp_data [3];
  logic [NUM_OPCODES-1:0] meth_valid = '0;
  logic [PARAM_W-1:0] meth_param = '0;
  logic [2:0] sq_valid, sq_ready = '0;
  sq_entry_t sq_data [3];
  logic [S-1:0] members [3];
  logic [31:0] size [3];

  for (genvar k = 0; k < 3; k++) begin : g_dut
    set_crdt #(.N_NODES(N), .KIND(k), .SET_SIZE(S)) dut (
      .clk, .rst_n, .node_id, .live,
      .req_valid(req_valid[k]), .req_ready(req_ready[k]), .req_op,
      .rsp_valid(rsp_valid[k]), .rsp_ok(rsp_ok[k]), .rsp_data(rsp_data[k]),
      .meth_valid, .meth_param,
      .sq_valid(sq_valid[k]), .sq_ready(sq_ready[k]), .sq_data(sq_data[k]),
      .members(members[k]), .size(size[k]));
  end

  sq_entry_t sent[3][$];
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 3; k++) if (sq_valid[k] && sq_ready[k]) sent[k].push_back(sq_data[k]);
    sq_ready <= 3'($urandom);
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // reference models
  bit [S-1:0] g_s, t_a, t_r;
  int         pn_c [S];
  function automatic bit present(input int k, input int e);
    case (k)
      0: return g_s[e];
      1: return pn_c[e] > 0;
      default: return t_a[e] && !t_r[e];
    endcase
  endfunction
  function automatic bit [S-1:0] ref_members(input int k);
    bit [S-1:0] m;
    for (int e = 0; e < S; e++) m[e] = present(k, e);
    return m;
  endfunction
  function automatic void apply(input int k, input bit ins, input int e);
    case (k)
      0: if (ins) g_s[e] = 1'b1;
      1: pn_c[e] += ins ? 1 : -1;
      default: if (ins) t_a[e] = 1'b1; else t_r[e] = 1'b1;
    endcase
  endfunction

  // one local request to instance k; checks its answer and what it sent
  task automatic client(input int k, input logic [OPC_W-1:0] o, input int e);
    bit exp_ok, exp_send, exp_look;
    bit [N-1:0] got;
    exp_look = present(k, e);
    exp_ok   = (o == 8'd1) || (o == 8'd3) || (o == 8'd2 && (k == 1 || (k == 2 && exp_look)));
    exp_send = exp_ok && o != 8'd3;
    #1 req_valid[k] = 1'b1; req_op = '{opcode: o, param: PARAM_W'(e)};
    @(posedge clk);
    while (!req_ready[k]) @(posedge clk);
    #1 req_valid[k] = 1'b0;
    do @(posedge clk); while (!rsp_valid[k]);
    check(rsp_ok[k] == exp_ok, "accept / refuse");
    if (o == 8'd3) check(rsp_data[k] == 64'(exp_look), "lookup answer");
    if (exp_send) apply(k, o == 8'd1, e);
    @(posedge clk);
    check(sent[k].size() == (exp_send ? 2 : 0), "RPC count");
    got = '0;
    foreach (sent[k][i]) begin
      check(sent[k][i].data[OP_W-1:0] == {o, PARAM_W'(e)}, "RPC payload");
      got[sent[k][i].dst[1:0]] = 1'b1;
    end
    if (exp_send) check(got == 4'b0110, "RPCs to replicas 1 and 2");
    sent[k].delete();
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int removed_seen = 0;
  initial begin
    int r, e, o;
    g_s = '0; t_a = '0; t_r = '0;
    for (int i = 0; i < S; i++) pn_c[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < 1500; i++) begin
      r = $urandom_range(0, 3);
      e = $urandom_range(0, S-1);
      o = $urandom_range(1, 3);
      if (r < 3) client(r, 8'(o), e);
      else if (o != 3) begin
        #1 meth_valid = NUM_OPCODES'(1) << o; meth_param = PARAM_W'(e);
        @(posedge clk);
        #1 meth_valid = '0;
        for (int k = 0; k < 3; k++) apply(k, o == 1, e);
      end
      @(posedge clk);
      for (int k = 0; k < 3; k++) begin
        check(members[k] == ref_members(k), "presence vector");
        check(size[k] == 32'($countones(ref_members(k))), "element count");
      end
      for (int x = 0; x < S; x++) if (t_r[x]) check(!members[2][x], "2P-Set: removed stays out");
    end
    for (int x = 0; x < S; x++) if (t_r[x]) removed_seen++;
    check(removed_seen > 0, "2P-Set removals happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
