// tb_courseware_rdt: tests the Courseware WRDT on one replica (id 2 of 4, all live), over
// 8 students and 8 courses so that invariants fail often.
//
// The testbench keeps reference sets S, C and E. A random sequence mixes:
//   * local requests of every method: the answer must follow the invariant on the current
//     state. Refused requests send and propose nothing. addStudent must be applied at once
//     and sent by RPC to replicas 0, 1 and 3. Accepted conflicting methods must be proposed
//     to the SMR unchanged, and must change nothing locally until committed.
//   * committed operations and remote addStudents from the dispatcher: applied as decided.
//   * leader executions: exec_ok must equal the invariant. A checked operation is applied
//     only if it holds; an adopted one is applied as decided.
// After every step the testbench compares the sets, the query answer and the count of
// enrolments in existing courses.
module tb_courseware_rdt;
  import safardb_pkg::*;
  localparam int N = 4, NS = 8, NC = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] node_id = 3'd2;
  logic [N-1:0] live = '1;
  logic req_valid = 1'b0, req_ready, rsp_valid, rsp_ok;
  op_t req_op = '0;
  logic [DATA_W-1:0] rsp_data;
  logic [NUM_OPCODES-1:0] meth_valid = '0;
  logic [PARAM_W-1:0] meth_param = '0;
  logic sq_valid, sq_ready = 1'b0;
  sq_entry_t sq_data;
  logic prop_valid, prop_ready = 1'b0;
  op_t prop_op;
  logic exec_valid = 1'b0, exec_check = 1'b0, exec_ok;
  op_t exec_op = '0;
  logic [NS-1:0] students;
  logic [NC-1:0] courses;
  logic [15:0] n_enrolled;

  courseware_rdt #(.N_NODES(N), .N_STU(NS), .N_CRS(NC)) dut (.*);

  sq_entry_t sent[$];
  op_t props[$];
  always @(posedge clk) if (rst_n) begin
    if (sq_valid && sq_ready) sent.push_back(sq_data);
    if (prop_valid && prop_ready) props.push_back(prop_op);
    sq_ready   <= ($urandom_range(0, 2) != 0);
    prop_ready <= ($urandom_range(0, 1) == 1);
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  bit [NS-1:0] rs;
  bit [NC-1:0] rc;
  bit [NC-1:0] re [NS];

  function automatic bit holds(input int o, input int s, input int c);
    case (o)
      1: return !rs[s];
      2: return !rc[c];
      3: return rc[c];
      4: return rs[s] && rc[c] && !re[s][c];
      default: return 1'b1;
    endcase
  endfunction
  function automatic void apply(input int o, input int s, input int c);
    case (o)
      1: rs[s] = 1'b1;
      2: rc[c] = 1'b1;
      3: rc[c] = 1'b0;
      4: re[s][c] = 1'b1;
      default: ;
    endcase
  endfunction
  function automatic int enrolled();
    int n = 0;
    for (int s = 0; s < NS; s++) for (int c = 0; c < NC; c++) if (re[s][c] && rc[c]) n++;
    return n;
  endfunction

  task automatic client(input int o, input int s, input int c);
    bit exp_ok;
    bit [N-1:0] got;
    logic [DATA_W-1:0] exp_q;
    exp_ok = holds(o, s, c);
    exp_q = DATA_W'({re[s][c], rc[c], rs[s]});
    #1 req_valid = 1'b1; req_op = '{opcode: OPC_W'(o), param: {16'(s), 16'(c)}};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 1'b0;
    do @(posedge clk); while (!rsp_valid);
    check(rsp_ok == exp_ok, "invariant decides accept / refuse");
    if (o == 5) check(rsp_data == exp_q, "query answer");
    @(posedge clk);
    if (o == 1 && exp_ok) begin
      apply(1, s, 0);
      check(sent.size() == 3, "addStudent sent to three peers");
      got = '0;
      foreach (sent[i]) begin
        check(sent[i].data[OP_W-1:0] == {8'd1, 16'(s), 16'(c)}, "addStudent RPC payload");
        got[sent[i].dst[1:0]] = 1'b1;
      end
      check(got == 4'b1011, "RPCs to replicas 0, 1, 3");
    end else check(sent.size() == 0, "nothing sent");
    if (o >= 2 && o <= 4 && exp_ok)
      check(props.size() == 1 && props[0] == op_t'({8'(o), 16'(s), 16'(c)}), "proposed to the SMR");
    else check(props.size() == 0, "nothing proposed");
    sent.delete(); props.delete();
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int applied_exec = 0, refused_exec = 0;
  initial begin
    int r, o, s, c;
    bit ok, chk;
    rs = '0; rc = '0;
    for (int i = 0; i < NS; i++) re[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      r = $urandom_range(0, 2);
      o = $urandom_range(1, 5);
      s = $urandom_range(0, NS-1);
      c = $urandom_range(0, NC-1);
      if (r == 0) client(o, s, c);
      else if (r == 1 && o <= 4) begin
        #1 meth_valid = NUM_OPCODES'(1) << o; meth_param = {16'(s), 16'(c)};
        @(posedge clk);
        #1 meth_valid = '0;
        apply(o, s, c);
      end else if (o >= 2 && o <= 4) begin
        chk = ($urandom_range(0, 3) != 0);
        #1 exec_valid = 1'b1; exec_op = '{opcode: OPC_W'(o), param: {16'(s), 16'(c)}};
        exec_check = chk;
        #1 ok = exec_ok;
        check(ok == holds(o, s, c), "exec_ok is the invariant");
        @(posedge clk);
        #1 exec_valid = 1'b0;
        if (!chk || holds(o, s, c)) begin apply(o, s, c); applied_exec++; end
        else refused_exec++;
      end
      @(posedge clk);
      check(students == rs && courses == rc, "student and course sets");
      check(n_enrolled == 16'(enrolled()), "enrolments in existing courses");
      for (int x = 0; x < NS; x++) check(dut.e_set[x] == re[x], "enrolment matrix");
    end
    check(applied_exec > 0 && refused_exec > 0, "leader both applied and refused operations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
