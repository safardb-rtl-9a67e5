// tb_safardb_courseware: the Courseware WRDT end to end on four replicas (heartbeat period
// 256): conflict-free addStudent by RPC, and addCourse, deleteCourse and enroll ordered by
// the Mu rounds of the leader, replica 0.
// Script and expected outcome, worked out by hand:
//   * students 1..4 added, one at each replica;
//   * course 1 added at follower 2 (forwarded to the leader); course 2 added at the leader;
//   * a second addCourse(1) at replica 3 is refused locally;
//   * enrol(1,1) at 3, enrol(2,1) at 1, enrol(1,2) at 0, all at the same time;
//   * deleteCourse(2) at 1 and enrol(3,2) at 2 at the same time. Both pass their local
//     checks, and the leader orders them. If the delete comes first, the enrol fails the
//     leader's re-check and is logged as a no-op. Either way course 2 is gone in the end.
//   * expected on every replica: 4 students, 1 course, 2 enrolments in existing courses,
//     7 log slots used, and the same student and course sets.
module tb_safardb_courseware;
  import safardb_pkg::*;
  localparam int N = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] st [N];
  logic [31:0] vb [N], ds [N];

  crdt_cluster #(.N(N), .APP(6)) u_cw (.clk, .rst_n, .state(st), .verbs(vb), .disp(ds));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int unsigned sc(input int s, input int c);
    return (s << 16) | c;
  endfunction

  task automatic req(input int n, input int o, input int s, input int c, input bit exp_ok,
                     input string what);
    bit ok; logic [DATA_W-1:0] d;
    u_cw.client(n, OPC_W'(o), sc(s, c), ok, d);
    check(ok == exp_ok, what);
  endtask

  task automatic settle(input int cycles);
    repeat (cycles) @(posedge clk);
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DATA_W-1:0] want;
    bit same;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    settle(3 * 256);
    check(u_cw.is_leader == 4'b0001, "replica 0 leads");
    for (int n = 0; n < N; n++) req(n, 1, n + 1, 0, 1'b1, "addStudent accepted");
    settle(200);
    req(2, 2, 0, 1, 1'b1, "addCourse(1) at a follower accepted");
    req(0, 2, 0, 2, 1'b1, "addCourse(2) at the leader accepted");
    settle(600);
    req(3, 2, 0, 1, 1'b0, "second addCourse(1) refused locally");
    fork
      req(3, 4, 1, 1, 1'b1, "enrol(1,1)");
      req(1, 4, 2, 1, 1'b1, "enrol(2,1)");
      req(0, 4, 1, 2, 1'b1, "enrol(1,2)");
    join
    settle(800);
    fork
      req(1, 3, 0, 2, 1'b1, "deleteCourse(2)");
      req(2, 4, 3, 2, 1'b1, "enrol(3,2) passes its local check");
    join
    settle(1500);
    want = {16'd0, 16'd4, 16'd1, 16'd2};
    for (int n = 0; n < N; n++) check(st[n] == want, "4 students, 1 course, 2 enrolments");
    same = (u_cw.g_node[1].u_node.g_course.u_app.students == u_cw.g_node[0].u_node.g_course.u_app.students)
        && (u_cw.g_node[2].u_node.g_course.u_app.students == u_cw.g_node[0].u_node.g_course.u_app.students)
        && (u_cw.g_node[3].u_node.g_course.u_app.students == u_cw.g_node[0].u_node.g_course.u_app.students)
        && (u_cw.g_node[1].u_node.g_course.u_app.courses  == u_cw.g_node[0].u_node.g_course.u_app.courses)
        && (u_cw.g_node[2].u_node.g_course.u_app.courses  == u_cw.g_node[0].u_node.g_course.u_app.courses)
        && (u_cw.g_node[3].u_node.g_course.u_app.courses  == u_cw.g_node[0].u_node.g_course.u_app.courses);
    check(same, "identical sets on every replica");
    for (int n = 0; n < N; n++) check(u_cw.slot[n] == 7, "seven log slots used everywhere");
    check(u_cw.forwards[1] + u_cw.forwards[2] + u_cw.forwards[3] == 5, "five operations forwarded");
    $display("leader rejections: %0d", u_cw.rejections[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
