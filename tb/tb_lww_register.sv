// tb_lww_register: tests the LWW-Register CRDT on one replica (id 2 of 4, all live).
//
// The testbench keeps its own register, timestamp and Lamport clock. Random steps mix
// local assigns, queries and received writes whose timestamps are drawn around the current
// clock, so that some are older than the held write and must be ignored and some are newer
// and must win. Checked after every step: value and timestamp held, the query answer, the
// timestamp a local assign takes ({highest clock seen + 1, own id}) and the RPC it sends to
// each of replicas 0, 1 and 3. Finally a received write with a higher clock lands in the same
// cycle as a local assign: the received one must win.
module tb_lww_register;
  import safardb_pkg::*;
  localparam int N = 4;
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
  logic [15:0] reg_value, reg_ts;

  lww_register #(.N_NODES(N)) dut (.*);

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

  task automatic meth(input int v, input int ts);
    #1 meth_valid = 4'b0010; meth_param = {16'(v), 16'(ts)};
    @(posedge clk);
    #1 meth_valid = '0;
  endtask

  int ref_r = 0, ref_t = 0, ref_c = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint d;
    int v, r, ts, c, id;
    bit [N-1:0] got;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < 600; i++) begin
      r = $urandom_range(0, 2);
      v = $urandom_range(0, 65535);
      case (r)
        0: begin
          client(8'd1, v, d);
          ts = ((ref_c + 1) << 3) | 2;
          ref_c = ref_c + 1; ref_r = v; ref_t = ts;
          check(sent.size() == 3, "one RPC per peer");
          got = '0;
          foreach (sent[k]) begin
            check(sent[k].data[OP_W-1:0] == {8'd1, 16'(v), 16'(ts)}, "RPC {value, timestamp}");
            got[sent[k].dst[1:0]] = 1'b1;
          end
          check(got == 4'b1011, "RPCs to replicas 0, 1, 3");
          sent.delete();
        end
        1: begin client(8'd3, 0, d); check(d == ref_r, "query returns the register"); end
        default: begin
          c = ref_c + $urandom_range(0, 6) - 3;
          if (c < 0) c = 0;
          id = $urandom_range(0, 3);
          if (id == 2) id = 3;
          ts = (c << 3) | id;
          meth(v, ts);
          if (ts > ref_t) begin ref_r = v; ref_t = ts; end
          if (c > ref_c) ref_c = c;
        end
      endcase
      @(posedge clk);
      check(reg_value == 16'(ref_r) && reg_ts == 16'(ref_t), "register and timestamp");
    end
    // same cycle: local assign and a newer received write; the received write wins
    c = ref_c + 5;
    #1 req_valid = 1'b1; req_op = '{opcode: 8'd1, param: 32'd111};
    meth_valid = 4'b0010; meth_param = {16'd222, 16'((c << 3) | 1)};
    @(posedge clk);
    #1 req_valid = 1'b0; meth_valid = '0;
    do @(posedge clk); while (!rsp_valid);
    @(posedge clk);
    check(reg_value == 16'd222 && reg_ts == 16'((c << 3) | 1), "newer remote write wins a same-cycle race");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
