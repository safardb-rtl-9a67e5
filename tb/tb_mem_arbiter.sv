// tb_mem_arbiter: tests the fixed-priority HBM arbiter with three masters.
//
// Each master issues random reads and writes to its own address range; an HBM model
// (4-cycle read latency, refusing one cycle in five) stores the words. The testbench
// checks that every read returns, to the master that issued it, the value that master last
// wrote there (values are tracked per address in the testbench), that a lower-numbered
// master is served whenever it asks, and that every request is eventually taken.
module tb_mem_arbiter;
  import safardb_pkg::*;
  localparam int NM = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic [NM-1:0] req_valid = '0, req_ready, req_we = '0, rsp_valid;
  logic [NM-1:0][ADDR_W-1:0] req_addr = '0;
  logic [NM-1:0][DATA_W-1:0] req_wdata = '0;
  logic [DATA_W-1:0] rsp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [DATA_W-1:0] mem_req_wdata, mem_rsp_rdata;

  mem_arbiter #(.NM(NM), .MAX_RD(4)) dut (.*);
  hbm_model #(.LAT(4), .STALL_EVERY(5)) u_hbm (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  logic [DATA_W-1:0] shadow [NM][16];
  logic [DATA_W-1:0] expq [NM][$];
  int reads_done [NM], ops [NM];
  bit running = 1'b1;

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
    for (int m = 0; m < NM; m++) begin
      if (rsp_valid[m]) begin
        check(expq[m].size() > 0, "response only to a master with a read outstanding");
        if (expq[m].size() > 0) begin
          check(rsp_rdata == expq[m][0], "read data is the last value written");
          void'(expq[m].pop_front());
          reads_done[m]++;
        end
      end
      // priority: a lower master asking blocks every higher one
      for (int h = m + 1; h < NM; h++)
        if (req_valid[m]) check(!req_ready[h], "lower index has priority");
      if (req_valid[m] && req_ready[m]) begin
        int a;
        a = int'(req_addr[m][3:0]);
        if (req_we[m]) shadow[m][a] = req_wdata[m];
        else expq[m].push_back(shadow[m][a]);
        ops[m]++;
      end
    end
    // new requests for idle or finished masters
    for (int m = 0; m < NM; m++)
      if (!req_valid[m] || req_ready[m]) begin
        req_valid[m] <= running && ($urandom_range(0, 2) == 0);
        req_we[m]    <= ($urandom_range(0, 1) == 0);
        req_addr[m]  <= ADDR_W'((m << 8) | $urandom_range(0, 15));
        req_wdata[m] <= {$urandom, $urandom};
      end
  end

  initial begin
    for (int m = 0; m < NM; m++) begin
      reads_done[m] = 0; ops[m] = 0;
      for (int a = 0; a < 16; a++) shadow[m][a] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4000) @(posedge clk);
    running = 1'b0;
    // let the last requests and reads finish
    repeat (50) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      check(expq[m].size() == 0, "every read answered");
      check(reads_done[m] > 50 && ops[m] > 100, "every master served");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
