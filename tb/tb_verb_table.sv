// tb_verb_table: tests the tag-indexed table used as Receive Queue and ACK queue.
//
// A reference array mirrors the table. Each cycle the testbench may post an entry under a
// random tag and retire a random tag; a retire must return the entry last posted under
// that tag and hit only if it is still outstanding. 'pending' must equal the number of
// outstanding tags and 'lost' the number of posts that overwrote an outstanding tag.
// Tags are drawn from 16 values so that overwrites happen.
module tb_verb_table;
  import safardb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic ins_valid = 1'b0, del_valid = 1'b0, del_hit;
  logic [NTAG_W-1:0] ins_tag = '0, del_tag = '0;
  vt_entry_t ins_entry = '0, del_entry;
  logic [15:0] pending, lost;

  vt_entry_t ref_ent [1 << NTAG_W];
  bit ref_vld [1 << NTAG_W];
  int ref_pend = 0, ref_lost = 0, hits = 0;

  verb_table dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << NTAG_W); i++) begin ref_vld[i] = 0; ref_ent[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      ins_valid = ($urandom_range(0, 1) == 1);
      ins_tag   = NTAG_W'($urandom_range(0, 15));
      ins_entry = '{rtag: RTAG_W'($urandom), laddr: ADDR_W'($urandom)};
      del_valid = ($urandom_range(0, 1) == 1);
      del_tag   = NTAG_W'($urandom_range(0, 15));
      #1;
      check(del_hit == ref_vld[del_tag], "hit iff outstanding");
      if (ref_vld[del_tag]) check(del_entry == ref_ent[del_tag], "retired entry is the posted one");
      check(int'(pending) == ref_pend, "pending count");
      check(int'(lost) == ref_lost, "lost count");
      @(posedge clk);
      if (del_valid && ref_vld[del_tag]) hits++;
      if (del_valid && ref_vld[del_tag] && !(ins_valid && ins_tag == del_tag)) ref_pend--;
      if (ins_valid && ref_vld[ins_tag] && !(del_valid && del_tag == ins_tag)) ref_lost++;
      if (ins_valid && !ref_vld[ins_tag]) ref_pend++;
      if (del_valid) ref_vld[del_tag] = 0;
      if (ins_valid) begin ref_vld[ins_tag] = 1; ref_ent[ins_tag] = ins_entry; end
    end
    check(hits > 500 && ref_lost > 0, "retires and overwrites exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
