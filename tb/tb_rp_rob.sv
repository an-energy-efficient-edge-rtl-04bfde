// tb_rp_rob: a scripted sequence of insert / schedule / reschedule / retire.
// With 4 entries of 2 slots and 2 recent tags: three packets of one tag spill
// over two entries, a fourth tag is refused when no entry is free, tag switching
// prefers recently inserted tags (fewest packets, then lowest entry), a
// rescheduled packet comes back before any other tag, a retired entry is freed,
// and with no recent-tag hit the lowest non-empty entry is taken.
module tb_rp_rob;
  import edr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins_valid, ins_ready, sch_valid, sch_ready, rsc_valid, ret_valid, ev_switch, ev_multi;
  logic [PTR_W-1:0] ins_ptr, sch_ptr, rsc_ptr;
  logic [CVTAG_W-1:0] ins_tag, sch_tag;
  logic [1:0] sch_entry, rsc_entry, ret_entry;
  int checks = 0, failures = 0;

  rp_rob #(.NE(4), .DEPTH(2), .NRT(2)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic ins(int p, int t, bit expect_ok);
    @(negedge clk);
    ins_ptr = PTR_W'(p); ins_tag = CVTAG_W'(t); ins_valid = 1; #1;
    chk(ins_ready == expect_ok, $sformatf("insert %0d ready %b", p, ins_ready));
    @(negedge clk); ins_valid = 0;
  endtask

  task automatic sch(int p, int t, int e);
    @(negedge clk); #1;
    chk(sch_valid && sch_ptr == PTR_W'(p) && sch_tag == CVTAG_W'(t) && sch_entry == 2'(e),
        $sformatf("schedule got p%0d t%0d e%0d, exp p%0d t%0d e%0d", sch_ptr, sch_tag, sch_entry, p, t, e));
    sch_ready = 1;
    @(negedge clk); sch_ready = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int multi;
    ins_valid = 0; sch_ready = 0; rsc_valid = 0; ret_valid = 0;
    ins_ptr = 0; ins_tag = 0; rsc_ptr = 0; rsc_entry = 0; ret_entry = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); #1;
    chk(!sch_valid, "nothing to schedule");
    ins(1, 5, 1); ins(2, 5, 1); ins(3, 5, 1);
    #1; chk(ev_multi, "tag 5 spans two entries");
    ins(4, 9, 1); ins(5, 3, 1); ins(6, 7, 0);
    sch(4, 9, 2);                        // recent {3,9}: fewest packets, lowest entry
    @(negedge clk); rsc_valid = 1; rsc_ptr = 4; rsc_entry = 2;
    @(negedge clk); rsc_valid = 0;
    sch(4, 9, 2);                        // current tag first
    @(negedge clk); ret_valid = 1; ret_entry = 2;
    @(negedge clk); ret_valid = 0;
    sch(5, 3, 3);
    @(negedge clk); ret_valid = 1; ret_entry = 3;
    @(negedge clk); ret_valid = 0;
    ins(6, 7, 1);                        // freed entry 2 takes tag 7
    sch(6, 7, 2);                        // 7 is the newest recent tag
    @(negedge clk); ret_valid = 1; ret_entry = 2;
    @(negedge clk); ret_valid = 0;
    sch(1, 5, 0);                        // no recent hit with packets: lowest entry
    sch(2, 5, 0);
    sch(3, 5, 1);
    @(negedge clk); #1;
    chk(!sch_valid, "all scheduled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
