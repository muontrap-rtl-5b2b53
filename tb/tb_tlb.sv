// tb_tlb: self-checking test of the non-speculative TLB at its full
// 64-entry size: insertion and lookup, ASID separation, update of an
// existing page, round-robin replacement when full, and flush_all.
module tb_tlb;
  import muontrap_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush_all, lk_hit, ins_valid;
  asid_t asid;
  vpn_t lk_vpn;
  xlate_t lk_x, ins_x;
  tlb dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic xlate_t mk(input int v, input int salt);
    return '{vpn: vpn_t'(v), ppn: ppn_t'(v * 13 + salt), perm: 3'b101};
  endfunction
  task automatic ins(input int v, input int salt);
    @(negedge clk); ins_valid = 1; ins_x = mk(v, salt);
    @(negedge clk); ins_valid = 0;
  endtask
  task automatic lookup(input int v, input bit exp, input int salt = 0);
    @(negedge clk); lk_vpn = vpn_t'(v); #1;
    check(lk_hit == exp, $sformatf("lookup %0d asid %0d expect %0d", v, asid, exp));
    if (exp) check(lk_x == mk(v, salt), "translation");
  endtask
  initial begin
    flush_all = 0; ins_valid = 0; ins_x = '0; lk_vpn = '0; asid = 16'd1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) ins(100 + i, 0);
    for (int i = 0; i < 64; i += 9) lookup(100 + i, 1);
    asid = 16'd2;
    lookup(100, 0);
    asid = 16'd1;
    ins(110, 5);            // update in place, no eviction
    lookup(110, 1, 5); lookup(100, 1);
    ins(200, 0);            // full: evicts entry 0 (page 100)
    lookup(200, 1); lookup(100, 0); lookup(101, 1);
    @(negedge clk); flush_all = 1; @(negedge clk); flush_all = 0;
    lookup(101, 0); lookup(200, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
