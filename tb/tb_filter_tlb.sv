// tb_filter_tlb: self-checking test of the filter TLB. Checks speculative
// fills and lookups, replacement of a same-page entry, round-robin eviction
// once full, the move to the main TLB and the re-walk request at commit
// (present and evicted cases), and the one-cycle flush.
module tb_filter_tlb;
  import muontrap_pkg::*;
  localparam int E = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush, lk_hit, fill_valid, cm_valid, mv_valid, rw_valid;
  vpn_t lk_vpn, cm_vpn, rw_vpn;
  xlate_t lk_x, fill_x, mv_x;
  filter_tlb #(.ENTRIES(E)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask
  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic xlate_t mk(input int v);
    return '{vpn: vpn_t'(v), ppn: ppn_t'(v * 7 + 3), perm: 3'b011};
  endfunction
  task automatic do_fill(input int v);
    @(negedge clk); fill_valid = 1; fill_x = mk(v);
    @(negedge clk); fill_valid = 0;
  endtask
  task automatic lookup(input int v, input bit exp);
    @(negedge clk); lk_vpn = vpn_t'(v); #1;
    check(lk_hit == exp, $sformatf("lookup %0d hit=%0d", v, exp));
    if (exp) check(lk_x == mk(v), "lookup translation");
  endtask
  int n_mv = 0, n_rw = 0;
  xlate_t last_mv; vpn_t last_rw;
  always @(posedge clk) begin
    if (mv_valid) begin n_mv++; last_mv = mv_x; end
    if (rw_valid) begin n_rw++; last_rw = rw_vpn; end
  end
  task automatic commit(input int v);
    @(negedge clk); cm_valid = 1; cm_vpn = vpn_t'(v);
    @(negedge clk); cm_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    int m0, r0;
    flush = 0; fill_valid = 0; cm_valid = 0; lk_vpn = '0; cm_vpn = '0; fill_x = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    lookup(5, 0);
    do_fill(5); lookup(5, 1);
    do_fill(6); do_fill(7); do_fill(8);
    lookup(6, 1); lookup(8, 1);
    do_fill(5); // same page: no new entry
    lookup(7, 1);
    do_fill(9); // full: evicts the round-robin victim (entry 0, page 5)
    lookup(5, 0); lookup(9, 1); lookup(6, 1);
    // commit with entry present: moved out and re-walked
    m0 = n_mv; r0 = n_rw;
    commit(6);
    check(n_mv == m0 + 1 && last_mv == mk(6), "commit moves translation to TLB");
    check(n_rw == r0 + 1 && last_rw == vpn_t'(6), "commit requests re-walk");
    lookup(6, 0);
    // commit with entry gone: re-walk only
    m0 = n_mv; r0 = n_rw;
    commit(5);
    check(n_mv == m0 && n_rw == r0 + 1 && last_rw == vpn_t'(5), "evicted translation: re-walk only");
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    lookup(7, 0); lookup(8, 0); lookup(9, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
