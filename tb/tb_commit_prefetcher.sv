// tb_commit_prefetcher: self-checking test of the commit-trained stride
// prefetcher. A stream of committed lines with stride +2 must produce a
// prefetch of the next line in the stream from its third access on; a
// stride change resets confidence; a stream reaching the page end stops;
// independent pages are tracked apart; simultaneous notifications are served
// one per cycle with the rest dropped; and no prefetch appears without
// notifications.
module tb_commit_prefetcher;
  import muontrap_pkg::*;
  localparam int NS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [NS-1:0] ntf_valid;
  paddr_t ntf_paddr [NS];
  logic pf_valid, evt_drop;
  paddr_t pf_paddr;
  commit_prefetcher #(.NSRC(NS), .STREAMS(4)) dut (.*);
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
  int n_pf = 0, n_drop = 0;
  paddr_t last_pf;
  always @(posedge clk) if (rst_n) begin
    if (pf_valid) begin n_pf++; last_pf = pf_paddr; end
    if (evt_drop) n_drop++;
  end
  function automatic paddr_t ln(input int page, input int line);
    return paddr_t'(page) << 12 | paddr_t'(line) << 6;
  endfunction
  // one notification, then wait past the two-cycle latency
  task automatic note(input int src, input paddr_t a, input bit exp_pf, input paddr_t exp = '0);
    int p0;
    p0 = n_pf;
    @(negedge clk); ntf_valid[src] = 1; ntf_paddr[src] = a;
    @(negedge clk); ntf_valid = '0;
    @(negedge clk); @(negedge clk);
    check((n_pf == p0 + 1) == exp_pf, $sformatf("prefetch expected=%0d for %h", exp_pf, a));
    if (exp_pf) check(last_pf == exp, $sformatf("prefetch address %h", last_pf));
  endtask
  initial begin
    int d0, p0;
    ntf_valid = '0;
    for (int i = 0; i < NS; i++) ntf_paddr[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    check(n_pf == 0, "no prefetch without notifications");
    note(0, ln(7, 10), 0);
    note(1, ln(7, 12), 0);          // stride learned
    // (third access below confirms the stride)
    note(2, ln(7, 14), 1, ln(7, 16)); // confirmed: prefetch next
    note(0, ln(7, 16), 1, ln(7, 18));
    note(0, ln(9, 3), 0);           // other page, own stream
    note(3, ln(7, 18), 1, ln(7, 20));
    note(0, ln(7, 21), 0);          // stride changes to +3
    note(0, ln(7, 24), 1, ln(7, 27));
    note(0, ln(7, 27), 1, ln(7, 30));
    note(0, ln(9, 2), 0);           // page 9 stride -1
    note(0, ln(9, 1), 1, ln(9, 0));
    note(0, ln(9, 0), 0);           // next would leave the page
    note(0, ln(7, 62), 0);          // stride 35, new
    // two notifications in one cycle: one served, one dropped
    d0 = n_drop; p0 = n_pf;
    @(negedge clk); ntf_valid = 4'b0011; ntf_paddr[0] = ln(20, 1); ntf_paddr[1] = ln(21, 1);
    @(negedge clk); ntf_valid = '0;
    repeat (3) @(negedge clk);
    check(n_drop == d0 + 1, "simultaneous notification dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
