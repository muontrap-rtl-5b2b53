// tb_ifilter_cache: self-checking test of the filter cache configured for
// the instruction side (no coherence). Fetch misses fill the L0 only; a
// repeated fetch hits in one cycle; committing an instruction writes its
// line through to the L1 instruction cache once and notifies the L2
// prefetcher; no upgrade is ever requested, even for a fill marked SE; a
// flush empties the cache.
module tb_ifilter_cache;
  import muontrap_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush, req_valid, req_ready, resp_valid;
  fc_req_t req;
  fc_resp_t resp;
  logic mreq_valid, mreq_ready, mreq_spec;
  paddr_t mreq_paddr;
  logic [1:0] mreq_mshr, fill_mshr;
  logic fill_valid, fill_ready;
  fc_fill_t fill;
  logic wt_valid, wt_ready, upg_valid, upg_ready, snoop_valid, pf_valid;
  fc_wt_t wt;
  paddr_t upg_paddr, snoop_paddr, pf_paddr;
  level_e pf_level;
  filter_cache #(.COHERENT(1'b0)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic line_t insn_line(input paddr_t pa);
    line_t l;
    for (int w = 0; w < WORDS; w++) l[w*64 +: 64] = {pa[31:6], 6'(w), 32'hE320F000};
    return l;
  endfunction

  int n_resp = 0, n_wt = 0, n_upg = 0, n_pf = 0, n_mreq = 0;
  fc_resp_t last_resp; fc_wt_t last_wt; logic [1:0] last_mshr;
  int unsigned resp_cyc, acc_cyc;
  always @(posedge clk) if (rst_n) begin
    if (resp_valid) begin n_resp++; last_resp = resp; resp_cyc = cyc; end
    if (wt_valid && wt_ready) begin n_wt++; last_wt = wt; end
    if (upg_valid) n_upg++;
    if (pf_valid) n_pf++;
    if (mreq_valid && mreq_ready) begin n_mreq++; last_mshr = mreq_mshr; end
  end
  task automatic op(input fc_op_e o, input vaddr_t va, input paddr_t pa);
    @(negedge clk); req_valid = 1;
    req = '{op: o, spec: 1'b1, vaddr: va, paddr: pa, id: 6'd1, wdata: '0, wmask: '0};
    do @(posedge clk); while (!req_ready);
    acc_cyc = cyc;
    @(negedge clk); req_valid = 0;
  endtask
  task automatic fetch_miss(input vaddr_t va, input paddr_t pa, input fc_state_e g);
    int m0;
    m0 = n_mreq;
    op(FC_LOAD, va, pa);
    @(negedge clk);
    check(n_mreq == m0 + 1, "fetch miss requests line");
    @(negedge clk); fill_valid = 1; fill_mshr = last_mshr;
    fill = '{data: insn_line(pa), level: LVL_L2, grant: g, nack: 1'b0};
    do @(posedge clk); while (!fill_ready);
    @(negedge clk); fill_valid = 0;
    @(negedge clk);
    check(!last_resp.hit && last_resp.data == insn_line(pa)[int'(va[5:3])*64 +: 64], "fetch miss data");
  endtask
  task automatic fetch_hit(input vaddr_t va, input paddr_t pa);
    op(FC_LOAD, va, pa);
    @(negedge clk);
    check(last_resp.hit && resp_cyc == acc_cyc + 1, "fetch hit in one cycle");
    check(last_resp.data == insn_line(pa)[int'(va[5:3])*64 +: 64], "fetch hit data");
  endtask

  initial begin
    int w0;
    flush = 0; req_valid = 0; req = '0; mreq_ready = 1; fill_valid = 0; fill_mshr = '0; fill = '0;
    wt_ready = 1; upg_ready = 1; snoop_valid = 0; snoop_paddr = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    fetch_miss(48'h0040_0000, 40'h0_8000_0000, FC_SE);
    check(n_wt == 0, "fetch miss leaves L1I untouched");
    fetch_hit(48'h0040_0008, 40'h0_8000_0008);
    fetch_hit(48'h0040_0038, 40'h0_8000_0038);
    op(FC_COMMIT, 48'h0040_0000, 40'h0_8000_0000);
    repeat (2) @(negedge clk);
    check(n_wt == 1 && last_wt.data == insn_line(40'h0_8000_0000) && !last_wt.store, "commit writes line to L1I");
    check(n_pf == 1, "commit notifies the L2 prefetcher");
    check(n_upg == 0, "no upgrade on the instruction side");
    op(FC_COMMIT, 48'h0040_0010, 40'h0_8000_0010);
    repeat (2) @(negedge clk);
    check(n_wt == 1, "second commit of the line is silent");
    fetch_miss(48'h0040_1040, 40'h0_8000_1040, FC_S);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    w0 = n_mreq;
    fetch_miss(48'h0040_0000, 40'h0_8000_0000, FC_S);
    fetch_miss(48'h0040_1040, 40'h0_8000_1040, FC_S);
    check(n_mreq == w0 + 2, "flush empties the instruction filter cache");
    check(n_upg == 0, "still no upgrade");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
