// tb_filter_cache: self-checking test of the data-side filter cache.
//
// The testbench plays the core above and the L1/coherence side below. Line
// contents come from a fixed function of the physical address (mem_word), so
// expected load data is computed without the cache. Directed sequences cover:
// speculative miss and fill, the 1-cycle hit, first commit (write-through,
// prefetch notification to the filling level, SE upgrade), repeated commit,
// committing stores, snoop invalidation, one-cycle flush, flush with a miss
// outstanding, non-speculative fills, refetch of an evicted line at commit,
// NACKed fills, physical aliasing, round-robin eviction without write-back
// and back-pressure when all MSHRs are busy.
module tb_filter_cache;
  import muontrap_pkg::*;

  localparam int MSHRS = 4;
  localparam int MW = $clog2(MSHRS);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic flush;
  logic req_valid, req_ready;
  fc_req_t req;
  logic resp_valid;
  fc_resp_t resp;
  logic mreq_valid, mreq_ready, mreq_spec;
  paddr_t mreq_paddr;
  logic [MW-1:0] mreq_mshr;
  logic fill_valid, fill_ready;
  logic [MW-1:0] fill_mshr;
  fc_fill_t fill;
  logic wt_valid, wt_ready;
  fc_wt_t wt;
  logic upg_valid, upg_ready;
  paddr_t upg_paddr;
  logic snoop_valid;
  paddr_t snoop_paddr;
  logic pf_valid;
  paddr_t pf_paddr;
  level_e pf_level;

  filter_cache #(.COHERENT(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  function automatic word_t mem_word(input paddr_t pa, input int w);
    return {pa[31:0] ^ 32'hA5A5_0000, 32'(w) * 32'h0101_0101 + 32'h1234};
  endfunction
  function automatic line_t mem_line(input paddr_t pa);
    line_t l;
    for (int w = 0; w < WORDS; w++) l[w*WORD_BITS +: WORD_BITS] = mem_word({pa[PA_W-1:6], 6'b0}, w);
    return l;
  endfunction

  // ---------------------------------------------------------------- monitors
  int n_resp = 0, n_wt = 0, n_upg = 0, n_pf = 0, n_mreq = 0;
  fc_resp_t last_resp;
  int unsigned last_resp_cyc;
  fc_wt_t last_wt;
  paddr_t last_upg, last_pf, last_mreq;
  level_e last_pf_level;
  logic [MW-1:0] last_mshr;
  logic last_spec;
  always @(posedge clk) if (rst_n) begin
    if (resp_valid) begin n_resp++; last_resp = resp; last_resp_cyc = cyc; end
    if (wt_valid && wt_ready) begin n_wt++; last_wt = wt; end
    if (upg_valid && upg_ready) begin n_upg++; last_upg = upg_paddr; end
    if (pf_valid) begin n_pf++; last_pf = pf_paddr; last_pf_level = pf_level; end
    if (mreq_valid && mreq_ready) begin
      n_mreq++; last_mreq = mreq_paddr; last_mshr = mreq_mshr; last_spec = mreq_spec;
    end
  end

  // ---------------------------------------------------------------- drivers
  int unsigned acc_cyc;
  task automatic issue(input fc_op_e op, input bit spec, input vaddr_t va, input paddr_t pa,
                       input logic [ID_W-1:0] id, input word_t wd = '0, input logic [7:0] wm = '0);
    @(negedge clk);
    req_valid = 1'b1;
    req = '{op: op, spec: spec, vaddr: va, paddr: pa, id: id, wdata: wd, wmask: wm};
    do @(posedge clk); while (!req_ready);
    acc_cyc = cyc;
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic give_fill(input logic [MW-1:0] m, input paddr_t pa, input level_e lv,
                           input fc_state_e g, input bit nack = 1'b0);
    @(negedge clk);
    fill_valid = 1'b1;
    fill_mshr = m;
    fill = '{data: mem_line(pa), level: lv, grant: g, nack: nack};
    do @(posedge clk); while (!fill_ready);
    @(negedge clk);
    fill_valid = 1'b0;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  // speculative load that misses and is filled
  task automatic miss_fill(input vaddr_t va, input paddr_t pa, input logic [ID_W-1:0] id,
                           input bit spec, input level_e lv, input fc_state_e g);
    int r0, m0;
    r0 = n_resp; m0 = n_mreq;
    issue(FC_LOAD, spec, va, pa, id);
    idle(1);
    check(n_mreq == m0 + 1, "miss sends a request");
    check(last_mreq == {pa[PA_W-1:6], 6'b0} && last_spec == spec, "miss request address/spec");
    give_fill(last_mshr, pa, lv, g);
    idle(1);
    check(n_resp == r0 + 1 && !last_resp.hit && last_resp.id == id, "fill answers the load");
    check(last_resp.data == mem_word({pa[PA_W-1:6], 6'b0}, int'(va[5:3])), "fill data");
  endtask

  task automatic load_hit(input vaddr_t va, input paddr_t pa, input logic [ID_W-1:0] id, input word_t exp);
    int r0;
    r0 = n_resp;
    issue(FC_LOAD, 1'b1, va, pa, id);
    // acc at posedge N; response registered at the same edge... visible in cycle acc+1
    idle(1);
    check(n_resp == r0 + 1 && last_resp.hit, "hit answered");
    check(last_resp_cyc == acc_cyc + 1, "hit latency is one cycle");
    check(last_resp.data == exp && last_resp.id == id, "hit data");
  endtask

  task automatic load_miss_expect(input vaddr_t va, input paddr_t pa, input logic [ID_W-1:0] id);
    int m0;
    m0 = n_mreq;
    issue(FC_LOAD, 1'b1, va, pa, id);
    idle(1);
    check(n_mreq == m0 + 1, "load misses as expected");
    give_fill(last_mshr, pa, LVL_L2, FC_S);
    idle(1);
  endtask

  // ------------------------------------------------------------------ test
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w0, p0, u0, m0, r0;
    vaddr_t va;
    paddr_t pa;
    word_t  wexp;
    flush = 0; req_valid = 0; req = '0; mreq_ready = 1; fill_valid = 0; fill_mshr = '0;
    fill = '0; wt_ready = 1; upg_ready = 1; snoop_valid = 0; snoop_paddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    idle(2);

    // 1. speculative miss, filled from L2 in SE
    va = 48'h0000_1234_5048; pa = 40'h00_ABCD_E048;
    w0 = n_wt; p0 = n_pf; u0 = n_upg;
    miss_fill(va, pa, 6'd1, 1'b1, LVL_L2, FC_SE);
    check(n_wt == w0 && n_pf == p0 && n_upg == u0, "speculative fill leaves L1 untouched");
    // 2. one-cycle hit
    load_hit(va, pa, 6'd2, mem_word({pa[PA_W-1:6], 6'b0}, 1));
    load_hit(va + 8, pa + 8, 6'd3, mem_word({pa[PA_W-1:6], 6'b0}, 2));
    // 3. first commit: write-through, prefetch notification, SE upgrade
    issue(FC_COMMIT, 1'b0, va, pa, 6'd1);
    idle(2);
    check(n_wt == w0 + 1 && !last_wt.refetch && !last_wt.store, "commit writes line through");
    check(last_wt.paddr == {pa[PA_W-1:6], 6'b0} && last_wt.data == mem_line(pa), "write-through line");
    check(n_pf == p0 + 1 && last_pf == {pa[PA_W-1:6], 6'b0} && last_pf_level == LVL_L2,
          "prefetch notification to L2");
    check(n_upg == u0 + 1 && last_upg == {pa[PA_W-1:6], 6'b0}, "SE line launches upgrade");
    // 4. second commit of the same line does nothing
    issue(FC_COMMIT, 1'b0, va, pa, 6'd2);
    idle(2);
    check(n_wt == w0 + 1 && n_pf == p0 + 1 && n_upg == u0 + 1, "repeated commit is silent");

    // 5. committing store
    issue(FC_STORE, 1'b0, va + 8, pa + 8, 6'd4, 64'hDEAD_BEEF_CAFE_F00D, 8'h0F);
    idle(2);
    wexp = mem_word({pa[PA_W-1:6], 6'b0}, 2);
    wexp[31:0] = 32'hCAFE_F00D;
    check(n_wt == w0 + 2 && last_wt.store && last_wt.wmask == 8'h0F && last_wt.wsel == 3'd2,
          "store writes through");
    check(last_wt.data[2*64 +: 64] == wexp, "store merged into write-through line");
    check(n_upg == u0 + 2, "store requests upgrade");
    load_hit(va + 8, pa + 8, 6'd5, wexp);

    // 6. snoop invalidate by physical address
    @(negedge clk); snoop_valid = 1; snoop_paddr = pa;
    @(negedge clk); snoop_valid = 0;
    load_miss_expect(va, pa, 6'd6);
    load_hit(va, pa, 6'd7, mem_word({pa[PA_W-1:6], 6'b0}, 1));

    // 7. one-cycle flush
    miss_fill(48'h0000_0000_2000, 40'h00_0000_7000, 6'd8, 1'b1, LVL_MEM, FC_S);
    @(negedge clk); flush = 1;
    @(negedge clk); flush = 0;
    load_miss_expect(va, pa, 6'd9);
    load_miss_expect(48'h0000_0000_2000, 40'h00_0000_7000, 6'd10);

    // 8. non-speculative miss: committed at fill and written through
    w0 = n_wt; p0 = n_pf;
    miss_fill(48'h0000_0000_3040, 40'h00_0001_1040, 6'd11, 1'b0, LVL_L2, FC_S);
    idle(1);
    check(n_wt == w0 + 1 && last_wt.data == mem_line(40'h00_0001_1040), "non-spec fill writes through");
    check(n_pf == p0 + 1, "non-spec fill notifies prefetcher");
    issue(FC_COMMIT, 1'b0, 48'h0000_0000_3040, 40'h00_0001_1040, 6'd11);
    idle(2);
    check(n_wt == w0 + 1, "committed line not written twice");
    // fill from L1: no prefetcher there, so no notification at commit
    p0 = n_pf;
    miss_fill(48'h0000_0000_4080, 40'h00_0002_2080, 6'd12, 1'b1, LVL_L1, FC_S);
    issue(FC_COMMIT, 1'b0, 48'h0000_0000_4080, 40'h00_0002_2080, 6'd12);
    idle(2);
    check(n_pf == p0, "no notification to a level without prefetcher");

    // 9. commit of a line no longer in L0: refetch
    w0 = n_wt;
    issue(FC_COMMIT, 1'b0, 48'h0000_0000_50C0, 40'h00_0003_30C0, 6'd13);
    idle(2);
    check(n_wt == w0 + 1 && last_wt.refetch && last_wt.paddr == 40'h00_0003_30C0, "commit miss refetches");

    // 10. NACK
    r0 = n_resp;
    issue(FC_LOAD, 1'b1, 48'h0000_0000_6100, 40'h00_0004_4100, 6'd14);
    idle(1);
    give_fill(last_mshr, 40'h00_0004_4100, LVL_L2, FC_S, 1'b1);
    idle(1);
    check(n_resp == r0 + 1 && last_resp.nack && last_resp.id == 6'd14, "nack reported");
    load_miss_expect(48'h0000_0000_6100, 40'h00_0004_4100, 6'd15);

    // 11. physical alias: second virtual address replaces the first
    miss_fill(48'h0000_0001_7140, 40'h00_0005_5140, 6'd16, 1'b1, LVL_L2, FC_S);
    miss_fill(48'h0000_0002_7140, 40'h00_0005_5140, 6'd17, 1'b1, LVL_L2, FC_S);
    load_hit(48'h0000_0002_7140, 40'h00_0005_5140, 6'd18, mem_word(40'h00_0005_5140, 0));
    load_miss_expect(48'h0000_0001_7140, 40'h00_0005_5140, 6'd19);

    // 12. eviction: five lines in one set (set index bits [8:6] = 7)
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    w0 = n_wt;
    for (int i = 0; i < 5; i++)
      miss_fill(48'h0000_0010_01C0 + 48'(i) * 48'h1000, 40'h00_0010_01C0 + 40'(i) * 40'h1000,
                6'(20 + i), 1'b1, LVL_L2, FC_S);
    check(n_wt == w0, "evicting uncommitted lines writes nothing back");
    for (int i = 1; i < 5; i++)
      load_hit(48'h0000_0010_01C0 + 48'(i) * 48'h1000, 40'h00_0010_01C0 + 40'(i) * 40'h1000,
               6'(30 + i), mem_word(40'h00_0010_01C0 + 40'(i) * 40'h1000, 0));
    load_miss_expect(48'h0000_0010_01C0, 40'h00_0010_01C0, 6'd40);

    // 13. flush while a miss is outstanding: fill dropped
    r0 = n_resp;
    issue(FC_LOAD, 1'b1, 48'h0000_0020_0200, 40'h00_0020_0200, 6'd41);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    give_fill(last_mshr, 40'h00_0020_0200, LVL_L2, FC_S);
    idle(2);
    check(n_resp == r0, "squashed miss not answered");
    load_miss_expect(48'h0000_0020_0200, 40'h00_0020_0200, 6'd42);

    // 14. all MSHRs busy: a further miss waits, a hit still proceeds
    m0 = n_mreq;
    for (int i = 0; i < 4; i++) issue(FC_LOAD, 1'b1, 48'h0000_0030_0000 + 48'(i) * 48'h40,
                                      40'h00_0030_0000 + 40'(i) * 40'h40, 6'(43 + i));
    idle(1);
    check(n_mreq == m0 + 4, "four misses outstanding");
    @(negedge clk);
    req_valid = 1; req = '{op: FC_LOAD, spec: 1'b1, vaddr: 48'h0000_0030_0400, paddr: 40'h00_0030_0400,
                           id: 6'd50, wdata: '0, wmask: '0};
    @(posedge clk); #1;
    check(!req_ready, "fifth miss stalls");
    req.vaddr = 48'h0000_0020_0200; req.paddr = 40'h00_0020_0200;
    #1;
    check(req_ready, "hit under four misses accepted");
    @(negedge clk); req_valid = 0;
    idle(3);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
