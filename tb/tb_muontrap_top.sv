// tb_muontrap_top: end-to-end test of the four-core capture layer at its
// default sizes (2 KiB 4-way filter caches with 4 MSHRs, 8-entry filter
// TLBs, 64-entry TLBs, four cores).
//
// The testbench stands in for what lies outside the design: the cores (it
// issues loads, fetches, commits and stores), the L1 data caches (a table
// of MESI states per core and line, updated by write-throughs, downgrades,
// upgrades and invalidates, and read through the lookup port), the shared
// level (answers every forwarded miss after a fixed latency with data that
// is a function of the address), the L1 instruction caches and the
// page-table walker. It runs one scenario through every mechanism of the
// design and counts how often each happened; a mechanism that never
// happened counts as a failure:
//   speculative fill in SE, one-cycle hit, write-through at commit, SE
//   upgrade with filter-cache invalidate broadcast, NACK of a speculative
//   access to a line exclusive elsewhere, non-speculative retry with
//   downgrade, store commit that refetches an evicted line, commit-trained
//   L2 prefetch, MSHR-full stall, flush on context switch, kernel entry,
//   isolated-region entry and (opted-in) misspeculation, filter-TLB fill, move to
//   the TLB and re-walk at commit, and the instruction filter cache.
module tb_muontrap_top;
  import muontrap_pkg::*;

  localparam int N  = 4;
  localparam int NT = 2 * N;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] ctx_switch, ctx_clear_on_misspec, kernel_entry, kernel_exit, region_flush, misspec;
  asid_t        asid [N];
  logic [N-1:0] flush;
  logic [N-1:0] d_req_valid, d_req_ready, d_resp_valid;
  fc_req_t      d_req [N];
  fc_resp_t     d_resp [N];
  logic [N-1:0] i_req_valid, i_req_ready, i_resp_valid;
  fc_req_t      i_req [N];
  fc_resp_t     i_resp [N];
  logic [N-1:0] l1d_wt_valid, l1d_wt_ready;
  fc_wt_t       l1d_wt [N];
  logic [N-1:0] l1i_req_valid, l1i_req_ready, l1i_req_spec, l1i_fill_valid, l1i_fill_ready;
  paddr_t       l1i_req_paddr [N];
  logic [1:0]   l1i_req_mshr [N], l1i_fill_mshr [N];
  fc_fill_t     l1i_fill [N];
  logic [N-1:0] l1i_wt_valid, l1i_wt_ready;
  fc_wt_t       l1i_wt [N];
  paddr_t       dir_paddr;
  mesi_e        dir_state [N];
  logic         mem_valid, mem_ready, mem_upgrade;
  logic [1:0]   mem_core, mem_mshr;
  paddr_t       mem_paddr;
  logic [N-1:0] mem_downgrade, mem_inv;
  logic         mresp_valid, mresp_ready;
  logic [1:0]   mresp_core, mresp_mshr;
  line_t        mresp_data;
  level_e       mresp_level;
  logic         l2_pf_valid;
  paddr_t       l2_pf_paddr;
  vpn_t         tr_vpn [NT];
  logic [NT-1:0] tr_hit;
  xlate_t       tr_x [NT];
  logic [NT-1:0] walk_valid, walk_ready, walk_nonspec, tcm_valid, rewalk_valid;
  xlate_t       walk_x [NT];
  vpn_t         tcm_vpn [NT], rewalk_vpn [NT];
  logic [N-1:0] tlb_flush_all;
  logic         evt_nack, evt_bcast, evt_downgrade, evt_pf_drop;

  muontrap_top dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t mem_word(input paddr_t pa, input int w);
    return {pa[31:0] ^ 32'h5EC0_0000, 32'(w) * 32'h0101_0101 + 32'h77};
  endfunction
  function automatic line_t mem_line(input paddr_t pa);
    line_t l;
    for (int w = 0; w < WORDS; w++) l[w*WORD_BITS +: WORD_BITS] = mem_word({pa[PA_W-1:6], 6'b0}, w);
    return l;
  endfunction
  function automatic vaddr_t va_of(input paddr_t pa);
    return {8'h3C, pa};
  endfunction

  // ------------------------------------------------------ L1D state model
  mesi_e l1st [logic [47:0]];
  int    dir_ver = 0;
  function automatic logic [47:0] key(input int c, input paddr_t pa);
    return {8'(c), pa[PA_W-1:6], 6'b0};
  endfunction
  function automatic mesi_e get_st(input int c, input paddr_t pa);
    return l1st.exists(key(c, pa)) ? l1st[key(c, pa)] : MESI_I;
  endfunction
  always @(dir_paddr or dir_ver)
    for (int c = 0; c < N; c++) dir_state[c] = get_st(c, dir_paddr);

  // ----------------------------------------------------------- counters
  int n_wt = 0, n_refetch = 0, n_upg_mem = 0, n_dg_mem = 0, n_miss_fwd = 0, n_l2pf = 0;
  int n_bcast = 0, n_nack = 0, n_dg = 0, n_iwt = 0, n_ireq = 0, n_rewalk = 0, n_stall = 0;
  int n_flush [N];
  paddr_t last_l2pf;
  fc_resp_t last_d [N];
  int n_d [N];
  int unsigned d_cyc [N];
  fc_resp_t last_i [N];
  int n_i [N];

  typedef struct { int core; int mshr; paddr_t pa; int unsigned due; } mresp_t;
  mresp_t mq[$];
  typedef struct { int mshr; paddr_t pa; int unsigned due; } iresp_t;
  iresp_t iq [N][$];

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++) begin
      if (d_resp_valid[c]) begin last_d[c] = d_resp[c]; n_d[c]++; d_cyc[c] = cyc; end
      if (i_resp_valid[c]) begin last_i[c] = i_resp[c]; n_i[c]++; end
      if (flush[c]) n_flush[c]++;
      if (l1d_wt_valid[c] && l1d_wt_ready[c]) begin
        n_wt++;
        if (l1d_wt[c].refetch) n_refetch++;
        if (l1d_wt[c].store) l1st[key(c, l1d_wt[c].paddr)] = MESI_M;
        else if (get_st(c, l1d_wt[c].paddr) == MESI_I) l1st[key(c, l1d_wt[c].paddr)] = MESI_S;
        dir_ver++;
      end
      if (l1i_wt_valid[c] && l1i_wt_ready[c]) n_iwt++;
      if (l1i_req_valid[c] && l1i_req_ready[c]) begin
        n_ireq++;
        iq[c].push_back('{mshr: int'(l1i_req_mshr[c]), pa: l1i_req_paddr[c], due: cyc + 3});
      end
      if (d_req_valid[c] && !d_req_ready[c] && !flush[c]) n_stall++;
    end
    if (mem_valid && mem_ready) begin
      if (mem_upgrade) begin
        n_upg_mem++;
        if (get_st(int'(mem_core), mem_paddr) != MESI_M) l1st[key(int'(mem_core), mem_paddr)] = MESI_E;
        for (int c = 0; c < N; c++) if (mem_inv[c]) l1st[key(c, mem_paddr)] = MESI_I;
      end else begin
        n_miss_fwd++;
        for (int c = 0; c < N; c++) if (mem_downgrade[c]) begin l1st[key(c, mem_paddr)] = MESI_S; n_dg_mem++; end
        mq.push_back('{core: int'(mem_core), mshr: int'(mem_mshr), pa: mem_paddr, due: cyc + 6});
      end
      dir_ver++;
    end
    if (evt_bcast) n_bcast++;
    if (evt_nack) n_nack++;
    if (evt_downgrade) n_dg++;
    if (l2_pf_valid) begin n_l2pf++; last_l2pf = l2_pf_paddr; end
    for (int t = 0; t < NT; t++) if (rewalk_valid[t]) n_rewalk++;
  end

  // shared-level responder
  initial begin
    mresp_valid = 0; mresp_core = '0; mresp_mshr = '0; mresp_data = '0; mresp_level = LVL_L2;
    forever begin
      @(negedge clk);
      if (mq.size() > 0 && mq[0].due <= cyc) begin
        mresp_valid = 1; mresp_core = 2'(mq[0].core); mresp_mshr = 2'(mq[0].mshr);
        mresp_data = mem_line(mq[0].pa); mresp_level = LVL_L2;
        do @(posedge clk); while (!mresp_ready);
        void'(mq.pop_front());
        @(negedge clk);
        mresp_valid = 0;
      end
    end
  end

  // L1I responders
  for (genvar c = 0; c < N; c++) begin : g_l1i
    initial begin
      l1i_fill_valid[c] = 0; l1i_fill_mshr[c] = '0; l1i_fill[c] = '0;
      forever begin
        @(negedge clk);
        if (iq[c].size() > 0 && iq[c][0].due <= cyc) begin
          l1i_fill_valid[c] = 1; l1i_fill_mshr[c] = 2'(iq[c][0].mshr);
          l1i_fill[c] = '{data: mem_line(iq[c][0].pa), level: LVL_L2, grant: FC_S, nack: 1'b0};
          do @(posedge clk); while (!l1i_fill_ready[c]);
          void'(iq[c].pop_front());
          @(negedge clk);
          l1i_fill_valid[c] = 0;
        end
      end
    end
  end

  // ------------------------------------------------------------ drivers
  task automatic dop(input int c, input fc_op_e op, input bit spec, input paddr_t pa, input int id,
                     input word_t wd = '0, input logic [7:0] wm = '0);
    @(negedge clk);
    d_req_valid[c] = 1;
    d_req[c] = '{op: op, spec: spec, vaddr: va_of(pa), paddr: pa, id: 6'(id), wdata: wd, wmask: wm};
    do @(posedge clk); while (!d_req_ready[c]);
    @(negedge clk);
    d_req_valid[c] = 0;
  endtask

  // load and wait for its answer; returns the answer
  task automatic dload(input int c, input bit spec, input paddr_t pa, input int id, output fc_resp_t r);
    int n0;
    n0 = n_d[c];
    dop(c, FC_LOAD, spec, pa, id);
    while (n_d[c] == n0) @(negedge clk);
    r = last_d[c];
  endtask

  task automatic dcommit(input int c, input paddr_t pa, input int id);
    dop(c, FC_COMMIT, 1'b0, pa, id);
    repeat (3) @(negedge clk);
  endtask

  task automatic pulse(ref logic [N-1:0] sig, input int c);
    @(negedge clk); sig[c] = 1;
    @(negedge clk); sig[c] = 0;
  endtask

  // --------------------------------------------------------------- test
  initial begin
    fc_resp_t r;
    int m0, b0, w0, s0, f0, i0;
    paddr_t X, Y, P, Z;
    ctx_switch = '0; ctx_clear_on_misspec = '0; kernel_entry = '0; kernel_exit = '0;
    region_flush = '0; misspec = '0; d_req_valid = '0; i_req_valid = '0;
    l1d_wt_ready = '1; l1i_req_ready = '1; l1i_wt_ready = '1; mem_ready = 1;
    walk_valid = '0; walk_nonspec = '0; tcm_valid = '0; tlb_flush_all = '0;
    for (int c = 0; c < N; c++) begin
      asid[c] = asid_t'(c + 1); d_req[c] = '0; i_req[c] = '0; n_d[c] = 0; n_i[c] = 0; n_flush[c] = 0;
    end
    for (int t = 0; t < NT; t++) begin tr_vpn[t] = '0; walk_x[t] = '0; tcm_vpn[t] = '0; end
    X = 40'h00_0010_0040; Y = 40'h00_0020_0080; P = 40'h00_0030_0000; Z = 40'h00_0040_00C0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // A/B. two cores load X speculatively: filled, nothing reaches an L1
    dload(1, 1'b1, X, 1, r);
    check(!r.nack && r.data == mem_word(X, 0), "core1 speculative load of X");
    dload(0, 1'b1, X, 2, r);
    check(!r.nack && r.data == mem_word(X, 0), "core0 speculative load of X");
    check(n_wt == 0 && get_st(0, X) == MESI_I && get_st(1, X) == MESI_I, "no L1 state from speculation");
    // one-cycle hit
    dop(0, FC_LOAD, 1'b1, X + 8, 3);
    @(negedge clk);
    check(last_d[0].hit && d_cyc[0] == cyc - 1 && last_d[0].data == mem_word(X, 1), "one-cycle hit through the top");

    // C. core0 commits X: write-through, SE upgrade, broadcast invalidates core1's copy
    b0 = n_bcast;
    dcommit(0, X, 2);
    repeat (3) @(negedge clk);
    check(n_wt == 1 && n_bcast == b0 + 1 && get_st(0, X) == MESI_E, "commit writes through and upgrades to E");
    // core1's copy is gone; a speculative reload must be refused (E in core0's L1)
    m0 = n_miss_fwd;
    dload(1, 1'b1, X, 4, r);
    check(r.nack && n_miss_fwd == m0, "speculative access to a line exclusive elsewhere is NACKed");
    // D. retried non-speculatively: downgrade core0 to S
    dload(1, 1'b0, X, 5, r);
    check(!r.nack && r.data == mem_word(X, 0), "non-speculative retry succeeds");
    check(get_st(0, X) == MESI_S && n_dg > 0, "owner downgraded only by the non-speculative access");
    check(get_st(1, X) == MESI_S, "non-speculative fill written through to core1's L1");

    // E. store commit to a line not in core2's filter cache: refetch + upgrade
    w0 = n_refetch; b0 = n_bcast;
    dop(2, FC_STORE, 1'b0, Y, 6, 64'h0123_4567_89AB_CDEF, 8'hFF);
    repeat (4) @(negedge clk);
    check(n_refetch == w0 + 1 && n_bcast == b0 + 1, "store commit refetches and broadcasts");
    check(get_st(2, Y) == MESI_M, "store ends M in core2's L1");

    // F. commit-trained prefetch on core3: lines P, P+2, P+4 (stride 2 lines)
    for (int k = 0; k < 3; k++) begin
      dload(3, 1'b1, P + 40'(k) * 40'h80, 10 + k, r);
      check(r.data == mem_word(P + 40'(k) * 40'h80, 0), "stream load data");
    end
    check(n_l2pf == 0, "no prefetch from speculative loads");
    for (int k = 0; k < 3; k++) dcommit(3, P + 40'(k) * 40'h80, 10 + k);
    repeat (4) @(negedge clk);
    check(n_l2pf == 1 && last_l2pf == P + 40'h180, "L2 prefetch of the next stream line after commits");

    // G. MSHR-full stall: five misses back to back on core3
    s0 = n_stall;
    for (int k = 0; k < 5; k++) dop(3, FC_LOAD, 1'b1, 40'h00_0050_0000 + 40'(k) * 40'h40, 20 + k);
    repeat (20) @(negedge clk);
    check(n_stall > s0, "fifth miss stalls on full MSHRs");

    // H. context switch on core3: its filter cache is emptied in one cycle
    f0 = n_flush[3];
    pulse(ctx_switch, 3);
    check(n_flush[3] == f0 + 1, "context switch flushes");
    m0 = n_miss_fwd;
    dload(3, 1'b1, P, 30, r);
    check(n_miss_fwd == m0 + 1 && !r.hit, "line gone after context switch");

    // I. clear-on-misspeculation, opted in by core2's next process
    @(negedge clk); ctx_clear_on_misspec[2] = 1;
    pulse(ctx_switch, 2);
    @(negedge clk); ctx_clear_on_misspec[2] = 0;
    dload(2, 1'b1, Z, 31, r);
    dload(2, 1'b1, Z, 32, r);
    check(r.hit, "Z cached on core2");
    f0 = n_flush[2];
    pulse(misspec, 2);
    check(n_flush[2] == f0 + 1, "misspeculation flushes an opted-in process");
    dload(2, 1'b1, Z, 33, r);
    check(!r.hit, "Z gone after misspeculation flush");
    f0 = n_flush[1];
    pulse(misspec, 1);
    check(n_flush[1] == f0, "misspeculation does not flush other processes");

    // J. kernel entry and isolated-region entry
    pulse(kernel_entry, 1);
    check(n_flush[1] == f0 + 1, "kernel entry flushes");
    f0 = n_flush[0];
    pulse(region_flush, 0);
    check(n_flush[0] == f0 + 1, "region-switch flush instruction flushes");

    // K. translation on core0's data side (index 1)
    @(negedge clk); walk_valid[1] = 1; walk_nonspec[1] = 0;
    walk_x[1] = '{vpn: vpn_t'(36'h123), ppn: ppn_t'(28'h456), perm: 3'b011};
    @(negedge clk); walk_valid[1] = 0;
    walk_x[1] = '{vpn: vpn_t'(36'hABC), ppn: ppn_t'(28'hDEF), perm: 3'b011};
    walk_valid[1] = 1;
    @(negedge clk); walk_valid[1] = 0;
    tr_vpn[1] = vpn_t'(36'h123); #1;
    check(tr_hit[1] && tr_x[1].ppn == ppn_t'(28'h456), "speculative translation served by the filter TLB");
    i0 = n_rewalk;
    @(negedge clk); tcm_valid[1] = 1; tcm_vpn[1] = vpn_t'(36'h123);
    @(negedge clk); tcm_valid[1] = 0;
    repeat (2) @(negedge clk);
    check(n_rewalk == i0 + 1, "commit requests a non-speculative re-walk");
    pulse(ctx_switch, 0);
    tr_vpn[1] = vpn_t'(36'h123); #1;
    check(tr_hit[1] && tr_x[1].ppn == ppn_t'(28'h456), "committed translation survives in the TLB");
    tr_vpn[1] = vpn_t'(36'hABC); #1;
    check(!tr_hit[1], "uncommitted translation cleared with the filter TLB");
    @(negedge clk); walk_valid[1] = 1; walk_nonspec[1] = 1;
    walk_x[1] = '{vpn: vpn_t'(36'h789), ppn: ppn_t'(28'h111), perm: 3'b001};
    @(negedge clk); walk_valid[1] = 0; walk_nonspec[1] = 0;
    pulse(ctx_switch, 0);
    tr_vpn[1] = vpn_t'(36'h789); #1;
    check(tr_hit[1] && tr_x[1].ppn == ppn_t'(28'h111), "non-speculative walk goes to the TLB");

    // L. instruction side of core1
    i0 = n_ireq;
    @(negedge clk); i_req_valid[1] = 1;
    i_req[1] = '{op: FC_LOAD, spec: 1'b1, vaddr: va_of(40'h00_0060_0000), paddr: 40'h00_0060_0000,
                 id: 6'd1, wdata: '0, wmask: '0};
    do @(posedge clk); while (!i_req_ready[1]);
    @(negedge clk); i_req_valid[1] = 0;
    while (n_i[1] == 0) @(negedge clk);
    check(n_ireq == i0 + 1 && last_i[1].data == mem_word(40'h00_0060_0000, 0), "instruction fetch miss");
    @(negedge clk); i_req_valid[1] = 1; i_req[1].op = FC_COMMIT;
    do @(posedge clk); while (!i_req_ready[1]);
    @(negedge clk); i_req_valid[1] = 0;
    repeat (3) @(negedge clk);
    check(n_iwt == 1, "instruction commit writes the line to the L1I");

    repeat (10) @(negedge clk);
    $display("mechanisms: nack=%0d bcast=%0d downgrade=%0d upgrade=%0d refetch=%0d l2pf=%0d stall=%0d rewalk=%0d iwt=%0d",
             n_nack, n_bcast, n_dg, n_upg_mem, n_refetch, n_l2pf, n_stall, n_rewalk, n_iwt);
    check(n_nack > 0, "mechanism: NACK");
    check(n_bcast > 0, "mechanism: invalidate broadcast");
    check(n_dg > 0 && n_dg_mem > 0, "mechanism: non-speculative downgrade");
    check(n_upg_mem > 0, "mechanism: upgrade");
    check(n_refetch > 0, "mechanism: commit refetch");
    check(n_l2pf > 0, "mechanism: commit-trained prefetch");
    check(n_stall > 0, "mechanism: MSHR stall");
    check(n_rewalk > 0, "mechanism: re-walk");
    check(n_iwt > 0, "mechanism: instruction write-through");
    for (int c = 0; c < N; c++) check(n_flush[c] > 0, $sformatf("mechanism: flush on core %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
