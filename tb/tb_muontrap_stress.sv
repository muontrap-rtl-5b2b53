// tb_muontrap_stress: randomised contention test of the four-core capture
// layer at its default sizes. Each core runs its own random sequence of
// speculative loads (retried non-speculatively when NACKed), load commits,
// store commits and kernel-entry flushes over a small pool of lines. The
// pool is chosen so that the lines collide in two sets and so that every
// line is shared by all cores, which forces evictions, refetches, NACKs,
// downgrades, upgrades and invalidate broadcasts to interleave.
// Stores write back the value the line already holds, so the expected data
// of every load stays a fixed function of its address. The behavioural
// outside world (L1 MESI table, shared level, L1I) is the same as in the
// directed end-to-end test.
// Checked on every operation:
//   * every load returns the data of its address, whatever path it took;
//   * a non-speculative access is never NACKed;
//   * every write-through and every upgrade from core c is for a line that
//     core c has committed, stored or loaded non-speculatively, so nothing
//     touched only by speculation ever reaches an L1;
//   * every sequence finishes (no deadlock), under the watchdog.
// At the end each contention mechanism must have occurred at least once.
module tb_muontrap_stress;
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
    repeat (400000) @(posedge clk);
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

  // ------------------------------------------------------ stress checking
  localparam int OPS = 300;
  bit allowed [logic [47:0]];
  int n_done = 0, n_load = 0, n_retry = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++)
      if (l1d_wt_valid[c] && l1d_wt_ready[c])
        check(allowed.exists(key(c, l1d_wt[c].paddr)), $sformatf("core %0d write-through of a committed line", c));
    if (mem_valid && mem_ready && mem_upgrade)
      check(allowed.exists(key(int'(mem_core), mem_paddr)), "upgrade only for a committed line");
  end

  function automatic paddr_t pool_line(input int k);
    // six lines in set 0 and four in set 1 of every filter cache
    return (k < 6) ? paddr_t'((k + 1) << 16) : paddr_t'(((k - 5) << 16) | 40'h40);
  endfunction

  for (genvar gc = 0; gc < N; gc++) begin : g_thread
    initial begin
      fc_resp_t r;
      paddr_t   pa, recent [$];
      int       sel;
      wait (rst_n);
      repeat (3 + gc) @(negedge clk);
      for (int k = 0; k < OPS; k++) begin
        sel = $urandom_range(99);
        pa  = pool_line($urandom_range(9)) + paddr_t'($urandom_range(7) * 8);
        if (sel < 50 || recent.size() == 0) begin
          dload(gc, 1'b1, pa, k % 32, r);
          n_load++;
          if (r.nack) begin
            n_retry++;
            allowed[key(gc, pa)] = 1'b1;
            dload(gc, 1'b0, pa, k % 32, r);
            check(!r.nack, "non-speculative retry is never NACKed");
          end
          check(r.data == mem_word({pa[PA_W-1:6], 6'b0}, int'(pa[5:3])),
                $sformatf("core %0d load data at %h", gc, pa));
          recent.push_back(pa);
          if (recent.size() > 4) void'(recent.pop_front());
        end else if (sel < 78) begin
          pa = recent[$urandom_range(recent.size() - 1)];
          allowed[key(gc, pa)] = 1'b1;
          dop(gc, FC_COMMIT, 1'b0, pa, k % 32);
        end else if (sel < 96) begin
          allowed[key(gc, pa)] = 1'b1;
          dop(gc, FC_STORE, 1'b0, pa, 32 + k % 32,
              mem_word({pa[PA_W-1:6], 6'b0}, int'(pa[5:3])), 8'hFF);
        end else begin
          pulse(kernel_entry, gc);
          recent.delete();
        end
      end
      repeat (10) @(negedge clk);
      n_done++;
    end
  end

  initial begin
    ctx_switch = '0; ctx_clear_on_misspec = '0; kernel_entry = '0; kernel_exit = '0;
    region_flush = '0; misspec = '0; d_req_valid = '0; i_req_valid = '0;
    l1d_wt_ready = '1; l1i_req_ready = '1; l1i_wt_ready = '1; mem_ready = 1;
    walk_valid = '0; walk_nonspec = '0; tcm_valid = '0; tlb_flush_all = '0;
    for (int c = 0; c < N; c++) begin
      asid[c] = asid_t'(c + 1); d_req[c] = '0; i_req[c] = '0; n_d[c] = 0; n_i[c] = 0; n_flush[c] = 0;
    end
    for (int t = 0; t < NT; t++) begin tr_vpn[t] = '0; walk_x[t] = '0; tcm_vpn[t] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (n_done == N);
    repeat (20) @(negedge clk);
    check(mq.size() == 0, "no response left outstanding");
    $display("stress: loads=%0d retries=%0d nack=%0d bcast=%0d downgrade=%0d upgrade=%0d refetch=%0d wt=%0d l2pf=%0d stall=%0d",
             n_load, n_retry, n_nack, n_bcast, n_dg, n_upg_mem, n_refetch, n_wt, n_l2pf, n_stall);
    check(n_load > 0, "loads issued");
    check(n_nack > 0 && n_retry == n_nack, "mechanism: NACK and retry");
    check(n_bcast > 0, "mechanism: invalidate broadcast");
    check(n_dg > 0, "mechanism: non-speculative downgrade");
    check(n_upg_mem > 0, "mechanism: upgrade");
    check(n_refetch > 0, "mechanism: refetch of an evicted line");
    check(n_stall > 0, "mechanism: back-pressure");
    for (int c = 0; c < N; c++) check(n_flush[c] > 0, $sformatf("mechanism: flush on core %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
