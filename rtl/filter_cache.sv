// filter_cache: speculative L0 filter cache placed between a core and its L1.
//
// Every miss, speculative or not, fills the L0 only; the L1 and everything
// beyond it see a line only when an instruction that used it commits. Each
// line carries a committed bit. When a load or fetch commits (FC_COMMIT) and
// the line is still uncommitted, the bit is set, the whole line is written
// through to the L1, a prefetch notification goes to the level the line was
// filled from (if that level has a prefetcher, PF_LEVELS), and a line held
// in the SE pseudo-state launches an asynchronous upgrade. A committing
// store (FC_STORE) merges its bytes into the line, writes through and
// requests an upgrade. A commit whose line has left the L0 sends a refetch
// request, so the L1 brings the line in itself. A fill by a non-speculative
// request is committed at once and written through in the same way.
//
// Valid bits live in flip-flops apart from the data array, so `flush`
// invalidates every line in one cycle; nothing is written back because the
// cache is write-through. Misses outstanding at a flush are squashed: their
// fills are neither installed nor answered. Lines are tagged with both the
// virtual and the physical line address and indexed with bits below the
// page offset, so the CPU side looks up by virtual address and the snoop
// side invalidates by physical address. A fill replaces any line with the
// same physical address, so only one copy of a physical line exists.
// With COHERENT=0 (instruction side) the SE state and upgrades are unused.
//
// Interface and timing:
//   req/req_ready   one operation per cycle; a load hit answers on `resp`
//                   the next cycle (1-cycle hit), a miss answers the cycle
//                   after its fill is accepted. A load miss needs a free MSHR.
//   mreq            miss request to the lower level, valid/ready, tagged
//                   with the MSHR index. Answered through `fill`, valid/ready.
//   wt, upg         write-through and upgrade request, valid/ready, held
//                   until accepted; new CPU operations wait for them.
//   snoop           invalidate by physical address, any cycle.
//   pf              one-cycle prefetch notification (no back-pressure).
// Following the paper: the committed bit, write-through at commit, register
// valid bits with one-cycle clear, VA+PA tags, S/SE only, source-level tag,
// refetch of committed lines that were evicted. This design's own choices:
// the request/response handshakes, round-robin replacement per set, no
// merging of misses to a line already outstanding (both fills land on the
// same way), and squashing of misses outstanding at a flush.
module filter_cache
  import muontrap_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 2048,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned MSHRS      = 4,
  parameter bit          COHERENT   = 1'b1,
  parameter logic [2:0]  PF_LEVELS  = 3'b010,   // bit per level_e: only the L2 has a prefetcher
  localparam int unsigned MSHR_W    = (MSHRS > 1) ? $clog2(MSHRS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  // CPU side
  input  logic              req_valid,
  output logic              req_ready,
  input  fc_req_t           req,
  output logic              resp_valid,
  output fc_resp_t          resp,
  // miss path to the lower level
  output logic              mreq_valid,
  input  logic              mreq_ready,
  output paddr_t            mreq_paddr,
  output logic [MSHR_W-1:0] mreq_mshr,
  output logic              mreq_spec,
  input  logic              fill_valid,
  output logic              fill_ready,
  input  logic [MSHR_W-1:0] fill_mshr,
  input  fc_fill_t          fill,
  // commit path to the L1
  output logic              wt_valid,
  input  logic              wt_ready,
  output fc_wt_t            wt,
  output logic              upg_valid,
  input  logic              upg_ready,
  output paddr_t            upg_paddr,
  // coherence invalidate (physically indexed)
  input  logic              snoop_valid,
  input  paddr_t            snoop_paddr,
  // prefetch commit channel
  output logic              pf_valid,
  output paddr_t            pf_paddr,
  output level_e            pf_level
);

  localparam int unsigned NLINES = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned SETS   = NLINES / WAYS;
  localparam int unsigned IDX_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned LIDX_W = (NLINES > 1) ? $clog2(NLINES) : 1;

  // The index must come from bits shared by virtual and physical addresses.
  if (OFF_BITS + $clog2(SETS) > PAGE_BITS) begin : g_bad_geometry
    $error("filter_cache: set index exceeds the page offset");
  end

  typedef logic [VLINE_W-1:0] vline_t;

  function automatic logic [IDX_W-1:0] set_of(input logic [PA_W-1:0] a);
    return (SETS > 1) ? IDX_W'((a >> OFF_BITS) & PA_W'(SETS - 1)) : '0;
  endfunction

  function automatic logic [LIDX_W-1:0] lidx(input logic [IDX_W-1:0] s, input logic [WAY_W-1:0] w);
    return LIDX_W'(s * WAYS + w);
  endfunction

  // ---------------------------------------------------------------- state
  logic      [NLINES-1:0] valid_q;
  logic      [NLINES-1:0] committed_q;
  fc_state_e              state_q [NLINES];
  level_e                 level_q [NLINES];
  vline_t                 vline_q [NLINES];
  pline_t                 pline_q [NLINES];
  line_t                  data_q  [NLINES];
  logic [WAY_W-1:0]       rr_q    [SETS];

  logic   [MSHRS-1:0]     m_valid_q;
  logic   [MSHRS-1:0]     m_squash_q;
  logic   [MSHRS-1:0]     m_spec_q;
  vaddr_t                 m_vaddr_q [MSHRS];
  paddr_t                 m_paddr_q [MSHRS];
  logic [ID_W-1:0]        m_id_q    [MSHRS];

  // ------------------------------------------------------- CPU-side lookup
  logic [IDX_W-1:0]  rset;
  logic              rhit;
  logic [WAY_W-1:0]  rway;
  logic [LIDX_W-1:0] rl;

  always_comb begin
    rset = set_of(PA_W'(req.vaddr));
    rhit = 1'b0;
    rway = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[lidx(rset, WAY_W'(w))] &&
          vline_q[lidx(rset, WAY_W'(w))] == req.vaddr[VA_W-1:OFF_BITS]) begin
        rhit = 1'b1;
        rway = WAY_W'(w);
      end
    end
    rl = lidx(rset, rway);
  end

  // free MSHR
  logic              m_free;
  logic [MSHR_W-1:0] m_free_idx;
  always_comb begin
    m_free     = 1'b0;
    m_free_idx = '0;
    for (int m = MSHRS - 1; m >= 0; m--) begin
      if (!m_valid_q[m]) begin
        m_free     = 1'b1;
        m_free_idx = MSHR_W'(m);
      end
    end
  end

  logic wt_free, upg_free, mreq_free;
  assign wt_free   = !wt_valid || wt_ready;
  assign upg_free  = !upg_valid || upg_ready;
  assign mreq_free = !mreq_valid || mreq_ready;

  assign req_ready = !flush && !fill_valid && wt_free && upg_free &&
                     (req.op != FC_LOAD || rhit || (m_free && mreq_free));
  // fill_ready looks at the upgrade register, not at upg_ready: the
  // coherence gate derives upg_ready from fill_ready, so this breaks the loop
  assign fill_ready = wt_free && !upg_valid;

  logic acc;
  assign acc = req_valid && req_ready;

  // CPU operation decode
  logic  do_hit_resp, do_alloc, do_store_hit, cpu_commit_new;
  logic  cpu_wt, cpu_upg, cpu_pf;
  word_t store_word;
  line_t store_line;

  always_comb begin
    do_hit_resp    = acc && req.op == FC_LOAD && rhit;
    do_alloc       = acc && req.op == FC_LOAD && !rhit;
    do_store_hit   = acc && req.op == FC_STORE && rhit;
    cpu_commit_new = acc && req.op != FC_LOAD && rhit && !committed_q[rl];
    // every store writes through; a load commit only the first time
    cpu_wt  = acc && (req.op == FC_STORE || (req.op == FC_COMMIT && !(rhit && committed_q[rl])));
    cpu_upg = COHERENT && acc &&
              (req.op == FC_STORE || (cpu_commit_new && state_q[rl] == FC_SE));
    cpu_pf  = cpu_commit_new && PF_LEVELS[level_q[rl]];
    store_word = data_q[rl][req.vaddr[OFF_BITS-1:3]*WORD_BITS +: WORD_BITS];
    for (int b = 0; b < 8; b++) begin
      if (req.wmask[b]) store_word[b*8 +: 8] = req.wdata[b*8 +: 8];
    end
    store_line = data_q[rl];
    store_line[req.vaddr[OFF_BITS-1:3]*WORD_BITS +: WORD_BITS] = store_word;
  end

  // ------------------------------------------------------------ fill path
  logic              facc;
  paddr_t            f_paddr;
  vaddr_t            f_vaddr;
  logic              f_spec;
  logic [IDX_W-1:0]  fset;
  logic              f_alias;
  logic [WAY_W-1:0]  fway;
  logic [LIDX_W-1:0] fl;
  logic              f_install, f_resp, f_nonspec_commit;

  always_comb begin
    facc    = fill_valid && fill_ready;
    f_paddr = m_paddr_q[fill_mshr];
    f_vaddr = m_vaddr_q[fill_mshr];
    f_spec  = m_spec_q[fill_mshr];
    fset    = set_of(f_paddr);
    // physical-address match first (one copy per physical line), then an
    // invalid way, then the round-robin victim
    f_alias = 1'b0;
    fway    = rr_q[fset];
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid_q[lidx(fset, WAY_W'(w))]) fway = WAY_W'(w);
    end
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[lidx(fset, WAY_W'(w))] &&
          pline_q[lidx(fset, WAY_W'(w))] == f_paddr[PA_W-1:OFF_BITS]) begin
        f_alias = 1'b1;
        fway    = WAY_W'(w);
      end
    end
    fl = lidx(fset, fway);
    f_resp           = facc && m_valid_q[fill_mshr] && !m_squash_q[fill_mshr] && !flush;
    f_install        = f_resp && !fill.nack;
    f_nonspec_commit = f_install && !f_spec && !(f_alias && committed_q[fl]);
  end

  logic snoop_hits_fill;
  assign snoop_hits_fill = snoop_valid && snoop_paddr[PA_W-1:OFF_BITS] == f_paddr[PA_W-1:OFF_BITS];

  // -------------------------------------------------------- tag/state regs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q     <= '0;
      committed_q <= '0;
      for (int l = 0; l < NLINES; l++) begin
        state_q[l] <= FC_S;
        level_q[l] <= LVL_L1;
        vline_q[l] <= '0;
        pline_q[l] <= '0;
      end
      for (int s = 0; s < SETS; s++) rr_q[s] <= '0;
    end else begin
      if (f_install) begin
        valid_q[fl]     <= !snoop_hits_fill;
        committed_q[fl] <= !f_spec || (f_alias && committed_q[fl]);
        state_q[fl]     <= (COHERENT && f_spec && fill.grant == FC_SE) ? FC_SE : FC_S;
        level_q[fl]     <= fill.level;
        vline_q[fl]     <= f_vaddr[VA_W-1:OFF_BITS];
        pline_q[fl]     <= f_paddr[PA_W-1:OFF_BITS];
        if (!f_alias) rr_q[fset] <= WAY_W'((32'(fway) + 1) % WAYS);
      end
      if (acc && req.op != FC_LOAD && rhit) begin
        committed_q[rl] <= 1'b1;
        state_q[rl]     <= FC_S;  // the upgrade (if any) has been launched
      end
      // physically indexed invalidate from the coherence side
      if (snoop_valid) begin
        for (int w = 0; w < WAYS; w++) begin
          if (pline_q[lidx(set_of(snoop_paddr), WAY_W'(w))] == snoop_paddr[PA_W-1:OFF_BITS])
            valid_q[lidx(set_of(snoop_paddr), WAY_W'(w))] <= 1'b0;
        end
      end
      // one-cycle clear of every valid bit
      if (flush) valid_q <= '0;
    end
  end

  // single write port on the data array: a fill or a committing store
  always_ff @(posedge clk) begin
    if (f_install) data_q[fl] <= fill.data;
    else if (do_store_hit) data_q[rl] <= store_line;
  end

  // ----------------------------------------------------------------- MSHRs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid_q  <= '0;
      m_squash_q <= '0;
      m_spec_q   <= '0;
      for (int m = 0; m < MSHRS; m++) begin
        m_vaddr_q[m] <= '0;
        m_paddr_q[m] <= '0;
        m_id_q[m]    <= '0;
      end
    end else begin
      if (facc) m_valid_q[fill_mshr] <= 1'b0;
      if (do_alloc) begin
        m_valid_q[m_free_idx]  <= 1'b1;
        m_squash_q[m_free_idx] <= 1'b0;
        m_spec_q[m_free_idx]   <= req.spec;
        m_vaddr_q[m_free_idx]  <= req.vaddr;
        m_paddr_q[m_free_idx]  <= req.paddr;
        m_id_q[m_free_idx]     <= req.id;
      end
      if (flush) m_squash_q <= m_valid_q;
    end
  end

  // --------------------------------------------------------------- outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp       <= '0;
      mreq_valid <= 1'b0;
      mreq_paddr <= '0;
      mreq_mshr  <= '0;
      mreq_spec  <= 1'b0;
      wt_valid   <= 1'b0;
      wt         <= '0;
      upg_valid  <= 1'b0;
      upg_paddr  <= '0;
      pf_valid   <= 1'b0;
      pf_paddr   <= '0;
      pf_level   <= LVL_L1;
    end else begin
      // response: hit the cycle after the request, miss the cycle after the fill
      resp_valid <= do_hit_resp || f_resp;
      if (do_hit_resp) begin
        resp.id   <= req.id;
        resp.data <= data_q[rl][req.vaddr[OFF_BITS-1:3]*WORD_BITS +: WORD_BITS];
        resp.hit  <= 1'b1;
        resp.nack <= 1'b0;
      end else if (f_resp) begin
        resp.id   <= m_id_q[fill_mshr];
        resp.data <= fill.data[f_vaddr[OFF_BITS-1:3]*WORD_BITS +: WORD_BITS];
        resp.hit  <= 1'b0;
        resp.nack <= fill.nack;
      end

      if (do_alloc) begin
        mreq_valid <= 1'b1;
        mreq_paddr <= {req.paddr[PA_W-1:OFF_BITS], {OFF_BITS{1'b0}}};
        mreq_mshr  <= m_free_idx;
        mreq_spec  <= req.spec;
      end else if (mreq_ready) begin
        mreq_valid <= 1'b0;
      end

      if (cpu_wt) begin
        wt_valid   <= 1'b1;
        wt.paddr   <= rhit ? {pline_q[rl], {OFF_BITS{1'b0}}} :
                             {req.paddr[PA_W-1:OFF_BITS], {OFF_BITS{1'b0}}};
        wt.data    <= (req.op == FC_STORE) ? store_line : data_q[rl];
        wt.refetch <= !rhit;
        wt.store   <= req.op == FC_STORE;
        wt.wsel    <= req.vaddr[OFF_BITS-1:3];
        wt.wdata   <= req.wdata;
        wt.wmask   <= (req.op == FC_STORE) ? req.wmask : '0;
      end else if (f_nonspec_commit) begin
        wt_valid   <= 1'b1;
        wt.paddr   <= {f_paddr[PA_W-1:OFF_BITS], {OFF_BITS{1'b0}}};
        wt.data    <= fill.data;
        wt.refetch <= 1'b0;
        wt.store   <= 1'b0;
        wt.wsel    <= '0;
        wt.wdata   <= '0;
        wt.wmask   <= '0;
      end else if (wt_ready) begin
        wt_valid <= 1'b0;
      end

      if (cpu_upg) begin
        upg_valid <= 1'b1;
        upg_paddr <= rhit ? {pline_q[rl], {OFF_BITS{1'b0}}} :
                            {req.paddr[PA_W-1:OFF_BITS], {OFF_BITS{1'b0}}};
      end else if (COHERENT && f_nonspec_commit && fill.grant == FC_SE) begin
        upg_valid <= 1'b1;
        upg_paddr <= {f_paddr[PA_W-1:OFF_BITS], {OFF_BITS{1'b0}}};
      end else if (upg_ready) begin
        upg_valid <= 1'b0;
      end

      pf_valid <= cpu_pf || (f_nonspec_commit && PF_LEVELS[fill.level]);
      if (cpu_pf) begin
        pf_paddr <= {pline_q[rl], {OFF_BITS{1'b0}}};
        pf_level <= level_q[rl];
      end else if (f_nonspec_commit) begin
        pf_paddr <= {f_paddr[PA_W-1:OFF_BITS], {OFF_BITS{1'b0}}};
        pf_level <= fill.level;
      end
    end
  end

  // ------------------------------------------------------------ assertions
  a_wt_hold : assert property (@(posedge clk) disable iff (!rst_n)
    wt_valid && !wt_ready |=> wt_valid && $stable(wt));
  a_upg_hold : assert property (@(posedge clk) disable iff (!rst_n)
    upg_valid && !upg_ready |=> upg_valid && $stable(upg_paddr));
  a_mreq_hold : assert property (@(posedge clk) disable iff (!rst_n)
    mreq_valid && !mreq_ready |=> mreq_valid && $stable(mreq_paddr));
  a_fill_known_mshr : assert property (@(posedge clk) disable iff (!rst_n)
    fill_valid |-> m_valid_q[fill_mshr]);
  a_no_upg_icache : assert property (@(posedge clk) disable iff (!rst_n)
    !COHERENT |-> !upg_valid);

endmodule
