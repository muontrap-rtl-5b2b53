// spec_coherence_ctrl: coherence gate between the data filter caches of all
// cores and the shared level.
//
// It applies the filter-cache coherence rules. A filter cache may only take
// a line in S. A miss from core c is looked up in the private L1 states of
// all cores (dir_paddr / dir_state, answered in the same cycle):
//   * another core's L1 holds the line in M or E and the request is
//     speculative: the request is refused (NACK) so no speculative access can
//     downgrade another private cache; the core retries once the access is
//     non-speculative. A non-speculative request is never refused; it goes on
//     with a downgrade mask naming the cores whose L1 must drop to S.
//   * no other core's L1 holds the line: granted SE (behaves as S; upgraded
//     to E asynchronously when it commits), otherwise granted S.
// An upgrade request (a committing store, or a committing SE line) that is
// not already E or M in the requesting core's own L1 invalidates the line in
// every other core's filter cache, whether or not they hold it, so the
// broadcast takes the same time whatever they contain; it is then passed to
// the shared level, which invalidates other L1 copies. An upgrade whose line
// is already exclusive in the own L1 needs nothing further.
//
// Timing: one operation per cycle, chosen round-robin over cores (a core's
// upgrade before its miss). A NACK answers on the core's fill port in the
// same cycle; a granted miss is forwarded through a one-entry output
// register (mem_*) and its grant remembered per core and MSHR until the
// shared level answers on mresp_*, which is routed to the core's fill port.
// New operations are taken only in cycles without a response from the
// shared level, so the two never meet on a fill port. Snoop invalidates
// are registered: they reach the filter caches one cycle after the upgrade.
// The rules follow the paper; the port protocol, the arbitration and the
// same-cycle directory lookup are this design's own.
module spec_coherence_ctrl
  import muontrap_pkg::*;
#(
  parameter int unsigned NCORES = 4,
  parameter int unsigned MSHRS  = 4,
  localparam int unsigned MSHR_W = (MSHRS > 1) ? $clog2(MSHRS) : 1,
  localparam int unsigned CORE_W = (NCORES > 1) ? $clog2(NCORES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // miss requests from the data filter caches
  input  logic [NCORES-1:0]   creq_valid,
  output logic [NCORES-1:0]   creq_ready,
  input  paddr_t              creq_paddr [NCORES],
  input  logic [MSHR_W-1:0]   creq_mshr  [NCORES],
  input  logic [NCORES-1:0]   creq_spec,
  // upgrade requests from the data filter caches
  input  logic [NCORES-1:0]   upg_valid,
  output logic [NCORES-1:0]   upg_ready,
  input  paddr_t              upg_paddr [NCORES],
  // fills back to the data filter caches
  output logic [NCORES-1:0]   fill_valid,
  input  logic [NCORES-1:0]   fill_ready,
  output logic [MSHR_W-1:0]   fill_mshr [NCORES],
  output fc_fill_t            fill      [NCORES],
  // invalidates to the data filter caches
  output logic [NCORES-1:0]   snoop_valid,
  output paddr_t              snoop_paddr,
  // private L1 state lookup
  output paddr_t              dir_paddr,
  input  mesi_e               dir_state [NCORES],
  // requests to the shared level
  output logic                mem_valid,
  input  logic                mem_ready,
  output logic [CORE_W-1:0]   mem_core,
  output logic [MSHR_W-1:0]   mem_mshr,
  output paddr_t              mem_paddr,
  output logic                mem_upgrade,    // 0: read for a filter-cache fill, 1: upgrade
  output logic [NCORES-1:0]   mem_downgrade,  // L1s to move from M/E to S (non-speculative read)
  output logic [NCORES-1:0]   mem_inv,        // L1s to invalidate (upgrade)
  input  logic                mresp_valid,
  output logic                mresp_ready,
  input  logic [CORE_W-1:0]   mresp_core,
  input  logic [MSHR_W-1:0]   mresp_mshr,
  input  line_t               mresp_data,
  input  level_e              mresp_level,
  // one-cycle event pulses
  output logic                evt_nack,
  output logic                evt_bcast,
  output logic                evt_downgrade
);

  // ------------------------------------------------------------ arbitration
  logic [CORE_W-1:0] rr_q;
  logic              any;
  logic [CORE_W-1:0] sel;
  logic              sel_upg;

  always_comb begin
    any     = 1'b0;
    sel     = '0;
    sel_upg = 1'b0;
    for (int i = NCORES - 1; i >= 0; i--) begin
      int c;
      c = (int'(rr_q) + i) % NCORES;
      if (upg_valid[c] || creq_valid[c]) begin
        any     = 1'b1;
        sel     = CORE_W'(c);
        sel_upg = upg_valid[c];
      end
    end
  end

  // ---------------------------------------------------------------- decision
  logic              other_excl, other_any, own_excl;
  logic [NCORES-1:0] excl_mask, others;
  logic              is_nack, mem_free, go, fwd;
  fc_state_e         grant;

  assign dir_paddr = sel_upg ? upg_paddr[sel] : creq_paddr[sel];
  assign mem_free  = !mem_valid || mem_ready;

  always_comb begin
    excl_mask = '0;
    others    = '0;
    other_any = 1'b0;
    for (int k = 0; k < NCORES; k++) begin
      if (k != int'(sel)) begin
        others[k] = 1'b1;
        if (dir_state[k] == MESI_E || dir_state[k] == MESI_M) excl_mask[k] = 1'b1;
        if (dir_state[k] != MESI_I) other_any = 1'b1;
      end
    end
    other_excl = |excl_mask;
    own_excl   = dir_state[sel] == MESI_E || dir_state[sel] == MESI_M;
    grant      = other_any ? FC_S : FC_SE;
    is_nack    = !sel_upg && creq_spec[sel] && other_excl;
    // forwarded to the shared level: granted misses and broadcasting upgrades
    fwd        = sel_upg ? !own_excl : !is_nack;
    go         = any && !mresp_valid && (fwd ? mem_free : 1'b1) &&
                 (is_nack ? fill_ready[sel] : 1'b1);
  end

  always_comb begin
    creq_ready = '0;
    upg_ready  = '0;
    if (go) begin
      if (sel_upg) upg_ready[sel] = 1'b1;
      else         creq_ready[sel] = 1'b1;
    end
  end

  // --------------------------------------------------------- grant memory
  fc_state_e grant_q [NCORES*MSHRS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCORES * MSHRS; i++) grant_q[i] <= FC_S;
    end else if (go && !sel_upg && !is_nack) begin
      grant_q[int'(sel) * MSHRS + int'(creq_mshr[sel])] <= grant;
    end
  end

  // ------------------------------------------------------------ fill ports
  always_comb begin
    mresp_ready = fill_ready[mresp_core];
    for (int c = 0; c < NCORES; c++) begin
      fill_valid[c] = 1'b0;
      fill_mshr[c]  = mresp_mshr;
      fill[c]       = '{data: mresp_data, level: mresp_level,
                        grant: grant_q[c * MSHRS + int'(mresp_mshr)], nack: 1'b0};
      if (mresp_valid && int'(mresp_core) == c) begin
        fill_valid[c] = 1'b1;
      end else if (go && is_nack && int'(sel) == c) begin
        fill_valid[c] = 1'b1;
        fill_mshr[c]  = creq_mshr[c];
        fill[c]       = '{data: '0, level: LVL_L1, grant: FC_S, nack: 1'b1};
      end
    end
  end

  // ---------------------------------------------------------------- outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q          <= '0;
      mem_valid     <= 1'b0;
      mem_core      <= '0;
      mem_mshr      <= '0;
      mem_paddr     <= '0;
      mem_upgrade   <= 1'b0;
      mem_downgrade <= '0;
      mem_inv       <= '0;
      snoop_valid   <= '0;
      snoop_paddr   <= '0;
      evt_nack      <= 1'b0;
      evt_bcast     <= 1'b0;
      evt_downgrade <= 1'b0;
    end else begin
      if (go) rr_q <= CORE_W'((int'(sel) + 1) % NCORES);
      if (go && fwd) begin
        mem_valid     <= 1'b1;
        mem_core      <= sel;
        mem_mshr      <= sel_upg ? '0 : creq_mshr[sel];
        mem_paddr     <= dir_paddr;
        mem_upgrade   <= sel_upg;
        mem_downgrade <= sel_upg ? '0 : excl_mask;
        mem_inv       <= sel_upg ? others : '0;
      end else if (mem_ready) begin
        mem_valid <= 1'b0;
      end
      snoop_valid   <= (go && sel_upg && !own_excl) ? others : '0;
      if (go && sel_upg && !own_excl) snoop_paddr <= dir_paddr;
      evt_nack      <= go && is_nack;
      evt_bcast     <= go && sel_upg && !own_excl;
      evt_downgrade <= go && !sel_upg && !is_nack && other_excl;
    end
  end

  // ------------------------------------------------------------ assertions
  // a non-speculative request is never refused (forward progress)
  a_no_nack_nonspec : assert property (@(posedge clk) disable iff (!rst_n)
    go && !sel_upg && !creq_spec[sel] |-> !is_nack);
  a_mem_hold : assert property (@(posedge clk) disable iff (!rst_n)
    mem_valid && !mem_ready |=> mem_valid && $stable(mem_paddr));
  a_one_fill : assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(fill_valid));

endmodule
