// muontrap_top: the speculative-state capture layer of a multicore, the
// part that sits between each core and its conventional L1 caches and TLBs.
//
// For each of NCORES cores it holds:
//   * a data filter cache (coherent) and an instruction filter cache,
//   * an instruction-side and a data-side pair of filter TLB and
//     non-speculative TLB (index 2*core for instructions, 2*core+1 for data),
//   * a flush controller that clears the core's filter caches and filter
//     TLBs together on every protection-domain change.
// Shared by all cores:
//   * the coherence gate (spec_coherence_ctrl) through which every data
//     filter-cache miss and upgrade passes, with a lookup port into the
//     private L1 states and one request port towards the shared level,
//   * the L2 stride prefetcher, fed by the prefetch commit channel of every
//     filter cache (notifications are passed on only for lines that came from
//     the L2, the only level with a prefetcher).
// The cores, the L1 caches, the L2 and the page-table walker are not part of
// this design; their sides of the connections are ports:
//   d_*/i_*        core-side load/commit/store and fetch/commit ports
//   l1d_wt_*       write-through from the data filter cache to the L1D
//   l1i_*          instruction filter-cache misses, fills and write-through
//   dir_*          private L1 state lookup used by the coherence gate
//   mem_*/mresp_*  data filter-cache traffic to and from the shared level
//   tr_*/walk_*/tcm_*/rewalk_*  translation lookups, walk results (a
//                  non-speculative result goes straight to the TLB,
//                  a speculative one to the filter TLB), commits of
//                  instructions that took a TLB miss, and re-walk requests
//   l2_pf_*        prefetches the L2 should perform
// Timing is that of the blocks: 1-cycle filter-cache hits, combinational
// TLB lookups, one-cycle flush.
// The block structure follows the paper's architecture figure (a filter
// cache in front of each of the I-cache, the TLB and the D-cache, and
// prefetch commit channels to the L2); the port protocols, the split of the
// filter TLB per side and walk_ready are this design's own choices.
module muontrap_top
  import muontrap_pkg::*;
#(
  parameter int unsigned NCORES       = 4,
  parameter int unsigned FC_SIZE      = 2048,
  parameter int unsigned FC_WAYS      = 4,
  parameter int unsigned FC_MSHRS     = 4,
  parameter int unsigned FTLB_ENTRIES = 8,
  parameter int unsigned TLB_ENTRIES  = 64,
  parameter int unsigned PF_STREAMS   = 16,
  localparam int unsigned MSHR_W      = (FC_MSHRS > 1) ? $clog2(FC_MSHRS) : 1,
  localparam int unsigned CORE_W      = (NCORES > 1) ? $clog2(NCORES) : 1,
  localparam int unsigned NT          = 2 * NCORES
) (
  input  logic                clk,
  input  logic                rst_n,
  // protection-domain events, per core
  input  logic [NCORES-1:0]   ctx_switch,
  input  logic [NCORES-1:0]   ctx_clear_on_misspec,
  input  logic [NCORES-1:0]   kernel_entry,
  input  logic [NCORES-1:0]   kernel_exit,
  input  logic [NCORES-1:0]   region_flush,
  input  logic [NCORES-1:0]   misspec,
  input  asid_t               asid [NCORES],
  output logic [NCORES-1:0]   flush,
  // data side of each core
  input  logic [NCORES-1:0]   d_req_valid,
  output logic [NCORES-1:0]   d_req_ready,
  input  fc_req_t             d_req [NCORES],
  output logic [NCORES-1:0]   d_resp_valid,
  output fc_resp_t            d_resp [NCORES],
  // instruction side of each core
  input  logic [NCORES-1:0]   i_req_valid,
  output logic [NCORES-1:0]   i_req_ready,
  input  fc_req_t             i_req [NCORES],
  output logic [NCORES-1:0]   i_resp_valid,
  output fc_resp_t            i_resp [NCORES],
  // write-through to each L1D
  output logic [NCORES-1:0]   l1d_wt_valid,
  input  logic [NCORES-1:0]   l1d_wt_ready,
  output fc_wt_t              l1d_wt [NCORES],
  // each L1I
  output logic [NCORES-1:0]   l1i_req_valid,
  input  logic [NCORES-1:0]   l1i_req_ready,
  output paddr_t              l1i_req_paddr [NCORES],
  output logic [MSHR_W-1:0]   l1i_req_mshr  [NCORES],
  output logic [NCORES-1:0]   l1i_req_spec,
  input  logic [NCORES-1:0]   l1i_fill_valid,
  output logic [NCORES-1:0]   l1i_fill_ready,
  input  logic [MSHR_W-1:0]   l1i_fill_mshr [NCORES],
  input  fc_fill_t            l1i_fill      [NCORES],
  output logic [NCORES-1:0]   l1i_wt_valid,
  input  logic [NCORES-1:0]   l1i_wt_ready,
  output fc_wt_t              l1i_wt [NCORES],
  // private L1D state lookup
  output paddr_t              dir_paddr,
  input  mesi_e               dir_state [NCORES],
  // shared level
  output logic                mem_valid,
  input  logic                mem_ready,
  output logic [CORE_W-1:0]   mem_core,
  output logic [MSHR_W-1:0]   mem_mshr,
  output paddr_t              mem_paddr,
  output logic                mem_upgrade,
  output logic [NCORES-1:0]   mem_downgrade,
  output logic [NCORES-1:0]   mem_inv,
  input  logic                mresp_valid,
  output logic                mresp_ready,
  input  logic [CORE_W-1:0]   mresp_core,
  input  logic [MSHR_W-1:0]   mresp_mshr,
  input  line_t               mresp_data,
  input  level_e              mresp_level,
  // L2 prefetches
  output logic                l2_pf_valid,
  output paddr_t              l2_pf_paddr,
  // translation, index 2*core (instruction) and 2*core+1 (data)
  input  vpn_t                tr_vpn [NT],
  output logic [NT-1:0]       tr_hit,
  output xlate_t              tr_x   [NT],
  input  logic [NT-1:0]       walk_valid,
  output logic [NT-1:0]       walk_ready,
  input  logic [NT-1:0]       walk_nonspec,
  input  xlate_t              walk_x [NT],
  input  logic [NT-1:0]       tcm_valid,
  input  vpn_t                tcm_vpn [NT],
  output logic [NT-1:0]       rewalk_valid,
  output vpn_t                rewalk_vpn [NT],
  input  logic [NCORES-1:0]   tlb_flush_all,
  // events
  output logic                evt_nack,
  output logic                evt_bcast,
  output logic                evt_downgrade,
  output logic                evt_pf_drop
);

  // data filter cache <-> coherence gate
  logic [NCORES-1:0] dc_mreq_valid, dc_mreq_ready, dc_mreq_spec;
  paddr_t            dc_mreq_paddr [NCORES];
  logic [MSHR_W-1:0] dc_mreq_mshr  [NCORES];
  logic [NCORES-1:0] dc_fill_valid, dc_fill_ready;
  logic [MSHR_W-1:0] dc_fill_mshr  [NCORES];
  fc_fill_t          dc_fill       [NCORES];
  logic [NCORES-1:0] dc_upg_valid, dc_upg_ready;
  paddr_t            dc_upg_paddr  [NCORES];
  logic [NCORES-1:0] dc_snoop_valid;
  paddr_t            dc_snoop_paddr;

  // prefetch commit channel: sources 2*core (instruction) and 2*core+1 (data)
  logic [NT-1:0]     ntf_valid;
  paddr_t            ntf_paddr [NT];

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    logic   d_pf_valid, i_pf_valid;
    paddr_t d_pf_paddr, i_pf_paddr;
    level_e d_pf_level, i_pf_level;
    logic   i_upg_valid;
    paddr_t i_upg_paddr;
    logic   clear_on_misspec;

    flush_ctrl u_flush (
      .clk, .rst_n,
      .ctx_switch           (ctx_switch[c]),
      .ctx_clear_on_misspec (ctx_clear_on_misspec[c]),
      .kernel_entry         (kernel_entry[c]),
      .kernel_exit          (kernel_exit[c]),
      .region_flush         (region_flush[c]),
      .misspec              (misspec[c]),
      .clear_on_misspec     (clear_on_misspec),
      .flush                (flush[c])
    );

    filter_cache #(
      .SIZE_BYTES (FC_SIZE), .WAYS (FC_WAYS), .MSHRS (FC_MSHRS), .COHERENT (1'b1)
    ) u_fdcache (
      .clk, .rst_n,
      .flush       (flush[c]),
      .req_valid   (d_req_valid[c]),
      .req_ready   (d_req_ready[c]),
      .req         (d_req[c]),
      .resp_valid  (d_resp_valid[c]),
      .resp        (d_resp[c]),
      .mreq_valid  (dc_mreq_valid[c]),
      .mreq_ready  (dc_mreq_ready[c]),
      .mreq_paddr  (dc_mreq_paddr[c]),
      .mreq_mshr   (dc_mreq_mshr[c]),
      .mreq_spec   (dc_mreq_spec[c]),
      .fill_valid  (dc_fill_valid[c]),
      .fill_ready  (dc_fill_ready[c]),
      .fill_mshr   (dc_fill_mshr[c]),
      .fill        (dc_fill[c]),
      .wt_valid    (l1d_wt_valid[c]),
      .wt_ready    (l1d_wt_ready[c]),
      .wt          (l1d_wt[c]),
      .upg_valid   (dc_upg_valid[c]),
      .upg_ready   (dc_upg_ready[c]),
      .upg_paddr   (dc_upg_paddr[c]),
      .snoop_valid (dc_snoop_valid[c]),
      .snoop_paddr (dc_snoop_paddr),
      .pf_valid    (d_pf_valid),
      .pf_paddr    (d_pf_paddr),
      .pf_level    (d_pf_level)
    );

    // Instruction filter cache: read-only, so no coherence traffic; its
    // snoop port is unused and its upgrade port never fires.
    filter_cache #(
      .SIZE_BYTES (FC_SIZE), .WAYS (FC_WAYS), .MSHRS (FC_MSHRS), .COHERENT (1'b0)
    ) u_ficache (
      .clk, .rst_n,
      .flush       (flush[c]),
      .req_valid   (i_req_valid[c]),
      .req_ready   (i_req_ready[c]),
      .req         (i_req[c]),
      .resp_valid  (i_resp_valid[c]),
      .resp        (i_resp[c]),
      .mreq_valid  (l1i_req_valid[c]),
      .mreq_ready  (l1i_req_ready[c]),
      .mreq_paddr  (l1i_req_paddr[c]),
      .mreq_mshr   (l1i_req_mshr[c]),
      .mreq_spec   (l1i_req_spec[c]),
      .fill_valid  (l1i_fill_valid[c]),
      .fill_ready  (l1i_fill_ready[c]),
      .fill_mshr   (l1i_fill_mshr[c]),
      .fill        (l1i_fill[c]),
      .wt_valid    (l1i_wt_valid[c]),
      .wt_ready    (l1i_wt_ready[c]),
      .wt          (l1i_wt[c]),
      .upg_valid   (i_upg_valid),
      .upg_ready   (1'b1),
      .upg_paddr   (i_upg_paddr),
      .snoop_valid (1'b0),
      .snoop_paddr ('0),
      .pf_valid    (i_pf_valid),
      .pf_paddr    (i_pf_paddr),
      .pf_level    (i_pf_level)
    );

    assign ntf_valid[2*c]   = i_pf_valid && i_pf_level == LVL_L2;
    assign ntf_paddr[2*c]   = i_pf_paddr;
    assign ntf_valid[2*c+1] = d_pf_valid && d_pf_level == LVL_L2;
    assign ntf_paddr[2*c+1] = d_pf_paddr;

    // translation: instruction side (s = 0) and data side (s = 1)
    for (genvar s = 0; s < 2; s++) begin : g_side
      localparam int T = 2 * c + s;
      logic   f_hit, m_hit, mv_valid;
      xlate_t f_x, m_x, mv_x;

      filter_tlb #(.ENTRIES (FTLB_ENTRIES)) u_ftlb (
        .clk, .rst_n,
        .flush      (flush[c]),
        .lk_vpn     (tr_vpn[T]),
        .lk_hit     (f_hit),
        .lk_x       (f_x),
        .fill_valid (walk_valid[T] && !walk_nonspec[T]),
        .fill_x     (walk_x[T]),
        .cm_valid   (tcm_valid[T]),
        .cm_vpn     (tcm_vpn[T]),
        .mv_valid   (mv_valid),
        .mv_x       (mv_x),
        .rw_valid   (rewalk_valid[T]),
        .rw_vpn     (rewalk_vpn[T])
      );

      tlb #(.ENTRIES (TLB_ENTRIES)) u_tlb (
        .clk, .rst_n,
        .flush_all  (tlb_flush_all[c]),
        .asid       (asid[c]),
        .lk_vpn     (tr_vpn[T]),
        .lk_hit     (m_hit),
        .lk_x       (m_x),
        .ins_valid  (mv_valid || (walk_valid[T] && walk_nonspec[T])),
        .ins_x      (mv_valid ? mv_x : walk_x[T])
      );

      // a move from the filter TLB takes the TLB write port first
      assign walk_ready[T] = !(walk_nonspec[T] && mv_valid);
      assign tr_hit[T]     = f_hit || m_hit;
      assign tr_x[T]       = m_hit ? m_x : f_x;
    end
  end

  spec_coherence_ctrl #(.NCORES (NCORES), .MSHRS (FC_MSHRS)) u_coh (
    .clk, .rst_n,
    .creq_valid    (dc_mreq_valid),
    .creq_ready    (dc_mreq_ready),
    .creq_paddr    (dc_mreq_paddr),
    .creq_mshr     (dc_mreq_mshr),
    .creq_spec     (dc_mreq_spec),
    .upg_valid     (dc_upg_valid),
    .upg_ready     (dc_upg_ready),
    .upg_paddr     (dc_upg_paddr),
    .fill_valid    (dc_fill_valid),
    .fill_ready    (dc_fill_ready),
    .fill_mshr     (dc_fill_mshr),
    .fill          (dc_fill),
    .snoop_valid   (dc_snoop_valid),
    .snoop_paddr   (dc_snoop_paddr),
    .dir_paddr, .dir_state,
    .mem_valid, .mem_ready, .mem_core, .mem_mshr, .mem_paddr, .mem_upgrade,
    .mem_downgrade, .mem_inv,
    .mresp_valid, .mresp_ready, .mresp_core, .mresp_mshr, .mresp_data, .mresp_level,
    .evt_nack, .evt_bcast, .evt_downgrade
  );

  commit_prefetcher #(.NSRC (NT), .STREAMS (PF_STREAMS)) u_l2pf (
    .clk, .rst_n,
    .ntf_valid,
    .ntf_paddr,
    .pf_valid  (l2_pf_valid),
    .pf_paddr  (l2_pf_paddr),
    .evt_drop  (evt_pf_drop)
  );

endmodule
