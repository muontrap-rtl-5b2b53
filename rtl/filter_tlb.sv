// filter_tlb: small fully associative TLB that holds translations produced
// by speculative page-table walks, so they never displace entries of the
// non-speculative TLB.
//
// A speculative walk result is written here (fill_*), replacing an entry
// with the same page, else a free entry, else the round-robin victim. The
// core looks up this TLB and the main TLB in parallel (lk_*, combinational).
// When an instruction whose translation missed in the main TLB commits
// (cm_*), the entry, if still present, is moved to the main TLB (mv_*) and
// dropped from here, and in every case a non-speculative re-walk is
// requested (rw_*): the re-walk touches the page-table lines again as
// committed accesses, so the filter cache writes them through to the L1.
// `flush` clears every entry in one cycle, like the filter caches.
// Timing: lookups are combinational; mv_* and rw_* are one-cycle pulses the
// cycle after the commit, without back-pressure.
// Following the paper: speculative translations kept apart, moved at
// commit, re-translation at commit, cleared with the filter caches. This
// design's own choices: the entry count (the paper gives none), the
// replacement policy and the pulse interface.
module filter_tlb
  import muontrap_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   flush,
  // lookup
  input  vpn_t   lk_vpn,
  output logic   lk_hit,
  output xlate_t lk_x,
  // speculative walk result
  input  logic   fill_valid,
  input  xlate_t fill_x,
  // commit of an instruction that took a TLB miss
  input  logic   cm_valid,
  input  vpn_t   cm_vpn,
  // move to the non-speculative TLB
  output logic   mv_valid,
  output xlate_t mv_x,
  // non-speculative re-walk request
  output logic   rw_valid,
  output vpn_t   rw_vpn
);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] valid_q;
  xlate_t             ent_q [ENTRIES];
  logic [IW-1:0]      rr_q;

  always_comb begin
    lk_hit = 1'b0;
    lk_x   = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && ent_q[i].vpn == lk_vpn) begin
        lk_hit = 1'b1;
        lk_x   = ent_q[i];
      end
    end
  end

  // commit lookup
  logic          cm_hit;
  logic [IW-1:0] cm_idx;
  always_comb begin
    cm_hit = 1'b0;
    cm_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && ent_q[i].vpn == cm_vpn) begin
        cm_hit = 1'b1;
        cm_idx = IW'(i);
      end
    end
  end

  // fill slot: same page, else free, else round-robin
  logic          f_same;
  logic [IW-1:0] f_idx;
  always_comb begin
    f_same = 1'b0;
    f_idx  = rr_q;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid_q[i]) f_idx = IW'(i);
    end
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && ent_q[i].vpn == fill_x.vpn) begin
        f_same = 1'b1;
        f_idx  = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q  <= '0;
      rr_q     <= '0;
      mv_valid <= 1'b0;
      mv_x     <= '0;
      rw_valid <= 1'b0;
      rw_vpn   <= '0;
      for (int i = 0; i < ENTRIES; i++) ent_q[i] <= '0;
    end else begin
      mv_valid <= cm_valid && cm_hit && !flush;
      rw_valid <= cm_valid;
      if (cm_valid) begin
        mv_x   <= ent_q[cm_idx];
        rw_vpn <= cm_vpn;
      end
      if (fill_valid) begin
        valid_q[f_idx] <= 1'b1;
        ent_q[f_idx]   <= fill_x;
        if (!f_same) rr_q <= IW'((32'(f_idx) + 1) % ENTRIES);
      end
      if (cm_valid && cm_hit && !(fill_valid && f_idx == cm_idx)) valid_q[cm_idx] <= 1'b0;
      if (flush) valid_q <= '0;
    end
  end
endmodule
