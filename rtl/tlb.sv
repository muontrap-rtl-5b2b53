// tlb: the non-speculative, fully associative TLB (64 entries in the
// evaluated system). It only receives translations of committed
// instructions: entries moved from the filter TLB at commit and results of
// non-speculative walks (ins_*). Entries carry the address-space ID, so
// unlike the filter TLB it need not be emptied on a context switch; a
// separate flush_all input serves the usual TLB maintenance.
// Timing: lookup is combinational; an insertion takes effect at the next
// clock edge and replaces an entry for the same page and ASID, else a free
// entry, else the round-robin victim.
// The size and organisation follow the paper's configuration; ASID tagging
// and replacement are this design's own choices.
module tlb
  import muontrap_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   flush_all,
  input  asid_t  asid,
  input  vpn_t   lk_vpn,
  output logic   lk_hit,
  output xlate_t lk_x,
  input  logic   ins_valid,
  input  xlate_t ins_x
);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] valid_q;
  xlate_t             ent_q  [ENTRIES];
  asid_t              asid_q [ENTRIES];
  logic [IW-1:0]      rr_q;

  always_comb begin
    lk_hit = 1'b0;
    lk_x   = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && ent_q[i].vpn == lk_vpn && asid_q[i] == asid) begin
        lk_hit = 1'b1;
        lk_x   = ent_q[i];
      end
    end
  end

  logic          i_same;
  logic [IW-1:0] i_idx;
  always_comb begin
    i_same = 1'b0;
    i_idx  = rr_q;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid_q[i]) i_idx = IW'(i);
    end
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && ent_q[i].vpn == ins_x.vpn && asid_q[i] == asid) begin
        i_same = 1'b1;
        i_idx  = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rr_q    <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        ent_q[i]  <= '0;
        asid_q[i] <= '0;
      end
    end else begin
      if (ins_valid) begin
        valid_q[i_idx] <= 1'b1;
        ent_q[i_idx]   <= ins_x;
        asid_q[i_idx]  <= asid;
        if (!i_same) rr_q <= IW'((32'(i_idx) + 1) % ENTRIES);
      end
      if (flush_all) valid_q <= '0;
    end
  end
endmodule
