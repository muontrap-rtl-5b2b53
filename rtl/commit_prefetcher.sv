// commit_prefetcher: stride prefetcher of the shared L2, trained only on the
// prefetch commit channel. Filter caches send a notification when a line
// filled from the L2 is first committed, so the prefetcher sees the committed
// access stream and nothing from speculation that is later squashed.
//
// One notification is taken per cycle, round-robin over the sources; any
// other notification in the same cycle is dropped (evt_drop) because the
// channel has no back-pressure. Streams are tracked per 4 KiB physical page
// in a small table (STREAMS entries, round-robin allocation). Each entry
// holds the last line seen and the last line stride; an access whose stride
// repeats the previous one (the third access of a regular stream, and every
// one after it) prefetches one stride ahead, within the page.
// Timing: pf_* is a one-cycle pulse, two cycles after the notification.
// Following the paper: a stride prefetcher at the L2 trained by commit
// notifications. The table organisation, per-page streams, the trigger rule,
// degree 1 and the drop policy are this design's own choices.
module commit_prefetcher
  import muontrap_pkg::*;
#(
  parameter int unsigned NSRC    = 8,
  parameter int unsigned STREAMS = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NSRC-1:0] ntf_valid,
  input  paddr_t          ntf_paddr [NSRC],
  output logic            pf_valid,
  output paddr_t          pf_paddr,
  output logic            evt_drop
);
  localparam int unsigned SW  = (NSRC > 1) ? $clog2(NSRC) : 1;
  localparam int unsigned TW  = (STREAMS > 1) ? $clog2(STREAMS) : 1;
  localparam int unsigned LPP = PAGE_BITS - OFF_BITS;   // line-number bits within a page
  typedef logic [PA_W-PAGE_BITS-1:0] page_t;
  typedef logic signed [LPP:0]       stride_t;

  // ---------------------------------------------------------- arbitration
  logic [SW-1:0] rr_q;
  logic          any;
  logic [SW-1:0] sel;
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = NSRC - 1; i >= 0; i--) begin
      int s;
      s = (int'(rr_q) + i) % NSRC;
      if (ntf_valid[s]) begin
        any = 1'b1;
        sel = SW'(s);
      end
    end
  end

  // stage 1: register the chosen notification
  logic   n_valid_q;
  paddr_t n_paddr_q;

  // ---------------------------------------------------------------- table
  logic [STREAMS-1:0] t_valid_q;
  page_t              t_page_q   [STREAMS];
  logic [LPP-1:0]     t_last_q   [STREAMS];
  stride_t            t_stride_q [STREAMS];
  logic [TW-1:0]      alloc_q;

  page_t          n_page;
  logic [LPP-1:0] n_line;
  logic           t_hit;
  logic [TW-1:0]  t_idx;
  stride_t        delta;
  logic           same_stride;
  logic signed [LPP+1:0] target;
  always_comb begin
    n_page = n_paddr_q[PA_W-1:PAGE_BITS];
    n_line = n_paddr_q[PAGE_BITS-1:OFF_BITS];
    t_hit  = 1'b0;
    t_idx  = '0;
    for (int i = 0; i < STREAMS; i++) begin
      if (t_valid_q[i] && t_page_q[i] == n_page) begin
        t_hit = 1'b1;
        t_idx = TW'(i);
      end
    end
    delta       = stride_t'({1'b0, n_line}) - stride_t'({1'b0, t_last_q[t_idx]});
    same_stride = delta == t_stride_q[t_idx] && delta != '0;
    target      = (LPP+2)'(signed'({2'b00, n_line})) + (LPP+2)'(t_stride_q[t_idx]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q      <= '0;
      n_valid_q <= 1'b0;
      n_paddr_q <= '0;
      t_valid_q <= '0;
      alloc_q   <= '0;
      pf_valid  <= 1'b0;
      pf_paddr  <= '0;
      evt_drop  <= 1'b0;
      for (int i = 0; i < STREAMS; i++) begin
        t_page_q[i]   <= '0;
        t_last_q[i]   <= '0;
        t_stride_q[i] <= '0;
      end
    end else begin
      n_valid_q <= any;
      if (any) begin
        n_paddr_q <= ntf_paddr[sel];
        rr_q      <= SW'((int'(sel) + 1) % NSRC);
      end
      evt_drop <= $countones(ntf_valid) > 1;

      pf_valid <= 1'b0;
      if (n_valid_q) begin
        if (t_hit) begin
          if (delta != '0) begin
            t_last_q[t_idx] <= n_line;
            if (same_stride) begin
              if (target >= 0 && target < (LPP+2)'(2 ** LPP)) begin
                pf_valid <= 1'b1;
                pf_paddr <= {n_page, target[LPP-1:0], {OFF_BITS{1'b0}}};
              end
            end else begin
              t_stride_q[t_idx] <= delta;
            end
          end
        end else begin
          t_valid_q[alloc_q]  <= 1'b1;
          t_page_q[alloc_q]   <= n_page;
          t_last_q[alloc_q]   <= n_line;
          t_stride_q[alloc_q] <= '0;
          alloc_q             <= TW'((32'(alloc_q) + 1) % STREAMS);
        end
      end
    end
  end
endmodule
