// tb_spec_coherence_ctrl: self-checking test of the filter-cache coherence
// gate with four cores. The testbench sets the private-L1 states seen by the
// lookup port directly and checks, for each case, the outcome the coherence
// rules require: SE when no other L1 holds the line, S when one shares it,
// NACK for a speculative request to a line M/E elsewhere, a downgrade mask
// for the same request made non-speculatively, a constant broadcast of
// invalidates for an upgrade not exclusive in the own L1 and none when it
// is, grant replay on the fill, round-robin service and blocking while the
// shared level answers.
module tb_spec_coherence_ctrl;
  import muontrap_pkg::*;

  localparam int N = 4;
  localparam int M = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] creq_valid, creq_ready, creq_spec;
  paddr_t       creq_paddr [N];
  logic [1:0]   creq_mshr  [N];
  logic [N-1:0] upg_valid, upg_ready;
  paddr_t       upg_paddr [N];
  logic [N-1:0] fill_valid, fill_ready;
  logic [1:0]   fill_mshr [N];
  fc_fill_t     fill [N];
  logic [N-1:0] snoop_valid;
  paddr_t       snoop_paddr, dir_paddr;
  mesi_e        dir_state [N];
  logic         mem_valid, mem_ready, mem_upgrade;
  logic [1:0]   mem_core, mem_mshr;
  paddr_t       mem_paddr;
  logic [N-1:0] mem_downgrade, mem_inv;
  logic         mresp_valid, mresp_ready;
  logic [1:0]   mresp_core, mresp_mshr;
  line_t        mresp_data;
  level_e       mresp_level;
  logic         evt_nack, evt_bcast, evt_downgrade;

  spec_coherence_ctrl #(.NCORES(N), .MSHRS(M)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // counters
  int n_mem = 0, n_nack_fill = 0, n_fill = 0, n_bcast = 0, n_evt_nack = 0, n_evt_dg = 0;
  logic [1:0] last_mem_core, last_mem_mshr;
  logic last_mem_upg;
  logic [N-1:0] last_dg, last_inv, last_snoop;
  paddr_t last_mem_pa;
  fc_fill_t last_fill;
  int last_fill_core;
  logic [1:0] last_fill_mshr;
  int serve_order[$];
  always @(posedge clk) if (rst_n) begin
    if (mem_valid && mem_ready) begin
      n_mem++; last_mem_core = mem_core; last_mem_mshr = mem_mshr; last_mem_upg = mem_upgrade;
      last_dg = mem_downgrade; last_inv = mem_inv; last_mem_pa = mem_paddr;
    end
    for (int c = 0; c < N; c++) begin
      if (fill_valid[c] && fill_ready[c]) begin
        n_fill++; last_fill = fill[c]; last_fill_core = c; last_fill_mshr = fill_mshr[c];
        if (fill[c].nack) n_nack_fill++;
      end
      if (creq_valid[c] && creq_ready[c]) serve_order.push_back(c);
    end
    if (|snoop_valid) begin n_bcast++; last_snoop = snoop_valid; end
    if (evt_nack) n_evt_nack++;
    if (evt_downgrade) n_evt_dg++;
  end

  task automatic set_dir(input mesi_e s0, s1, s2, s3);
    dir_state[0] = s0; dir_state[1] = s1; dir_state[2] = s2; dir_state[3] = s3;
  endtask

  task automatic miss(input int c, input paddr_t pa, input logic [1:0] m, input bit spec);
    @(negedge clk);
    creq_valid[c] = 1'b1; creq_paddr[c] = pa; creq_mshr[c] = m; creq_spec[c] = spec;
    do @(posedge clk); while (!creq_ready[c]);
    @(negedge clk);
    creq_valid[c] = 1'b0;
  endtask

  task automatic upgrade(input int c, input paddr_t pa);
    @(negedge clk);
    upg_valid[c] = 1'b1; upg_paddr[c] = pa;
    do @(posedge clk); while (!upg_ready[c]);
    @(negedge clk);
    upg_valid[c] = 1'b0;
  endtask

  task automatic respond(input int c, input logic [1:0] m, input level_e lv);
    @(negedge clk);
    mresp_valid = 1'b1; mresp_core = 2'(c); mresp_mshr = m; mresp_level = lv;
    mresp_data = {16{32'(c) ^ 32'hC0FFEE00 ^ 32'(m)}};
    do @(posedge clk); while (!mresp_ready);
    @(negedge clk);
    mresp_valid = 1'b0;
  endtask

  initial begin
    int m0, f0, b0;
    creq_valid = '0; creq_spec = '0; upg_valid = '0; fill_ready = '1; mem_ready = 1'b1;
    mresp_valid = 1'b0; mresp_core = '0; mresp_mshr = '0; mresp_data = '0; mresp_level = LVL_L2;
    for (int c = 0; c < N; c++) begin creq_paddr[c] = '0; creq_mshr[c] = '0; upg_paddr[c] = '0; end
    set_dir(MESI_I, MESI_I, MESI_I, MESI_I);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. line in no private L1: SE
    m0 = n_mem;
    miss(0, 40'h1000, 2'd1, 1'b1);
    @(negedge clk);
    check(n_mem == m0 + 1 && last_mem_core == 0 && last_mem_mshr == 1 && !last_mem_upg, "miss forwarded");
    check(last_mem_pa == 40'h1000 && last_dg == '0, "forward address, no downgrade");
    respond(0, 2'd1, LVL_MEM);
    check(last_fill_core == 0 && last_fill_mshr == 1 && last_fill.grant == FC_SE && !last_fill.nack,
          "grant SE when no other L1 holds the line");
    check(last_fill.level == LVL_MEM && last_fill.data[31:0] == (32'hC0FFEE00 ^ 32'd1), "fill data routed");

    // 2. shared in another L1: S
    set_dir(MESI_I, MESI_I, MESI_S, MESI_I);
    miss(0, 40'h2000, 2'd2, 1'b1);
    respond(0, 2'd2, LVL_L2);
    check(last_fill.grant == FC_S, "grant S when another L1 shares");
    // own L1 shared only: still SE (no other private cache)
    set_dir(MESI_S, MESI_I, MESI_I, MESI_I);
    miss(0, 40'h2040, 2'd3, 1'b1);
    respond(0, 2'd3, LVL_L1);
    check(last_fill.grant == FC_SE, "own copy does not prevent SE");

    // 3. speculative request to a line M in another L1: NACK, nothing forwarded
    set_dir(MESI_I, MESI_M, MESI_I, MESI_I);
    m0 = n_mem; f0 = n_nack_fill; b0 = n_evt_nack;
    miss(0, 40'h3000, 2'd0, 1'b1);
    @(negedge clk);
    check(n_mem == m0 && n_nack_fill == f0 + 1 && last_fill_core == 0 && last_fill_mshr == 0, "speculative M elsewhere is NACKed");
    check(n_evt_nack == b0 + 1, "nack event");
    set_dir(MESI_I, MESI_I, MESI_I, MESI_E);
    miss(1, 40'h3040, 2'd2, 1'b1);
    @(negedge clk);
    check(n_nack_fill == f0 + 2 && last_fill_core == 1, "speculative E elsewhere is NACKed");

    // 4. the same request made non-speculatively: forwarded with downgrade
    set_dir(MESI_I, MESI_E, MESI_I, MESI_I);
    m0 = n_mem; b0 = n_evt_dg;
    miss(0, 40'h3000, 2'd0, 1'b0);
    @(negedge clk);
    check(n_mem == m0 + 1 && last_dg == 4'b0010, "non-speculative request downgrades the E owner");
    check(n_evt_dg == b0 + 1, "downgrade event");
    respond(0, 2'd0, LVL_L1);
    check(last_fill.grant == FC_S && !last_fill.nack, "granted S after downgrade");

    // 5. upgrade not exclusive in own L1: broadcast to every other filter cache
    set_dir(MESI_I, MESI_I, MESI_I, MESI_S);
    b0 = n_bcast; m0 = n_mem;
    upgrade(3, 40'h4000);
    @(negedge clk);
    check(n_bcast == b0 + 1 && last_snoop == 4'b0111 && snoop_paddr == 40'h4000, "upgrade broadcasts invalidates");
    check(n_mem == m0 + 1 && last_mem_upg && last_inv == 4'b0111, "upgrade forwarded with invalidate mask");
    // same broadcast when nobody else has it (constant-time)
    set_dir(MESI_I, MESI_I, MESI_I, MESI_I);
    upgrade(2, 40'h4040);
    @(negedge clk);
    check(n_bcast == b0 + 2 && last_snoop == 4'b1011, "broadcast independent of other contents");

    // 6. upgrade already exclusive in own L1: nothing
    set_dir(MESI_I, MESI_I, MESI_I, MESI_M);
    b0 = n_bcast; m0 = n_mem;
    upgrade(3, 40'h5000);
    repeat (2) @(negedge clk);
    check(n_bcast == b0 && n_mem == m0, "exclusive upgrade needs no broadcast");

    // 7. round robin between two cores
    set_dir(MESI_I, MESI_I, MESI_I, MESI_I);
    serve_order.delete();
    @(negedge clk);
    creq_valid[2] = 1'b1; creq_paddr[2] = 40'h6000; creq_mshr[2] = 2'd0; creq_spec[2] = 1'b1;
    creq_valid[3] = 1'b1; creq_paddr[3] = 40'h7000; creq_mshr[3] = 2'd0; creq_spec[3] = 1'b1;
    while (serve_order.size() < 2) begin
      @(posedge clk);
      #1;
      for (int c = 2; c < 4; c++) if (serve_order.size() > 0 && serve_order[serve_order.size()-1] == c) creq_valid[c] = 1'b0;
    end
    @(negedge clk);
    creq_valid = '0;
    check(serve_order.size() == 2 && serve_order[0] != serve_order[1], "both cores served once");

    // 8. a response from the shared level blocks new requests that cycle
    @(negedge clk);
    mresp_valid = 1'b1; mresp_core = 2'd2; mresp_mshr = 2'd0;
    creq_valid[1] = 1'b1; creq_paddr[1] = 40'h8000; creq_mshr[1] = 2'd1; creq_spec[1] = 1'b1;
    #1;
    check(creq_ready[1] == 1'b0 && fill_valid[2], "request waits while a response is delivered");
    @(negedge clk);
    mresp_valid = 1'b0;
    #1;
    check(creq_ready[1] == 1'b1, "request taken next cycle");
    @(negedge clk);
    creq_valid = '0;
    respond(3, 2'd0, LVL_L2);
    respond(1, 2'd1, LVL_L2);

    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
