// flush_ctrl: decides when a core's filter caches and filter TLB are
// cleared. They are cleared on every change of protection domain: a context
// switch, kernel entry (system call, exception or interrupt) and return to
// user mode, and the dedicated flush instruction executed, behind a
// speculation barrier, when execution moves into an isolated region of the
// same process (untrusted script code and its host, say). A process may
// also opt in to clearing on every misspeculation; that per-process bit is
// loaded with the incoming process at each context switch
// (ctx_clear_on_misspec) and held in clear_on_misspec.
// Timing: `flush` is combinational in the cycle of the event, so the valid
// bits are cleared at the next clock edge; a misspeculation in the cycle of a
// context switch uses the outgoing process's setting.
// The events follow the paper; kernel exit as a separate input and the
// combinational timing are this design's own choices.
module flush_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic ctx_switch,
  input  logic ctx_clear_on_misspec,
  input  logic kernel_entry,
  input  logic kernel_exit,
  input  logic region_flush,
  input  logic misspec,
  output logic clear_on_misspec,
  output logic flush
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          clear_on_misspec <= 1'b0;
    else if (ctx_switch) clear_on_misspec <= ctx_clear_on_misspec;
  end

  assign flush = ctx_switch || kernel_entry || kernel_exit || region_flush ||
                 (misspec && clear_on_misspec);
endmodule
