// tb_flush_ctrl: self-checking test of the flush decision. Every
// protection-domain event must raise flush in its own cycle; a
// misspeculation raises it only for a process that opted in at its
// context switch.
module tb_flush_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ctx_switch, ctx_clear_on_misspec, kernel_entry, kernel_exit, region_flush, misspec;
  logic clear_on_misspec, flush;
  flush_ctrl dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask
  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic pulse(input int which, input bit exp, input string what);
    @(negedge clk);
    {ctx_switch, kernel_entry, kernel_exit, region_flush, misspec} = 5'b10000 >> which;
    #1 check(flush == exp, what);
    @(negedge clk);
    {ctx_switch, kernel_entry, kernel_exit, region_flush, misspec} = '0;
    #1 check(!flush, "flush is a single-cycle pulse");
  endtask
  initial begin
    {ctx_switch, kernel_entry, kernel_exit, region_flush, misspec} = '0;
    ctx_clear_on_misspec = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); #1 check(!flush, "idle");
    pulse(4, 0, "misspeculation ignored by default");
    pulse(1, 1, "kernel entry flushes");
    pulse(2, 1, "kernel exit flushes");
    pulse(3, 1, "region-switch flush instruction flushes");
    ctx_clear_on_misspec = 1;
    pulse(0, 1, "context switch flushes");
    check(clear_on_misspec, "per-process option loaded at context switch");
    ctx_clear_on_misspec = 0;
    pulse(4, 1, "misspeculation flushes when enabled");
    pulse(4, 1, "still enabled for this process");
    pulse(0, 1, "context switch to a process without the option");
    pulse(4, 0, "misspeculation ignored again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
