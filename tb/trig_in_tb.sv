// trig_in_tb -- self-checking test of trig_in.
// A one-f_i-cycle Trg pulse must set trg_pending 3 cycles later; the flag
// must stay until the next MC tick and then clear; a Trg level held high
// must not set it again; an edge landing on a tick is kept for the next.
module trig_in_tb;
  logic clk = 0, rst_n = 0, trg = 0, mc_rise = 0, trg_pending;
  int checks = 0, failures = 0;

  trig_in dut (.*);

  always #2.5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  task automatic tick();
    @(negedge clk) mc_rise = 1;
    @(negedge clk) mc_rise = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!trg_pending, "idle after reset");
    for (int n = 0; n < 20; n++) begin
      int wait_c = 1 + ($urandom % 10);
      // short pulse
      @(negedge clk) trg = 1;
      @(negedge clk) trg = 0;
      // after the rising edge of clk that samples it, 3 cycles to the flag
      @(negedge clk);
      check(!trg_pending, "not yet after 2 cycles");
      @(negedge clk);
      check(trg_pending, "pending 3 cycles after the pulse");
      repeat (wait_c) @(negedge clk);
      check(trg_pending, "held until MC tick");
      tick();
      check(!trg_pending, "cleared by MC tick");
    end
    // level held high: only one edge
    @(negedge clk) trg = 1;
    repeat (5) @(negedge clk);
    check(trg_pending, "edge of long pulse");
    tick();
    repeat (20) @(negedge clk);
    check(!trg_pending, "no re-trigger while Trg stays high");
    @(negedge clk) trg = 0;
    repeat (5) @(negedge clk);
    check(!trg_pending, "falling edge ignored");
    // edge detected in the same cycle as a tick: kept
    @(negedge clk) trg = 1;
    @(negedge clk);
    @(negedge clk) mc_rise = 1;   // edge_det is high in the next clk edge
    @(negedge clk) mc_rise = 0;
    check(trg_pending, "edge coinciding with tick is kept");
    tick();
    check(!trg_pending, "then consumed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
