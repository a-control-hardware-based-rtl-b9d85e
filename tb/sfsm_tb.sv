// sfsm_tb -- self-checking test of the MC-synchronous sequencer.
// The testbench makes the MC ticks itself (DIV = 20 f_i cycles per MC
// cycle), feeds instructions from an array standing in for the FIFO and
// records every strobe: the MC cycle it belongs to, its address, data and
// width. The expected MC cycle of every write is worked out from the
// intervals and from the MC cycles at which the run was started or
// resumed. Scenarios: software start, ARM + Trg start, break points
// resumed by Trg (external mode) and by GO (internal mode, where Trg must
// be ignored), stop after next, stop now, FIFO underrun, GO held until
// the FIFO is primed, and a full-rate run of one instruction per MC cycle.
module sfsm_tb;
  import dpg_pkg::*;
  localparam int DIV = 20;
  logic clk = 0, rst_n = 0;
  logic mc_rise = 0, mc_fall = 0, trg_pending = 0, ext_mode = 0;
  logic cmd_go = 0, cmd_arm = 0, cmd_stop_next = 0, cmd_stop_now = 0, primed = 1;
  instr_t fifo_rd_data;
  logic fifo_empty, fifo_rd_en;
  sch_bus_t bus;
  run_state_e run_state;
  logic [23:0] instr_count;
  logic underrun, run_end;
  int checks = 0, failures = 0;

  sfsm #(.CNT_W(24)) dut (.*);

  always #2.5ns clk = ~clk;

  // MC tick generator and tick counter
  int phase = 0, mct = 0;
  always @(posedge clk) begin
    phase <= (phase == DIV - 1) ? 0 : phase + 1;
    mc_rise <= (phase == DIV - 1);
    mc_fall <= (phase == DIV / 2 - 1);
    if (mc_rise) mct <= mct + 1;
    if (mc_rise) trg_pending <= 1'b0;
  end

  // instruction source standing in for the FIFO
  instr_t src [1024];
  int rd_i = 0, wr_i = 0;
  logic starve = 0;
  assign fifo_empty   = (rd_i == wr_i) || starve;
  assign fifo_rd_data = src[rd_i % 1024];
  always @(posedge clk) if (fifo_rd_en) rd_i <= rd_i + 1;

  // strobe monitor
  int ev_tick[$], ev_addr[$], ev_data[$];
  int hi_cycles = 0, n_runend = 0;
  always @(posedge clk) begin
    if (bus.strobe) hi_cycles <= hi_cycles + 1;
    if (run_end) n_runend <= n_runend + 1;
  end
  always @(posedge bus.strobe) begin
    ev_tick.push_back(mct); ev_addr.push_back(int'(bus.addr)); ev_data.push_back(int'(bus.data));
    hi_cycles = 0;
  end
  always @(negedge bus.strobe) if (rst_n) begin
    checks++;
    if (hi_cycles != DIV / 2) begin failures++; $display("FAIL: strobe width %0d cycles at %0t", hi_cycles, $time); end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t (tick %0d)", what, $time, mct); end
  endtask

  // wait until the middle of an MC cycle; returns the tick index of the next MC rise
  task automatic mid_cycle(output int next_tick);
    do @(negedge clk); while (phase != DIV / 2 - 5);
    next_tick = mct + 1;
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk) s = 1;
    @(negedge clk) s = 0;
  endtask

  task automatic trig();
    @(negedge clk) trg_pending = 1;
  endtask

  task automatic wait_ticks(input int n);
    repeat (n * DIV) @(posedge clk);
  endtask

  instr_t prog [$];
  int starts [$];   // MC tick of start and of each resume

  task automatic load(input instr_t p [$]);
    rd_i = 0; wr_i = 0;
    foreach (p[k]) begin src[k] = p[k]; wr_i++; end
    ev_tick.delete(); ev_addr.delete(); ev_data.delete();
    starts.delete();
  endtask

  function automatic int iv(input instr_t i);
    return (i.interval == 0) ? 1 : int'(i.interval);
  endfunction

  // compare recorded strobes with the schedule implied by the program,
  // executing instructions [0, n_exec)
  task automatic compare(input string name, input int n_exec);
    int t, seg, k;
    k = 0; seg = 0; t = starts[0];
    for (int i = 0; i < n_exec; i++) begin
      t += iv(prog[i]);
      if (prog[i].ctrl[CTRL_STROBE]) begin
        if (k < ev_tick.size()) begin
          check(ev_tick[k] == t, $sformatf("%s: instr %0d at MC %0d, expected %0d", name, i, ev_tick[k], t));
          check(ev_addr[k] == int'(prog[i].addr) && ev_data[k] == int'(prog[i].data),
                $sformatf("%s: instr %0d address/data", name, i));
        end
        k++;
      end
      if (prog[i].ctrl[CTRL_BREAK] && seg + 1 < starts.size()) begin
        seg++; t = starts[seg];
      end
    end
    check(k == ev_tick.size(), $sformatf("%s: %0d strobes, expected %0d", name, ev_tick.size(), k));
  endtask

  function automatic instr_t rnd_instr(input bit last, input bit brk);
    instr_t i;
    int r = $urandom % 5;
    i = make_instr(last, brk, ($urandom % 5) != 0, (r == 4) ? 36'd5 : 36'(r), 7'($urandom), 16'($urandom));
    return i;
  endfunction

  int nt, n0, re0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait_ticks(2);
    check(run_state == RS_IDLE, "idle after reset");

    // A: software start, random intervals including 0 and dummies
    prog.delete();
    for (int i = 0; i < 30; i++) prog.push_back(rnd_instr(i == 29, 0));
    load(prog);
    re0 = n_runend;
    mid_cycle(nt); starts.push_back(nt);
    pulse(cmd_go);
    wait_ticks(2);
    check(run_state == RS_RUNNING, "A: running");
    wait (run_state == RS_IDLE);
    wait_ticks(3);
    compare("A", 30);
    check(instr_count == 30, "A: executed count");
    check(n_runend == re0 + 1, "A: one run_end");
    check(!underrun, "A: no underrun");

    // B: break points resumed by Trg in external mode; a Trg while running is ignored
    ext_mode = 1;
    prog.delete();
    for (int i = 0; i < 16; i++) prog.push_back(rnd_instr(i == 15, i == 4 || i == 9));
    prog[5].interval = 1;  // first instruction after a break: worst-case latency 2 MC
    load(prog);
    mid_cycle(nt); starts.push_back(nt);
    pulse(cmd_go);
    wait_ticks(1); trig();           // ignored while running
    for (int b = 0; b < 2; b++) begin
      wait (run_state == RS_BREAK);
      wait_ticks(1);
      n0 = ev_tick.size();
      wait_ticks(3 + $urandom % 4);
      check(run_state == RS_BREAK && ev_tick.size() == n0, "B: halted at break point");
      mid_cycle(nt); starts.push_back(nt);
      trig();
      wait_ticks(1);
      @(negedge clk);
      check(run_state == RS_RUNNING, "B: resumed by Trg");
    end
    wait (run_state == RS_IDLE);
    wait_ticks(3);
    compare("B", 16);
    // latency after the first break: instruction 5 has interval 1
    check(ev_tick.size() > 0, "B: events");

    // C: internal mode: Trg does not release a break point, GO does
    ext_mode = 0;
    prog.delete();
    for (int i = 0; i < 8; i++) prog.push_back(rnd_instr(i == 7, i == 2));
    load(prog);
    mid_cycle(nt); starts.push_back(nt);
    pulse(cmd_go);
    wait (run_state == RS_BREAK);
    mid_cycle(nt); trig();
    wait_ticks(4);
    check(run_state == RS_BREAK, "C: Trg ignored in internal mode");
    mid_cycle(nt); starts.push_back(nt);
    pulse(cmd_go);
    wait (run_state == RS_IDLE);
    wait_ticks(3);
    compare("C", 8);

    // D: stop after the next instruction
    prog.delete();
    for (int i = 0; i < 40; i++) prog.push_back(make_instr(i == 39, 0, 1, 36'd3, 7'd5, 16'(i)));
    load(prog);
    mid_cycle(nt); starts.push_back(nt);
    pulse(cmd_go);
    wait (ev_tick.size() == 10);
    wait_ticks(1);
    re0 = n_runend;
    pulse(cmd_stop_next);
    wait_ticks(8);
    check(run_state == RS_IDLE, "D: idle after stop-next");
    check(ev_tick.size() == 11, $sformatf("D: exactly one more write (%0d)", ev_tick.size()));
    check(n_runend == re0 + 1, "D: run_end");
    compare("D", 11);

    // E: immediate stop
    load(prog);
    mid_cycle(nt); starts.push_back(nt);
    pulse(cmd_go);
    wait (ev_tick.size() == 6);
    wait_ticks(1);
    mid_cycle(nt);
    pulse(cmd_stop_now);
    @(negedge clk);
    check(run_state == RS_IDLE && !bus.strobe, "E: idle at once");
    wait_ticks(10);
    check(ev_tick.size() == 6, "E: no write after stop-now");

    // F: ARM, then start on Trg; one instruction per MC cycle
    prog.delete();
    for (int i = 0; i < 50; i++) prog.push_back(make_instr(i == 49, 0, 1, 36'd1, 7'd1, 16'(i & 1)));
    load(prog);
    pulse(cmd_arm);
    wait_ticks(3);
    check(run_state == RS_WAIT_TRG, "F: waiting for trigger");
    mid_cycle(nt); starts.push_back(nt);
    trig();
    wait (run_state == RS_IDLE);
    wait_ticks(3);
    compare("F", 50);
    check(ev_tick.size() == 50 && ev_tick[49] - ev_tick[0] == 49, "F: full rate, one write per MC cycle");

    // G: FIFO underrun: sequencer waits, flags it, then goes on in order
    prog.delete();
    for (int i = 0; i < 20; i++) prog.push_back(make_instr(i == 19, 0, 1, 36'd1, 7'd2, 16'(100 + i)));
    load(prog);
    mid_cycle(nt);
    pulse(cmd_go);
    wait (ev_tick.size() == 5);
    starve = 1;
    wait_ticks(5);
    check(underrun, "G: underrun flagged");
    check(run_state == RS_RUNNING, "G: still running");
    starve = 0;
    wait (run_state == RS_IDLE);
    wait_ticks(3);
    check(ev_tick.size() == 20, "G: all writes done");
    for (int i = 0; i < ev_tick.size(); i++) check(ev_data[i] == 100 + i, "G: order kept");

    // H: GO waits for primed
    prog.delete();
    for (int i = 0; i < 4; i++) prog.push_back(make_instr(i == 3, 0, 1, 36'd2, 7'd3, 16'(i)));
    load(prog);
    primed = 0;
    pulse(cmd_go);
    wait_ticks(5);
    check(run_state == RS_IDLE && ev_tick.size() == 0, "H: no start before primed");
    mid_cycle(nt); starts.push_back(nt);
    primed = 1;
    wait (run_state == RS_IDLE && ev_tick.size() == 4);
    wait_ticks(2);
    compare("H", 4);
    check(!underrun, "H: underrun cleared at start");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
