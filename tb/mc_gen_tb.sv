// mc_gen_tb -- self-checking test of mc_gen.
// Internal source: MC ticks must come every DIV f_i cycles, the falling
// tick DIV - DIV/2 cycles after the rising one. External source: every edge of
// an asynchronous 10 MHz-like Clk must give exactly one tick, 3 f_i cycles
// after the edge. A second instance with DIV = 5 checks the odd divider
// (rise every 5 cycles, fall 3 cycles after the rise).
module mc_gen_tb;
  localparam int DIV = 20;
  logic clk = 0, rst_n = 0, ext_sel = 0, ext_clk = 0;
  logic mc_out, mc_rise, mc_fall;
  int checks = 0, failures = 0;
  int cyc = 0;

  mc_gen #(.DIV(DIV)) dut (.*);

  // a second instance with an odd divider (40 MHz MC): high 3, low 2 cycles
  localparam int DIV5 = 5;
  logic mc5_out, mc5_rise, mc5_fall;
  mc_gen #(.DIV(DIV5)) dut5 (.clk, .rst_n, .ext_sel(1'b0), .ext_clk(1'b0),
                             .mc_out(mc5_out), .mc_rise(mc5_rise), .mc_fall(mc5_fall));

  always #2.5ns clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  int last_rise = -1, last_fall = -1, n_rise = 0, n_fall = 0;
  int r5 = -1, n5 = 0;
  always @(posedge clk) begin
    if (rst_n && mc5_rise) begin
      if (r5 >= 0) check(cyc - r5 == DIV5, "odd divider rise period");
      r5 = cyc; n5++;
    end
    if (rst_n && mc5_fall && r5 >= 0) check(cyc - r5 == DIV5 - DIV5/2, "odd divider fall position");
  end
  int ext_edges = 0;
  int ext_edge_cyc[$];
  logic phase_ext = 0;

  always @(posedge clk) begin
    if (rst_n && mc_rise) begin
      if (!phase_ext && last_rise >= 0) check(cyc - last_rise == DIV, "internal MC rise period");
      if (phase_ext && ext_edge_cyc.size() > 0) begin
        check(cyc - ext_edge_cyc[0] == 3 || cyc - ext_edge_cyc[0] == 4, "external rise latency");
        void'(ext_edge_cyc.pop_front());
      end
      check(mc_out == 1'b1, "mc_out high after rise");
      last_rise = cyc; n_rise++;
    end
    if (rst_n && mc_fall) begin
      if (!phase_ext && last_rise >= 0) check(cyc - last_rise == DIV - DIV/2, "internal MC fall position");
      if (phase_ext && ext_edge_cyc.size() > 0) begin
        check(cyc - ext_edge_cyc[0] == 3 || cyc - ext_edge_cyc[0] == 4, "external fall latency");
        void'(ext_edge_cyc.pop_front());
      end
      check(!(mc_rise && mc_fall), "no double tick");
      last_fall = cyc; n_fall++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40 * DIV) @(posedge clk);
    check(n_rise >= 39 && n_rise <= 41, $sformatf("internal rise count %0d", n_rise));
    check(n_fall >= 39 && n_fall <= 41, "internal fall count");
    check(n5 >= 40 * DIV / DIV5 - 1 && n5 <= 40 * DIV / DIV5 + 1, $sformatf("odd divider rise count %0d", n5));
    // switch to an external clock of period 101 ns, not locked to clk
    ext_sel = 1;
    repeat (10) @(posedge clk);
    phase_ext = 1;
    n_rise = 0; n_fall = 0;
    for (int i = 0; i < 60; i++) begin
      #50.5ns;
      @(negedge clk);
      ext_clk = ~ext_clk;
      ext_edge_cyc.push_back(cyc);
      ext_edges++;
    end
    repeat (10) @(posedge clk);
    check(n_rise + n_fall == ext_edges, $sformatf("one tick per external edge (%0d vs %0d)", n_rise + n_fall, ext_edges));
    check(n_rise == ext_edges / 2, "external rise count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
