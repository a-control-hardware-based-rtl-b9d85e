// sch_top_tb -- end-to-end test of the control hardware at its default
// parameters (f_i / f_c = 20, FIFO 64 x 512, 8 M-instruction address
// space; the SDRAM model stores the first 16 K instructions).
// The testbench plays the PC (commands on the host byte stream), the
// SDRAM, the RF module's microcontroller, and the Clk and Trg inputs. It
// checks the outputs of the DO, AO and RF modules against the programs
// it loads, with the timing worked out from the intervals:
//   T1 program loaded through the host, run by GO, then run again
//   T2 the break-point sequence of the paper's figure (6, 30, 4 and 4
//      toggles of one DO line, the run resumed by rising Trg edges; the
//      2 ms step and the 20 Hz trigger are scaled down), with the
//      Trg-to-output latency
//   T3 break point resumed by GO in internal-trigger mode
//   T4 ARM and start on Trg; T5 stop after next; T6 stop now
//   T7 SDRAM starved on purpose during a full-rate run: FIFO underrun
//   T8 external master clock
//   T9 RF values preloaded, then an update-only write centred in a DO pulse
//      two MC periods wide (the synchronous RF change)
// Each mechanism is counted and must have happened at least once.
module sch_top_tb;
  import dpg_pkg::*;
  localparam int DIV = 20;
  logic clk = 0, rst_n = 1;
  logic ext_clk_sel = 0, ext_clk = 0, trg = 0, mc_out;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 0;
  logic [7:0] rx_data = 0, tx_data;
  logic mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_wvalid, mem_wready, mem_rvalid;
  logic [24:0] mem_cmd_addr;
  logic [15:0] mem_wdata, mem_rdata;
  sch_bus_t bus;
  run_state_e run_state;
  logic underrun;
  logic [15:0] do_out;
  logic [7:0][15:0] ao_code;
  logic rfo_mcu_clk = 0, rfo_cmd_valid, rfo_cmd_ack = 0, rfo_prog_en, rfo_update_en, rfo_overrun;
  logic [9:0] rfo_lut_index;
  int checks = 0, failures = 0;

  sch_top dut (.*);

  sdram_model #(.ADDR_W(25), .MEM_AW(16)) u_mem (
    .clk, .rst_n, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready), .cmd_we(mem_cmd_we),
    .cmd_addr(mem_cmd_addr), .wvalid(mem_wvalid), .wready(mem_wready), .wdata(mem_wdata),
    .rvalid(mem_rvalid), .rdata(mem_rdata));

  always #2.5ns clk = ~clk;          // f_i = 200 MHz
  always #41ns rfo_mcu_clk = ~rfo_mcu_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  `include "dpg_host_tasks.svh"

  // ---- mechanism counters
  typedef enum int {M_HOST_WRITE, M_PREFETCH, M_FIFO_FULL, M_REFRESH_STALL, M_SW_START,
                    M_EXT_START, M_BP_TRG, M_BP_GO, M_STOP_NEXT, M_STOP_NOW, M_DUMMY,
                    M_LAST, M_RERUN, M_UNDERRUN, M_EXT_CLK, M_AO, M_RFO, M_STATUS4, M_RF_SYNC, M_N} mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"host write", "prefetch", "FIFO full", "SDRAM refresh stall",
    "software start", "external-trigger start", "break resumed by Trg", "break resumed by GO",
    "stop after next", "stop now", "dummy instruction", "last instruction", "re-run",
    "FIFO underrun", "external MC", "AO write", "RFO command", "status in every state",
    "RF preload then synchronous update"};

  // ---- monitors
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  longint do_t[$];
  int     do_v[$];
  logic [15:0] do_prev = 0;
  always @(posedge clk) begin
    if (rst_n && do_out != do_prev) begin do_t.push_back(cyc); do_v.push_back(int'(do_out)); end
    do_prev <= do_out;
    if (rst_n && dut.u_dpg.u_fifo.full) mech[M_FIFO_FULL]++;
    if (rst_n && dut.u_dpg.fifo_wr_en) mech[M_PREFETCH]++;
  end
  longint rfo_stb_t[$];
  always @(posedge clk) if (rst_n && bus.strobe && !$past(bus.strobe) && bus.addr == 7'd16) rfo_stb_t.push_back(cyc);
  int rfo_got[$];
  initial forever begin
    @(posedge rfo_mcu_clk);
    if (rfo_cmd_valid) begin
      rfo_got.push_back(int'({rfo_update_en, rfo_prog_en, rfo_lut_index}));
      repeat (2) @(posedge rfo_mcu_clk);
      @(negedge rfo_mcu_clk) rfo_cmd_ack = 1;
      @(negedge rfo_mcu_clk) rfo_cmd_ack = 0;
    end
  end

  // ---- helpers
  instr_t prog [$];

  task automatic load_host();
    foreach (prog[i]) begin host_write(23'(i), prog[i]); mech[M_HOST_WRITE]++; end
    repeat (20) @(posedge clk);
    foreach (prog[i]) check(u_mem.peek_instr(i) == prog[i], $sformatf("SDRAM holds instruction %0d", i));
    host_cmd("PL");
  endtask

  task automatic load_back();
    foreach (prog[i]) u_mem.poke_instr(i, prog[i]);
    host_cmd("PL");
  endtask

  task automatic wait_idle();
    do @(posedge clk); while (run_state != RS_IDLE);
    repeat (3 * DIV) @(posedge clk);
  endtask

  task automatic go_start();
    int guard;
    guard = 0;
    host_cmd("GO");
    while (run_state == RS_IDLE && guard < 200000) begin @(posedge clk); guard++; end
    check(run_state != RS_IDLE, "run started");
  endtask

  task automatic wait_state(input run_state_e s);
    do @(posedge clk); while (run_state != s);
  endtask

  task automatic expect_status(input logic [1:0] st, input string what, output logic [23:0] cnt);
    logic [7:0] b;
    host_status(b, cnt);
    check(b[1:0] == st, $sformatf("%s: status %0d, expected %0d", what, b[1:0], st));
  endtask

  // expected DO change spacings from the program, starting at instruction i0:
  // sum of intervals between successive strobed writes to the DO address
  task automatic check_do_timing(input string name, input int first_change, input int i0, input int i1);
    int k, acc;
    longint tprev;
    k = first_change; acc = 0; tprev = -1;
    for (int i = i0; i < i1; i++) begin
      acc += (prog[i].interval == 0) ? 1 : int'(prog[i].interval);
      if (prog[i].ctrl[CTRL_STROBE] && prog[i].addr == 7'd0) begin
        if (k < do_t.size()) begin
          if (tprev >= 0)
            check(do_t[k] - tprev == longint'(acc * DIV),
                  $sformatf("%s: DO change %0d after %0d cycles, expected %0d", name, k, do_t[k] - tprev, acc * DIV));
          check(do_v[k] == int'(prog[i].data), $sformatf("%s: DO value %0d", name, k));
          tprev = do_t[k];
        end
        k++; acc = 0;
      end
    end
    check(k <= do_t.size(), $sformatf("%s: %0d DO changes seen, %0d expected", name, do_t.size(), k));
  endtask

  logic [23:0] cnt;
  logic [7:0]  st;
  int n0, nchg;
  longint t_trg;
  logic [15:0] ao_exp [8];

  initial begin
    #1ns rst_n = 0;              // an edge, for the strobe-clocked bus modules
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    expect_status(2'd0, "after reset", cnt);

    // ---- T1: mixed program through the host, software start, then re-run
    $display("T1 at %0t", $time);
    prog.delete();
    prog.push_back(make_instr(0, 0, 1, 36'd3, 7'd0, 16'h0001));
    prog.push_back(make_instr(0, 0, 1, 36'd1, 7'd0, 16'h0002));
    prog.push_back(make_instr(0, 0, 0, 36'd50, 7'd0, 16'hDEAD));   // dummy: no strobe
    prog.push_back(make_instr(0, 0, 1, 36'd2, 7'd0, 16'h0003));
    for (int c = 0; c < 8; c++) begin
      ao_exp[c] = 16'($urandom);
      prog.push_back(make_instr(0, 0, 1, 36'd1, 7'(8 + c), ao_exp[c]));
    end
    prog.push_back(make_instr(0, 0, 1, 36'd1, 7'd16, 16'h0805));    // RF: update, LUT entry 5
    prog.push_back(make_instr(0, 0, 1, 36'd7, 7'd0, 16'h0004));
    prog.push_back(make_instr(1, 0, 1, 36'd1, 7'd0, 16'h0005));     // last
    load_host();
    for (int r = 0; r < 2; r++) begin
      n0 = do_t.size();
      go_start();
      mech[M_SW_START]++;
      wait_idle();
      mech[M_LAST]++;
      if (r == 1) mech[M_RERUN]++;
      check(do_t.size() == n0 + 5, $sformatf("T1: 5 DO writes (%0d)", do_t.size() - n0));
      check_do_timing("T1", n0, 0, prog.size());
      for (int c = 0; c < 8; c++) check(ao_code[c] == ao_exp[c], $sformatf("T1: AO channel %0d", c));
      mech[M_AO] += 8;
      repeat (200) @(posedge clk);
      check(rfo_got.size() == r + 1 && rfo_got[r] == 'h805, "T1: RF command decoded");
      mech[M_RFO]++;
    end
    check(do_t[n0 + 2] - do_t[n0 + 1] == 52 * DIV, "T1: dummy instruction stretched the interval");
    mech[M_DUMMY]++;

    // ---- T2: break points resumed by Trg (external trigger mode)
    $display("T2 at %0t", $time);
    prog.delete();
    begin
      int seg[4] = '{6, 30, 4, 4};
      int n = 0;
      for (int s = 0; s < 4; s++)
        for (int i = 0; i < seg[s]; i++) begin
          n++;
          prog.push_back(make_instr(s == 3 && i == seg[s] - 1, s < 3 && i == seg[s] - 1, 1,
                                    (i == 0 && s > 0) ? 36'd1 : 36'd4, 7'd0, 16'(n & 1)));
        end
    end
    load_host();
    host_cmd("TE");
    n0 = do_t.size();
    host_cmd("GO");                        // TR0: software start
    for (int b = 0; b < 3; b++) begin
      wait_state(RS_BREAK);
      repeat (5 * DIV) @(posedge clk);
      expect_status(2'd3, "T2 at break point", cnt);
      mech[M_STATUS4]++;
      nchg = do_t.size() - n0;
      check(nchg == (b == 0 ? 6 : b == 1 ? 36 : 40), $sformatf("T2: %0d toggles before break %0d", nchg, b + 1));
      check(int'(cnt) == nchg, "T2: status count equals executed instructions");
      repeat (($urandom % 7) + 3) @(posedge clk);
      @(negedge clk) trg = 1;              // TRn: rising edge of the trigger square wave
      t_trg = cyc;
      wait (do_t.size() - n0 > nchg);
      check(do_t[$] - t_trg <= 2 * DIV + DIV / 2 + 5,
            $sformatf("T2: Trg to output latency %0d cycles (at most 2 MC + strobe offset)", do_t[$] - t_trg));
      mech[M_BP_TRG]++;
      repeat (30 * DIV) @(posedge clk);
      @(negedge clk) trg = 0;
    end
    wait_idle();
    check(do_t.size() - n0 == 44, $sformatf("T2: 44 toggles in all (%0d)", do_t.size() - n0));
    check_do_timing("T2 segment 1", n0, 0, 6);

    // ---- T3: internal mode; break point released by GO only
    $display("T3 at %0t", $time);
    host_cmd("TI");
    prog.delete();
    for (int i = 0; i < 10; i++) prog.push_back(make_instr(i == 9, i == 4, 1, 36'd2, 7'd0, 16'(100 + i)));
    load_back();
    n0 = do_t.size();
    host_cmd("GO");
    wait_state(RS_BREAK);
    @(negedge clk) trg = 1;
    repeat (10 * DIV) @(posedge clk);
    @(negedge clk) trg = 0;
    check(run_state == RS_BREAK, "T3: Trg ignored in internal mode");
    host_cmd("GO");
    mech[M_BP_GO]++;
    wait_idle();
    check(do_t.size() - n0 == 10, "T3: all 10 writes");
    check_do_timing("T3 a", n0, 0, 5);
    check_do_timing("T3 b", n0 + 5, 5, 10);

    // ---- T4: arm, status "waiting for trigger", start on Trg
    $display("T4 at %0t", $time);
    host_cmd("TE");
    host_cmd("AR");
    expect_status(2'd1, "T4 armed", cnt);
    expect_status(2'd1, "T4 still armed", cnt);
    n0 = do_t.size();
    @(negedge clk) trg = 1;
    t_trg = cyc;
    wait (do_t.size() > n0);
    check(do_t[n0] - t_trg <= 3 * DIV + DIV / 2 + 5, "T4: started by Trg");
    mech[M_EXT_START]++;
    wait_state(RS_BREAK);
    repeat (3 * DIV) @(posedge clk);
    @(negedge clk) trg = 0;
    check(do_t.size() - n0 == 5, "T4: stops at the break point");
    host_cmd("GO");
    wait_idle();

    // ---- T5: stop after next; T6: stop now
    $display("T5 at %0t", $time);
    host_cmd("TI");
    prog.delete();
    for (int i = 0; i < 300; i++) prog.push_back(make_instr(i == 299, 0, 1, 36'd10, 7'd0, 16'(i)));
    load_back();
    n0 = do_t.size();
    go_start();
    repeat (40 * 10 * DIV) @(posedge clk);
    expect_status(2'd2, "T5 running", cnt);
    mech[M_STATUS4]++;
    host_cmd("SN");
    nchg = do_t.size() - n0;
    wait_idle();
    check(do_t.size() - n0 == nchg + 1, $sformatf("T5: one write after stop-next (%0d, %0d)", nchg, do_t.size() - n0));
    expect_status(2'd0, "T5 idle", cnt);
    mech[M_STOP_NEXT]++;
    n0 = do_t.size();
    go_start();
    repeat (40 * 10 * DIV) @(posedge clk);
    host_cmd("SI");
    check(run_state == RS_IDLE, "T6: idle at once");
    nchg = do_t.size() - n0;
    repeat (30 * 10 * DIV) @(posedge clk);
    check(do_t.size() - n0 == nchg, "T6: no write after stop-now");
    check(nchg > 30 && nchg < 50, "T6: stopped in the middle");
    mech[M_STOP_NOW]++;

    // ---- T7: full rate with a starved SDRAM: underrun
    $display("T7 at %0t", $time);
    prog.delete();
    for (int i = 0; i < 2000; i++) prog.push_back(make_instr(i == 1999, 0, 1, 36'd1, 7'd0, 16'(i & 1)));
    load_back();
    n0 = do_t.size();
    go_start();
    repeat (300 * DIV) @(posedge clk);
    check(!underrun, "T7: full rate sustained while memory serves");
    @(negedge clk) u_mem.hold = 1;
    repeat (700 * DIV) @(posedge clk);
    @(negedge clk) u_mem.hold = 0;
    expect_status(2'd2, "T7 running", cnt);
    check(underrun, "T7: underrun reported");
    host_status(st, cnt);
    check(st[2], "T7: underrun bit in status");
    mech[M_UNDERRUN]++;
    wait_idle();
    check(do_t.size() - n0 == 2000, "T7: every write still done");
    begin
      int gaps = 0;
      for (int i = n0 + 1; i < n0 + 200; i++) check(do_t[i] - do_t[i-1] == DIV, "T7: one write per MC cycle");
      for (int i = n0 + 1; i < do_t.size(); i++) if (do_t[i] - do_t[i-1] > DIV) gaps++;
      check(gaps >= 1, "T7: the underrun shows as a gap");
    end
    check(u_mem.stall_cycles > 0, "refresh stalls happened");
    mech[M_REFRESH_STALL] = int'(u_mem.refreshes);

    // ---- T9: RF values preloaded without update, then an update-only
    // write centred in a 2-MC DO pulse (the synchronous RF change)
    $display("T9 at %0t", $time);
    prog.delete();
    prog.push_back(make_instr(0, 0, 1, 36'd1,  7'd16, 16'h0407));   // program entry 7, no update
    prog.push_back(make_instr(0, 0, 1, 36'd30, 7'd0,  16'h0100));   // DO pulse rises
    prog.push_back(make_instr(0, 0, 1, 36'd1,  7'd16, 16'h0800));   // update only
    prog.push_back(make_instr(1, 0, 1, 36'd1,  7'd0,  16'h0000));   // DO pulse falls
    load_back();
    n0 = do_t.size();
    nchg = rfo_got.size();
    begin
      int ns0;
      ns0 = rfo_stb_t.size();
      go_start();
      wait_idle();
      repeat (200) @(posedge clk);
      check(rfo_got.size() == nchg + 2, $sformatf("T9: two RF commands (%0d)", rfo_got.size() - nchg));
      if (rfo_got.size() == nchg + 2) begin
        check(rfo_got[nchg] == 'h407, "T9: preload command: program, no update");
        check(rfo_got[nchg + 1] == 'h800, "T9: update command: update, no program");
      end
      check(do_t.size() == n0 + 2 && do_t[n0 + 1] - do_t[n0] == 2 * DIV, "T9: DO pulse two MC periods wide");
      check(rfo_stb_t.size() == ns0 + 2 && rfo_stb_t[ns0 + 1] - do_t[n0] >= DIV - 2 && rfo_stb_t[ns0 + 1] - do_t[n0] <= DIV + 2,
            "T9: update strobe one MC period after the DO rise");
      if (rfo_got.size() == nchg + 2 && rfo_got[nchg + 1] == 'h800) mech[M_RF_SYNC]++;
    end

    // ---- T8: external master clock (period 104 ns)
    $display("T8 at %0t", $time);
    ext_clk_sel = 1;
    fork
      begin : ext_gen
        forever begin #52ns ext_clk = ~ext_clk; end
      end
      begin
        repeat (50) @(posedge clk);
        prog.delete();
        for (int i = 0; i < 100; i++) prog.push_back(make_instr(i == 99, 0, 1, 36'd1, 7'd0, 16'((i + 1) & 1)));
        load_back();
        n0 = do_t.size();
        go_start();
        wait_idle();
        check(do_t.size() - n0 == 100, "T8: 100 writes on the external MC");
        check(do_t[n0 + 99] - do_t[n0] >= 99 * 104 / 5 - 2 && do_t[n0 + 99] - do_t[n0] <= 99 * 104 / 5 + 2,
              $sformatf("T8: timing follows the external clock (%0d cycles)", do_t[n0 + 99] - do_t[n0]));
        mech[M_EXT_CLK]++;
      end
    join_any
    disable ext_gen;
    ext_clk_sel = 0;

    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-26s : %0d", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism '%s' exercised", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
