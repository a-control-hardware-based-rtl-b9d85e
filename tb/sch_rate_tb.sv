// sch_rate_tb -- full-rate run of the control hardware with a faster
// master clock: f_c = f_i / 5 = 40 MHz instead of 10 MHz. The original
// bandwidth estimate (8 bytes per instruction against a much faster SDRAM
// port) says f_c up to at least 40 MHz should work; this test checks it
// for this design's memory interface and FIFO. A program of 2^17
// instructions toggles one DO line at every MC cycle (interval 1), with
// the SDRAM model refreshing every 7.8 us as in the full-size run. The
// instructions are placed in the SDRAM model directly, except the first
// and last, which go through the host command stream. Checks: every
// write reaches the DO output exactly 5 f_i cycles after the previous
// one, the total count, no underrun, and that refreshes did happen.
// Only DIV is changed from the defaults; the memory model is reduced to
// the program's size.
module sch_rate_tb;
  import dpg_pkg::*;
  localparam int DIV = 5;
  localparam longint NI = 64'd1 << 17;
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
  logic rfo_cmd_valid, rfo_prog_en, rfo_update_en, rfo_overrun;
  logic [9:0] rfo_lut_index;
  int checks = 0, failures = 0;

  sch_top #(.DIV(DIV)) dut (.*, .rfo_mcu_clk(clk), .rfo_cmd_ack(1'b0));

  sdram_model #(.ADDR_W(25), .MEM_AW(19)) u_mem (
    .clk, .rst_n, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready), .cmd_we(mem_cmd_we),
    .cmd_addr(mem_cmd_addr), .wvalid(mem_wvalid), .wready(mem_wready), .wdata(mem_wdata),
    .rvalid(mem_rvalid), .rdata(mem_rdata));

  always #2.5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  `include "dpg_host_tasks.svh"

  function automatic instr_t prog(input longint i);
    return make_instr(i == NI - 1, 0, 1, 36'd1, 7'd0, 16'(i & 1 ? 0 : 1));
  endfunction

  longint cyc = 0, n_chg = 0, t_first = -1, t_last = -1, bad_gap = 0;
  logic [15:0] do_prev = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && do_out != do_prev) begin
      if (t_last >= 0 && cyc - t_last != DIV) bad_gap <= bad_gap + 1;
      if (t_first < 0) t_first <= cyc;
      t_last <= cyc;
      n_chg  <= n_chg + 1;
    end
    do_prev <= do_out;
  end

  logic [7:0] st;
  logic [23:0] cnt;

  initial begin
    #1ns rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (longint i = 1; i < NI - 1; i++) u_mem.poke_instr(i, prog(i));
    host_write(23'd0, prog(0));
    host_write(23'(NI - 1), prog(NI - 1));
    repeat (20) @(posedge clk);
    check(u_mem.peek_instr(0) == prog(0) && u_mem.peek_instr(NI - 1) == prog(NI - 1), "host writes landed");
    host_cmd("PL");
    host_cmd("GO");
    do @(posedge clk); while (run_state != RS_RUNNING);
    do @(posedge clk); while (run_state != RS_IDLE);
    repeat (5 * DIV) @(posedge clk);
    host_status(st, cnt);
    check(st == 8'h00, "idle at the end, no underrun");
    check(n_chg == NI, $sformatf("%0d DO transitions, expected %0d", n_chg, NI));
    check(bad_gap == 0, $sformatf("%0d transitions off the 25 ns grid", bad_gap));
    check(t_last - t_first == (NI - 1) * DIV, $sformatf("burst length %0d cycles", t_last - t_first));
    check(u_mem.refreshes > 300, $sformatf("%0d SDRAM refreshes absorbed by the FIFO", u_mem.refreshes));
    $display("burst of %0d transitions at 40 MHz over %0.6f s, %0d refreshes", n_chg, real'(t_last - t_first) * 5e-9, u_mem.refreshes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
