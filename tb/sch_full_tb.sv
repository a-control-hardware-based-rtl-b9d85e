// sch_full_tb -- full-size run of the control hardware at its default
// parameters: the burst of the paper's long-sequence measurement. A
// program of 8 M = 2^23 instructions (the whole SDRAM) toggles one DO
// line at every MC cycle (interval 1), so the line is a 5 MHz square wave
// for 2^23 x 100 ns = 0.839 s. Instructions 0 and 2^23-1 are written
// through the host command stream, the others directly into the SDRAM
// model. The test checks that every one of the 2^23 writes reaches the
// DO output exactly one MC cycle after the previous one (the FIFO rides
// over every SDRAM refresh), that no underrun is reported, and the
// status replies while running and at the end.
module sch_full_tb;
  import dpg_pkg::*;
  localparam int DIV = 20;
  localparam longint NI = 64'd1 << 23;
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

  sch_top dut (.*, .rfo_mcu_clk(clk), .rfo_cmd_ack(1'b0));

  sdram_model #(.ADDR_W(25), .MEM_AW(25)) u_mem (
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
    repeat (100000) @(posedge clk);
    host_status(st, cnt);
    check(st[1:0] == 2'd2 && !st[2], "running, no underrun");
    check(cnt > 4000 && cnt < 6000, $sformatf("instruction count %0d after 0.5 ms", cnt));
    do @(posedge clk); while (run_state != RS_IDLE);
    repeat (5 * DIV) @(posedge clk);
    host_status(st, cnt);
    check(st == 8'h00, "idle at the end, no underrun");
    check(n_chg == NI, $sformatf("%0d DO transitions, expected %0d", n_chg, NI));
    check(bad_gap == 0, $sformatf("%0d transitions off the 100 ns grid", bad_gap));
    check(t_last - t_first == (NI - 1) * DIV, $sformatf("burst length %0d cycles", t_last - t_first));
    check(u_mem.refreshes > 50000, $sformatf("%0d SDRAM refreshes absorbed by the FIFO", u_mem.refreshes));
    $display("burst of %0d transitions over %0.6f s, %0d refreshes", n_chg, real'(t_last - t_first) * 5e-9, u_mem.refreshes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1200ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
