// sch_bp_tb -- the break-point sequence at its original sizes, with the
// control hardware at its default parameters. One DO line commutes every
// 2 ms (20000 MC cycles); the program has break points after 6, 30 and 4
// commutations and ends after 4 more, 44 instructions in all. It is
// started by software (GO, at "TR0") with the trigger source set to
// external, and each break point is released by the next rising edge of
// a 20 Hz square wave on Trg. The first instruction of every segment has
// interval 1, so it executes at the MC edge after the one that saw the
// trigger. The Trg phase (first rising edge 17.3 ms after GO, not on the
// MC grid) is this test's choice; one Trg edge falls while the sequence
// is running and must not release the next break point.
// Checks: 44 commutations; 20000 MC cycles between commutations inside a
// segment; the status (break point, executed count 6, 36, 40) at each
// break; each resume within 2 MC cycles (plus the 3-cycle input
// synchronizer) of the Trg edge that released it; that resume comes from
// the first Trg edge after the break; and idle at the end.
module sch_bp_tb;
  import dpg_pkg::*;
  localparam int DIV = 20;
  localparam int STEP = 20000;              // 2 ms in MC cycles
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

  sdram_model #(.ADDR_W(25), .MEM_AW(12)) u_mem (
    .clk, .rst_n, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready), .cmd_we(mem_cmd_we),
    .cmd_addr(mem_cmd_addr), .wvalid(mem_wvalid), .wready(mem_wready), .wdata(mem_wdata),
    .rvalid(mem_rvalid), .rdata(mem_rdata));

  always #2.5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  `include "dpg_host_tasks.svh"

  // f_i cycle counter, commutation times on the bus, Trg rising edges
  longint cyc = 0;
  longint ex_t[$];
  longint trg_t[$];
  logic [15:0] data_prev = 0;
  logic trg_q = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && bus.data != data_prev) ex_t.push_back(cyc);
    data_prev <= bus.data;
  end
  always @(posedge trg) trg_t.push_back(cyc);

  // 20 Hz square wave, first rising edge 17.3 ms after it is enabled
  bit trg_on = 0;
  initial begin
    wait (trg_on);
    #17.3ms;
    #37.1ns;
    forever begin
      trg = 1; #25ms;
      trg = 0; #25ms;
    end
  end

  int seg[4] = '{6, 30, 4, 4};
  logic [7:0] st;
  logic [23:0] cnt;

  initial begin
    int n, first;
    #1ns rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    n = 0;
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < seg[s]; i++) begin
        host_write(23'(n), make_instr(s == 3 && i == seg[s] - 1, s < 3 && i == seg[s] - 1, 1,
                                      (i == 0) ? 36'd1 : 36'(STEP), 7'd0, 16'((n + 1) & 1)));
        n++;
      end
    host_cmd("PL");
    host_cmd("TE");
    repeat (2000) @(posedge clk);
    host_cmd("GO");                          // TR0
    trg_on = 1;
    first = 0;
    for (int b = 0; b < 3; b++) begin
      first += seg[b];
      while (run_state == RS_BREAK) @(posedge clk);
      do @(posedge clk); while (run_state != RS_BREAK);
      host_status(st, cnt);
      check(st[1:0] == 2'd3 && st[3], $sformatf("BP%0d: status %h", b + 1, st));
      check(cnt == 24'(first), $sformatf("BP%0d: executed count %0d, expected %0d", b + 1, cnt, first));
      $display("BP%0d at %0.3f ms", b + 1, real'(cyc) * 5e-6);
    end
    do @(posedge clk); while (run_state != RS_IDLE);
    repeat (4 * DIV) @(posedge clk);
    host_status(st, cnt);
    check(st == 8'h08, $sformatf("idle at the end (status %h)", st));
    check(ex_t.size() == 44, $sformatf("%0d commutations, expected 44", ex_t.size()));
    if (ex_t.size() == 44) begin
      int k = 0;
      for (int s = 0; s < 4; s++) begin
        // spacing inside the segment
        for (int i = 1; i < seg[s]; i++)
          check(ex_t[k + i] - ex_t[k + i - 1] == longint'(STEP) * DIV,
                $sformatf("segment %0d step %0d: %0d cycles", s, i, ex_t[k + i] - ex_t[k + i - 1]));
        if (s > 0) begin
          // released by the first Trg edge after the break point
          longint tb, tr, lat;
          tb = ex_t[k - 1];
          tr = -1;
          foreach (trg_t[j]) if (tr < 0 && trg_t[j] > tb) tr = trg_t[j];
          lat = ex_t[k] - tr;
          check(tr >= 0 && lat > 0 && lat <= 2 * DIV + 3,
                $sformatf("TR%0d: resume %0d f_i cycles after the Trg edge", s, lat));
          $display("TR%0d at %0.3f ms, resumed %0d ns later", s, real'(tr) * 5e-6, lat * 5);
        end
        k += seg[s];
      end
      $display("sequence from %0.3f ms to %0.3f ms", real'(ex_t[0]) * 5e-6, real'(ex_t[43]) * 5e-6);
    end
    check(trg_t.size() >= 4, "a Trg edge fell inside a running segment");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
