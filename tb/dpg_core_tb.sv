// dpg_core_tb -- test of the master module logic on its own: a program
// loaded through the host stream, run by GO; every bus write is captured
// at the strobe and compared with the program (address, data, MC cycle
// spacing); status replies while running and at the end; a second run
// from an external Trg after ARM.
module dpg_core_tb;
  import dpg_pkg::*;
  localparam int DIV = 20, N = 64;
  logic clk = 0, rst_n = 0;
  logic ext_clk_sel = 0, ext_clk = 0, trg = 0, mc_out;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 0;
  logic [7:0] rx_data = 0, tx_data;
  logic mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_wvalid, mem_wready, mem_rvalid;
  logic [24:0] mem_cmd_addr;
  logic [15:0] mem_wdata, mem_rdata;
  sch_bus_t bus;
  run_state_e run_state;
  logic underrun;
  int checks = 0, failures = 0;

  dpg_core dut (.*);

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

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  longint ev_t[$];
  int ev_a[$], ev_d[$];
  always @(posedge bus.strobe) if (rst_n) begin
    ev_t.push_back(cyc); ev_a.push_back(int'(bus.addr)); ev_d.push_back(int'(bus.data));
  end

  instr_t prog [N];
  logic [7:0] st;
  logic [23:0] cnt;
  int n_first;

  task automatic compare_run(input int first);
    int k, acc;
    k = first; acc = 0;
    for (int i = 0; i < N; i++) begin
      acc += (prog[i].interval == 0) ? 1 : int'(prog[i].interval);
      if (prog[i].ctrl[CTRL_STROBE]) begin
        if (k < ev_t.size()) begin
          check(ev_a[k] == int'(prog[i].addr) && ev_d[k] == int'(prog[i].data), $sformatf("write %0d contents", i));
          if (k > first) check(ev_t[k] - ev_t[k-1] == longint'(acc * DIV), $sformatf("write %0d spacing", i));
        end
        k++; acc = 0;
      end
    end
    check(ev_t.size() == k, $sformatf("number of writes %0d, expected %0d", ev_t.size(), k));
  endtask

  initial begin
    for (int i = 0; i < N; i++)
      prog[i] = make_instr(i == N - 1, 0, (i % 5) != 2, 36'(1 + $urandom % 4), 7'($urandom), 16'($urandom));
    prog[0].ctrl[CTRL_STROBE] = 1;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int i = N - 1; i >= 0; i--) host_write(23'(i), prog[i]);   // reverse order
    host_cmd("PL");
    host_cmd("GO");
    repeat (20 * DIV) @(posedge clk);
    host_status(st, cnt);
    check(st[1:0] == 2'd2, "status running");
    check(cnt > 0 && cnt < N, "instruction count while running");
    do @(posedge clk); while (run_state != RS_IDLE);
    repeat (3 * DIV) @(posedge clk);
    host_status(st, cnt);
    check(st == 8'h00, "status idle after the last instruction");
    compare_run(0);
    n_first = ev_t.size();
    // second run from the external trigger
    host_cmd("TE");
    host_cmd("AR");
    host_status(st, cnt);
    check(st == 8'h09, "status waiting for trigger, external mode");
    repeat (10 * DIV) @(posedge clk);
    check(ev_t.size() == n_first, "nothing before the trigger");
    begin
      @(negedge clk) trg = 1;
      do @(posedge clk); while (run_state != RS_RUNNING);
      do @(posedge clk); while (run_state != RS_IDLE);
      repeat (3 * DIV) @(posedge clk);
      compare_run(n_first);
    end
    check(!underrun, "no underrun");
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
