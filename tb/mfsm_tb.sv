// mfsm_tb -- self-checking test of the host command interpreter.
// Sends every command as a byte stream with random gaps, and checks the
// control pulses and the trigger mode, the decoded write request (address
// and instruction, most significant byte first) with a late wr_done, the
// status reply in each of the four run states (1 byte, or 4 with the
// instruction count), reply back-pressure, and that an unknown command
// is dropped without disturbing the next one.
module mfsm_tb;
  import dpg_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 0;
  logic [7:0] rx_data = 0, tx_data;
  logic ext_mode, cmd_go, cmd_arm, cmd_stop_next, cmd_stop_now, prefetch_start;
  logic wr_req, wr_done = 0;
  logic [22:0] wr_addr;
  instr_t wr_instr;
  run_state_e run_state = RS_IDLE;
  logic [23:0] instr_count = 0;
  logic underrun = 0;
  int checks = 0, failures = 0;

  mfsm #(.IADDR_W(23), .CNT_W(24)) dut (.*);

  always #2.5ns clk = ~clk;

  int n_go = 0, n_arm = 0, n_sn = 0, n_si = 0, n_pl = 0;
  always @(posedge clk) if (rst_n) begin
    n_go <= n_go + int'(cmd_go);
    n_arm <= n_arm + int'(cmd_arm);
    n_sn <= n_sn + int'(cmd_stop_next);
    n_si <= n_si + int'(cmd_stop_now);
    n_pl <= n_pl + int'(prefetch_start);
  end

  // memory side: answer a write request after a few cycles
  logic [22:0] last_addr;
  instr_t last_instr;
  int n_wr = 0;
  initial forever begin
    @(posedge clk);
    if (wr_req) begin
      last_addr = wr_addr; last_instr = wr_instr;
      repeat (3 + $urandom % 5) @(posedge clk);
      @(negedge clk) wr_done = 1;
      @(negedge clk) wr_done = 0;
      n_wr++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  task automatic send(input logic [7:0] b);
    repeat ($urandom % 3) @(negedge clk);
    @(negedge clk);
    rx_valid = 1; rx_data = b;
    do @(posedge clk); while (!rx_ready);
    @(negedge clk) rx_valid = 0;
  endtask

  task automatic send_cmd(input string s);
    send(8'(s[0])); send(8'(s[1]));
    repeat (3) @(posedge clk);
  endtask

  task automatic recv(output logic [7:0] b);
    int guard = 0;
    @(negedge clk);
    repeat ($urandom % 4) @(negedge clk);   // back-pressure
    tx_ready = 1;
    do begin @(posedge clk); guard++; end while (!tx_valid && guard < 100);
    b = tx_data;
    @(negedge clk) tx_ready = 0;
  endtask

  task automatic status(input run_state_e st, input logic [23:0] cnt, input bit ur,
                        input bit exp_ext);
    logic [7:0] b;
    run_state = st; instr_count = cnt; underrun = ur;
    send_cmd("RS");
    recv(b);
    check(b == {4'b0, exp_ext, ur, st}, $sformatf("status byte %02x in state %0d", b, st));
    if (st == RS_RUNNING || st == RS_BREAK) begin
      recv(b); check(b == cnt[23:16], "count byte 2");
      recv(b); check(b == cnt[15:8],  "count byte 1");
      recv(b); check(b == cnt[7:0],   "count byte 0");
    end
    repeat (5) @(posedge clk);
    check(!tx_valid, "no extra reply bytes");
  endtask

  logic [22:0] a;
  logic [63:0] v;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(!ext_mode, "internal trigger after reset");
    send_cmd("TE"); check(ext_mode, "TE selects external trigger");
    send_cmd("TI"); check(!ext_mode, "TI selects internal trigger");
    send_cmd("GO"); check(n_go == 1, "GO pulse");
    send_cmd("AR"); check(n_arm == 1, "AR pulse");
    send_cmd("SN"); check(n_sn == 1, "SN pulse");
    send_cmd("SI"); check(n_si == 1, "SI pulse");
    send_cmd("PL"); check(n_pl == 1, "PL pulse");
    check(n_go == 1 && n_arm == 1 && n_sn == 1 && n_si == 1, "each pulse exactly once");
    // unknown command, then a valid one
    send_cmd("XY");
    send_cmd("GO"); check(n_go == 2, "command after unknown one");
    // writes
    for (int k = 0; k < 20; k++) begin
      a = 23'($urandom);
      v = {$urandom, $urandom};
      send("W"); send("I");
      send({1'b0, a[22:16]}); send(a[15:8]); send(a[7:0]);
      for (int j = 7; j >= 0; j--) send(v[8*j +: 8]);
      wait (n_wr == k + 1);
      check(last_addr == a, "write address");
      check(last_instr == instr_t'(v), "write instruction");
    end
    check(n_go == 2, "write data bytes not taken as commands");
    // status in every state
    status(RS_IDLE, 24'h000000, 0, 0);
    status(RS_WAIT_TRG, 24'h000010, 0, 0);
    status(RS_RUNNING, 24'h12_34_56, 0, 0);
    status(RS_BREAK, 24'h80_00_01, 1, 0);
    send_cmd("TE");
    status(RS_RUNNING, 24'h7F_FF_FF, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
