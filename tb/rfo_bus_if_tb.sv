// rfo_bus_if_tb -- self-checking test of the RF module's bus interface.
// A bus write to the module's address must raise cmd_valid on the
// microcontroller clock within 4 of its cycles, with the word decoded
// into LUT index, program and update bits; cmd_ack clears it; writes to
// other addresses do nothing; a write before the acknowledge sets overrun.
module rfo_bus_if_tb;
  import dpg_pkg::*;
  logic rst_n = 1, mcu_clk = 0, cmd_ack = 0;
  sch_bus_t bus = '0;
  logic [6:0] my_addr = 7'd16;
  logic cmd_valid, prog_en, update_en, overrun;
  logic [9:0] lut_index;
  int checks = 0, failures = 0;

  rfo_bus_if dut (.*);

  always #31ns mcu_clk = ~mcu_clk;   // unrelated to the bus timing

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  task automatic write(input logic [6:0] a, input logic [15:0] d);
    bus.addr = a; bus.data = d;
    #50ns bus.strobe = 1;
    #50ns bus.strobe = 0;
  endtask

  task automatic ack();
    @(negedge mcu_clk) cmd_ack = 1;
    @(negedge mcu_clk) cmd_ack = 0;
  endtask

  logic [15:0] d;
  int lat;

  initial begin
    #1ns rst_n = 0;
    #9ns rst_n = 1;
    #200ns;
    check(!cmd_valid && !overrun, "idle after reset");
    for (int i = 0; i < 40; i++) begin
      d = 16'($urandom);
      write(7'(my_addr + 1 + $urandom % 100), ~d);   // other address
      repeat (6) @(posedge mcu_clk);
      check(!cmd_valid, "other address ignored");
      write(my_addr, d);
      lat = 0;
      while (!cmd_valid && lat < 10) begin @(posedge mcu_clk); lat++; end
      check(cmd_valid && lat <= 4, $sformatf("command seen in %0d MCU cycles", lat));
      check(lut_index == d[9:0] && prog_en == d[10] && update_en == d[11], "decoded fields");
      ack();
      @(posedge mcu_clk); #1ns;
      check(!cmd_valid, "cleared by acknowledge");
    end
    check(!overrun, "no overrun with acknowledged commands");
    write(my_addr, 16'h0401);
    repeat (6) @(posedge mcu_clk);
    write(my_addr, 16'h0802);
    repeat (6) @(posedge mcu_clk);
    check(overrun, "overrun when a command is replaced before acknowledge");
    check(lut_index == 10'h002 && update_en && !prog_en, "latest command kept");
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
