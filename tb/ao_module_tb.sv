// ao_module_tb -- self-checking test of the 8-channel analog output
// module's bus side: random writes over the whole address space; only
// the 8 addresses base..base+7 change a channel code, each its own.
module ao_module_tb;
  import dpg_pkg::*;
  logic rst_n = 1;
  sch_bus_t bus = '0;
  logic [6:0] base_addr = 7'd24;
  logic [7:0][15:0] code, model;
  int checks = 0, failures = 0, hits = 0;

  ao_module #(.NCH(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  task automatic write(input logic [6:0] a, input logic [15:0] d);
    bus.addr = a; bus.data = d;
    #50ns bus.strobe = 1;
    #1ns;
    if (a >= base_addr && a < base_addr + 8) begin model[a - base_addr] = d; hits++; end
    check(code == model, "channel codes after write");
    #49ns bus.strobe = 0;
  endtask

  initial begin
    #1ns rst_n = 0;
    #9ns rst_n = 1;
    model = '0;
    check(code == '0, "reset value");
    for (int i = 0; i < 600; i++)
      write(($urandom % 2 == 0) ? base_addr + 7'($urandom % 8) : 7'($urandom), 16'($urandom));
    base_addr = 7'd120;
    model = code;
    for (int i = 0; i < 200; i++)
      write(($urandom % 2 == 0) ? base_addr + 7'($urandom % 8) : 7'($urandom), 16'($urandom));
    check(hits > 300, "enough writes hit the module");
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
