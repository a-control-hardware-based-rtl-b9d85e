// do_module_tb -- self-checking test of the digital output module:
// random bus writes to random addresses; the outputs must take the data
// of writes to the module's address only, at the strobe's rising edge,
// and ignore address/data changes without a strobe.
module do_module_tb;
  import dpg_pkg::*;
  logic rst_n = 1;
  sch_bus_t bus = '0;
  logic [6:0] my_addr = 7'd42;
  logic [15:0] dout, model;
  int checks = 0, failures = 0, hits = 0;

  do_module dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  task automatic write(input logic [6:0] a, input logic [15:0] d);
    bus.addr = a; bus.data = d;
    #50ns bus.strobe = 1;
    #1ns;
    if (a == my_addr) begin model = d; hits++; end
    check(dout == model, "output after strobe edge");
    #49ns bus.strobe = 0;
    bus.data = ~d;          // data changes with strobe low: no effect
    #10ns check(dout == model, "no change without strobe");
  endtask

  initial begin
    #1ns rst_n = 0;
    #9ns rst_n = 1;
    model = 0;
    check(dout == 0, "reset value");
    for (int i = 0; i < 400; i++)
      write(($urandom % 4 == 0) ? my_addr : 7'($urandom), 16'($urandom));
    my_addr = 7'd127;
    for (int i = 0; i < 100; i++)
      write(($urandom % 2 == 0) ? my_addr : 7'($urandom), 16'($urandom));
    check(hits > 50, "enough writes hit the module");
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
