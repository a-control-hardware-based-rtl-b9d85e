// instr_fifo_tb -- self-checking test of instr_fifo at its default size
// (64 x 512): random pushes and pops against a queue model, a fill to
// full, a drain to empty and a flush.
module instr_fifo_tb;
  localparam int W = 64, D = 512;
  logic clk = 0, rst_n = 0, flush = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [$clog2(D):0] count;
  logic [W-1:0] model[$];
  int checks = 0, failures = 0;

  instr_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #2.5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // one cycle: optional push / pop, then compare with the model
  task automatic step(input bit push, input bit pop);
    logic [W-1:0] d;
    d = {$urandom, $urandom};
    @(negedge clk);
    wr_en = push && !full;
    rd_en = pop && !empty;
    wr_data = d;
    if (rd_en) begin
      check(model.size() > 0 && rd_data == model[0], "head data");
    end
    @(posedge clk);
    #0.1ns;
    if (rd_en) void'(model.pop_front());
    if (wr_en) model.push_back(d);
    wr_en = 0; rd_en = 0;
    check(count == model.size(), "count");
    check(empty == (model.size() == 0), "empty flag");
    check(full == (model.size() == D), "full flag");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) step($urandom % 3 != 0, $urandom % 2 == 0);
    while (!full) step(1, 0);
    check(count == D, "filled to 512");
    step(1, 0);               // push when full is ignored by the caller
    for (int i = 0; i < 2000; i++) step($urandom % 2 == 0, $urandom % 3 != 0);
    while (!empty) step(0, 1);
    for (int i = 0; i < 100; i++) step(1, $urandom % 4 == 0);
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    model.delete();
    check(empty && count == 0, "flush empties");
    for (int i = 0; i < 200; i++) step($urandom % 2 == 0, $urandom % 2 == 0);
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
