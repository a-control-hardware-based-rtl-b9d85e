// mem_if_tb -- self-checking test of mem_if with the SDRAM model and a
// small FIFO (16 deep). It writes a program at random instruction
// addresses through the write port and checks the SDRAM contents, then
// prefetches it while a consumer pops the FIFO at random, and checks:
// the order and contents of what arrives, that reading stops after the
// "last" instruction, that the FIFO never overflows, that a restart in
// the middle of a prefetch flushes and restarts from instruction 0, and
// the read bandwidth (one instruction per burst, bursts overlapped).
module mem_if_tb;
  import dpg_pkg::*;
  localparam int IAW = 10, FD = 16, NPROG = 200;
  logic clk = 0, rst_n = 0;
  logic start = 0, primed, prog_read_done;
  logic wr_req = 0, wr_done;
  logic [IAW-1:0] wr_addr = '0;
  instr_t wr_instr = '0;
  logic fifo_flush, fifo_wr_en, fifo_rd_en = 0, fifo_empty, fifo_full;
  instr_t fifo_wr_data, fifo_rd_data;
  logic [$clog2(FD):0] fifo_count;
  logic mem_cmd_valid, mem_cmd_ready, mem_cmd_we, mem_wvalid, mem_wready, mem_rvalid;
  logic [IAW+1:0] mem_cmd_addr;
  logic [15:0] mem_wdata, mem_rdata;
  int checks = 0, failures = 0;
  instr_t prog [NPROG];

  mem_if #(.IADDR_W(IAW), .FIFO_DEPTH(FD), .MAX_OUTST(4), .PRIME_LEVEL(8)) dut (.*);

  instr_fifo #(.WIDTH(64), .DEPTH(FD)) u_fifo (
    .clk, .rst_n, .flush(fifo_flush), .wr_en(fifo_wr_en), .wr_data(fifo_wr_data),
    .rd_en(fifo_rd_en), .rd_data(fifo_rd_data), .empty(fifo_empty), .full(fifo_full),
    .count(fifo_count));

  sdram_model #(.ADDR_W(IAW+2), .MEM_AW(IAW+2), .LAT(8), .REF_PERIOD(300), .REF_LEN0(30)) u_mem (
    .clk, .rst_n, .cmd_valid(mem_cmd_valid), .cmd_ready(mem_cmd_ready), .cmd_we(mem_cmd_we),
    .cmd_addr(mem_cmd_addr), .wvalid(mem_wvalid), .wready(mem_wready), .wdata(mem_wdata),
    .rvalid(mem_rvalid), .rdata(mem_rdata));

  always #2.5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  task automatic write_instr(input int a, input instr_t v);
    @(negedge clk);
    wr_req = 1; wr_addr = IAW'(a); wr_instr = v;
    do @(posedge clk); while (!wr_done);
    @(negedge clk) wr_req = 0;
  endtask

  // pop n instructions at a random rate (or until the FIFO stays empty) and compare
  task automatic consume(input int n, input int rate, output int got);
    int idle;
    got = 0; idle = 0;
    while (got < n && idle < 400) begin
      @(negedge clk);
      fifo_rd_en = 0;
      if (!fifo_empty && ($urandom % rate == 0)) begin
        check(fifo_rd_data == prog[got], $sformatf("prefetched instruction %0d", got));
        fifo_rd_en = 1;
        got++;
        idle = 0;
      end else if (fifo_empty) idle++;
    end
    @(negedge clk) fifo_rd_en = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (fifo_wr_en) begin
      checks++;
      if (fifo_full) begin failures++; $display("FAIL: push into a full FIFO"); end
    end
  end

  int order[NPROG];
  int got, t0, t1;

  initial begin
    for (int i = 0; i < NPROG; i++) begin
      prog[i] = make_instr(i == NPROG - 1, i % 7 == 3, i % 2 == 0, 36'($urandom) + 1,
                           7'($urandom), 16'($urandom));
      prog[i].ctrl[4:3] = 2'($urandom);
      order[i] = i;
    end
    order.shuffle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!primed, "not primed before start");
    // writes in random order, plus junk after the last instruction
    foreach (order[k]) write_instr(order[k], prog[order[k]]);
    for (int i = NPROG; i < NPROG + 20; i++) write_instr(i, instr_t'({$urandom, $urandom}));
    for (int i = 0; i < NPROG; i++) check(u_mem.peek_instr(i) == prog[i], $sformatf("SDRAM word %0d", i));
    // prefetch with a fast consumer, timing the bandwidth
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (primed);
    check(fifo_count >= 8, "primed means PRIME_LEVEL entries");
    repeat (500) @(posedge clk);
    check(fifo_count == FD, "FIFO filled up and held without a consumer");
    t0 = $time;
    consume(NPROG, 1, got);
    t1 = $time;
    check(got == NPROG, $sformatf("whole program prefetched (%0d)", got));
    check(prog_read_done, "read done after last");
    // at most ~6 cycles per instruction with 4-beat bursts and refresh
    check((t1 - t0) / 5000 < (NPROG - FD) * 6, $sformatf("bandwidth: %0d cycles for %0d instructions", (t1 - t0) / 5000, NPROG));
    repeat (50) @(posedge clk);
    check(fifo_empty, "nothing read past the last instruction");
    // restart twice, the second time in the middle with a slow consumer
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (primed);
    consume(37, 3, got);
    check(got == 37, "partial read");
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    @(negedge clk);
    check(!primed, "not primed during restart");
    wait (primed);
    consume(NPROG, 2, got);
    check(got == NPROG, "restart reads again from instruction 0");
    // a write while a prefetch runs still lands in memory
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    write_instr(NPROG + 5, prog[3]);
    check(u_mem.peek_instr(NPROG + 5) == prog[3], "write during prefetch");
    consume(NPROG, 1, got);
    check(got == NPROG, "prefetch unaffected by the write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
