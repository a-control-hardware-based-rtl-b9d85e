// dpg_host_tasks.svh -- host-side tasks for testbenches of the pattern
// generator: they play the PC and USB bridge, sending commands on the
// rx byte stream and reading replies from the tx stream. The including
// module must declare clk, rx_valid, rx_data, rx_ready, tx_valid,
// tx_data, tx_ready and a check(ok, what) task.

task automatic host_send(input logic [7:0] b);
  @(negedge clk);
  rx_valid = 1; rx_data = b;
  do @(posedge clk); while (!rx_ready);
  @(negedge clk) rx_valid = 0;
endtask

task automatic host_cmd(input string s);
  host_send(8'(s[0]));
  host_send(8'(s[1]));
  repeat (2) @(posedge clk);
endtask

// "WI": write one instruction at instruction address a
task automatic host_write(input logic [22:0] a, input logic [63:0] v);
  host_send("W"); host_send("I");
  host_send({1'b0, a[22:16]}); host_send(a[15:8]); host_send(a[7:0]);
  for (int j = 7; j >= 0; j--) host_send(v[8*j +: 8]);
endtask

task automatic host_recv(output logic [7:0] b);
  int guard;
  guard = 0;
  @(negedge clk) tx_ready = 1;
  do begin @(posedge clk); guard++; end while (!tx_valid && guard < 1000);
  check(tx_valid, "reply byte arrives");
  b = tx_data;
  @(negedge clk) tx_ready = 0;
endtask

// "RS": returns the status byte and, when running or at a break point, the count
task automatic host_status(output logic [7:0] st, output logic [23:0] cnt);
  logic [7:0] b;
  host_cmd("RS");
  host_recv(st);
  cnt = '0;
  if (st[1:0] == 2'd2 || st[1:0] == 2'd3) begin
    host_recv(b); cnt[23:16] = b;
    host_recv(b); cnt[15:8]  = b;
    host_recv(b); cnt[7:0]   = b;
  end
endtask
