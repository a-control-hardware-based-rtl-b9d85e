// sdram_model -- behavioural model of the SDRAM and its controller, as
// seen from the memory port of mem_if. Not synthesizable, testbench only.
//
// Storage is an array of 16-bit words (MEM_AW address bits, wrapping).
// A command is accepted (cmd_ready) except during refresh: every
// REF_PERIOD cycles the model is busy for ref_len cycles (ref_len can be
// changed at run time; setting `hold` stalls it completely). A read returns
// its 4 words, one per cycle, LAT cycles after acceptance, in order; a
// write takes its 4 words from the write-data channel after acceptance.
// The refresh figures (one refresh per 7.8 us at 200 MHz) are typical
// DDR values, not the paper's.
module sdram_model #(
  parameter int unsigned ADDR_W     = 25,   // word address width of the port
  parameter int unsigned MEM_AW     = 25,   // words actually stored: 2**MEM_AW
  parameter int unsigned LAT        = 8,
  parameter int unsigned REF_PERIOD = 1560,
  parameter int unsigned REF_LEN0   = 40
) (
  input  logic              clk,
  input  logic              rst_n,      // commands are ignored in reset
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_we,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  logic              wvalid,
  output logic              wready,
  input  logic [15:0]       wdata,
  output logic              rvalid,
  output logic [15:0]       rdata
);

  logic [15:0] mem [2**MEM_AW];

  int unsigned ref_len = REF_LEN0;
  int unsigned cyc = 0;
  int unsigned ref_cnt = 0;
  int unsigned refreshes = 0;
  int unsigned stall_cycles = 0;
  int unsigned reads = 0, writes = 0;
  logic        busy_ref = 1'b0;
  logic        hold = 1'b0;      // set by a testbench: memory stalls completely
  logic        w_active = 1'b0;
  int unsigned w_beat = 0;
  logic [MEM_AW-1:0] w_addr;
  int unsigned r_beat = 0;
  longint unsigned rq_due[$];
  logic [MEM_AW-1:0] rq_addr[$];

  function automatic logic [MEM_AW-1:0] wa(input logic [ADDR_W-1:0] a);
    return MEM_AW'(a);
  endfunction

  task automatic poke_instr(input longint unsigned idx, input logic [63:0] v);
    for (int k = 0; k < 4; k++) mem[MEM_AW'(idx * 4 + longint'(k))] = v[16*k +: 16];
  endtask

  function automatic logic [63:0] peek_instr(input longint unsigned idx);
    logic [63:0] v;
    for (int k = 0; k < 4; k++) v[16*k +: 16] = mem[MEM_AW'(idx * 4 + longint'(k))];
    return v;
  endfunction

  assign cmd_ready = rst_n && !busy_ref && !hold && !w_active && (rq_due.size() < 16);
  assign wready    = w_active;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    // refresh schedule
    if (ref_cnt == REF_PERIOD - 1) begin
      ref_cnt  <= 0;
      if (ref_len != 0) begin busy_ref <= 1'b1; refreshes <= refreshes + 1; end
    end else begin
      ref_cnt <= ref_cnt + 1;
      if (busy_ref && ref_cnt == ref_len - 1) busy_ref <= 1'b0;
    end
    if (rst_n && cmd_valid && !cmd_ready) stall_cycles <= stall_cycles + 1;
    // commands
    if (cmd_valid && cmd_ready) begin
      if (cmd_we) begin
        w_active <= 1'b1;
        w_beat   <= 0;
        w_addr   <= wa(cmd_addr);
        writes   <= writes + 1;
      end else begin
        rq_due.push_back(longint'(cyc) + LAT);
        rq_addr.push_back(wa(cmd_addr));
        reads <= reads + 1;
      end
    end
    if (w_active && wvalid) begin
      mem[w_addr + MEM_AW'(w_beat)] <= wdata;
      w_beat <= w_beat + 1;
      if (w_beat == 3) w_active <= 1'b0;
    end
    // read data
    rvalid <= 1'b0;
    if (rq_due.size() != 0 && longint'(cyc) >= rq_due[0]) begin
      rvalid <= 1'b1;
      rdata  <= mem[rq_addr[0] + MEM_AW'(r_beat)];
      if (r_beat == 3) begin
        r_beat <= 0;
        void'(rq_due.pop_front());
        void'(rq_addr.pop_front());
      end else begin
        r_beat <= r_beat + 1;
      end
    end
  end

  initial begin
    rvalid = 1'b0;
    rdata  = '0;
  end

endmodule
