// dpg_core -- FPGA logic of the master module: a digital pattern
// generator (DPG) that performs timed writes on the system bus.
//
// Data flow: host bytes -> mfsm (command interpreter) -> mem_if writes
// instructions into the external SDRAM. When the host declares the
// program loaded, mem_if reads it back in 4-word bursts into instr_fifo
// (64 x 512), and sfsm executes it in step with the master clock (MC)
// from mc_gen, one instruction per MC cycle at most, waiting at break
// points for a Trg edge (trig_in) or a software GO.
//
// One clock: clk is the internal f_i (200 MHz in the paper); the MC is a
// sampled signal, internal (f_i / DIV) or the external Clk input. This
// single-domain arrangement is this design's reading of the paper's
// "internally the FPGA operates at f_i"; the block split (MFSM, memory
// interface, FIFO, SFSM) and all sizes follow the paper. The USB bridge
// chip and the SDRAM controller are outside: their sides appear as the
// host byte streams and the memory port (protocols in mfsm and mem_if).
// The FIFO's full flag and the memory interface's prog_read_done are left
// unconnected on purpose: the reader's own room check keeps the FIFO from
// filling, and the sequencer needs only "primed". rst_n is also read by
// the blocks' assertions (disable iff), which lint reports as a reset used
// both asynchronously and synchronously; the logic itself resets
// asynchronously only.
module dpg_core
  import dpg_pkg::*;
#(
  parameter int unsigned DIV         = 20,   // f_i / f_c = 200 MHz / 10 MHz
  parameter int unsigned IADDR_W     = 23,   // 8 M instructions
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned MAX_OUTST   = 4,
  parameter int unsigned PRIME_LEVEL = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  // MC and trigger inputs
  input  logic               ext_clk_sel,
  input  logic               ext_clk,
  input  logic               trg,
  output logic               mc_out,
  // host byte streams (from / to the USB bridge)
  input  logic               rx_valid,
  input  logic [7:0]         rx_data,
  output logic               rx_ready,
  output logic               tx_valid,
  output logic [7:0]         tx_data,
  input  logic               tx_ready,
  // SDRAM controller port
  output logic               mem_cmd_valid,
  input  logic               mem_cmd_ready,
  output logic               mem_cmd_we,
  output logic [IADDR_W+1:0] mem_cmd_addr,
  output logic               mem_wvalid,
  input  logic               mem_wready,
  output logic [15:0]        mem_wdata,
  input  logic               mem_rvalid,
  input  logic [15:0]        mem_rdata,
  // system bus and status
  output sch_bus_t           bus,
  output run_state_e         run_state,
  output logic               underrun
);

  localparam int unsigned CNT_W = IADDR_W + 1;

  logic mc_rise, mc_fall, trg_pending;
  logic ext_mode, cmd_go, cmd_arm, cmd_stop_next, cmd_stop_now, prefetch_start;
  logic wr_req, wr_done;
  logic [IADDR_W-1:0] wr_addr;
  instr_t wr_instr;
  logic primed, run_end;
  logic fifo_flush, fifo_wr_en, fifo_rd_en, fifo_empty;
  instr_t fifo_wr_data, fifo_rd_data;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;
  logic [CNT_W-1:0] instr_count;

  mc_gen #(.DIV(DIV)) u_mc (
    .clk, .rst_n, .ext_sel(ext_clk_sel), .ext_clk, .mc_out, .mc_rise, .mc_fall
  );

  trig_in u_trg (.clk, .rst_n, .trg, .mc_rise, .trg_pending);

  mfsm #(.IADDR_W(IADDR_W), .CNT_W(CNT_W)) u_mfsm (
    .clk, .rst_n,
    .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_ready,
    .ext_mode, .cmd_go, .cmd_arm, .cmd_stop_next, .cmd_stop_now, .prefetch_start,
    .wr_req, .wr_addr, .wr_instr, .wr_done,
    .run_state, .instr_count, .underrun
  );

  mem_if #(.IADDR_W(IADDR_W), .FIFO_DEPTH(FIFO_DEPTH), .MAX_OUTST(MAX_OUTST),
           .PRIME_LEVEL(PRIME_LEVEL)) u_mem (
    .clk, .rst_n,
    .start(prefetch_start || run_end), .primed, .prog_read_done(),
    .wr_req, .wr_addr, .wr_instr, .wr_done,
    .fifo_flush, .fifo_wr_en, .fifo_wr_data, .fifo_count,
    .mem_cmd_valid, .mem_cmd_ready, .mem_cmd_we, .mem_cmd_addr,
    .mem_wvalid, .mem_wready, .mem_wdata, .mem_rvalid, .mem_rdata
  );

  instr_fifo #(.WIDTH($bits(instr_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .flush(fifo_flush),
    .wr_en(fifo_wr_en), .wr_data(fifo_wr_data),
    .rd_en(fifo_rd_en), .rd_data(fifo_rd_data),
    .empty(fifo_empty), .full(), .count(fifo_count)
  );

  sfsm #(.CNT_W(CNT_W)) u_sfsm (
    .clk, .rst_n, .mc_rise, .mc_fall, .trg_pending, .ext_mode,
    .cmd_go, .cmd_arm, .cmd_stop_next, .cmd_stop_now, .primed,
    .fifo_rd_data, .fifo_empty, .fifo_rd_en,
    .bus, .run_state, .instr_count, .underrun, .run_end
  );

endmodule
