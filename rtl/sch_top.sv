// sch_top -- the synchronous control hardware: one master pattern
// generator and the auxiliary modules on its write-only bus.
//
// This is the system of the paper's architecture figure reduced to one
// module of each digital kind: the master (dpg_core) drives the 24-line
// bus (7-bit address, 16-bit data, strobe); a digital output module
// (16 TTL lines), an 8-channel analog output module (DAC codes) and the
// bus interface of an RF output module listen on it. The bus itself is
// also a port, for further modules (up to 128 addresses). The analog and
// RF parts (DAC, DDS, the RF module's microcontroller), the USB bridge
// and the SDRAM with its controller are outside: their connections are
// ports. The module addresses, set by switches on the real boards, are
// parameters here (choices of this design).
//
// Timing: see sfsm. A bus write executed at an MC rising edge appears on
// do_out / ao_code at the strobe's rising edge half an MC period later.
// The bus strobe clocks the output modules and is also sampled in the f_i
// domain by the sequencer's assertion, and rst_n is read by assertions as
// well as used as an asynchronous reset; lint flags both, and both are
// intended.
module sch_top
  import dpg_pkg::*;
#(
  parameter int unsigned DIV         = 20,
  parameter int unsigned IADDR_W     = 23,
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned MAX_OUTST   = 4,
  parameter int unsigned PRIME_LEVEL = 256,
  parameter logic [BUS_AW-1:0] DO_ADDR  = 7'd0,
  parameter logic [BUS_AW-1:0] AO_BASE  = 7'd8,
  parameter logic [BUS_AW-1:0] RFO_ADDR = 7'd16
) (
  input  logic               clk,          // f_i
  input  logic               rst_n,
  input  logic               ext_clk_sel,
  input  logic               ext_clk,      // "Clk" input
  input  logic               trg,          // "Trg" input
  output logic               mc_out,
  // USB bridge side
  input  logic               rx_valid,
  input  logic [7:0]         rx_data,
  output logic               rx_ready,
  output logic               tx_valid,
  output logic [7:0]         tx_data,
  input  logic               tx_ready,
  // SDRAM controller side
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
  output logic               underrun,
  // auxiliary module outputs
  output logic [BUS_DW-1:0]       do_out,
  output logic [7:0][BUS_DW-1:0]  ao_code,
  input  logic               rfo_mcu_clk,
  output logic               rfo_cmd_valid,
  input  logic               rfo_cmd_ack,
  output logic [9:0]         rfo_lut_index,
  output logic               rfo_prog_en,
  output logic               rfo_update_en,
  output logic               rfo_overrun
);

  dpg_core #(.DIV(DIV), .IADDR_W(IADDR_W), .FIFO_DEPTH(FIFO_DEPTH),
             .MAX_OUTST(MAX_OUTST), .PRIME_LEVEL(PRIME_LEVEL)) u_dpg (
    .clk, .rst_n, .ext_clk_sel, .ext_clk, .trg, .mc_out,
    .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_ready,
    .mem_cmd_valid, .mem_cmd_ready, .mem_cmd_we, .mem_cmd_addr,
    .mem_wvalid, .mem_wready, .mem_wdata, .mem_rvalid, .mem_rdata,
    .bus, .run_state, .underrun
  );

  do_module u_do (.rst_n, .bus, .my_addr(DO_ADDR), .dout(do_out));

  ao_module #(.NCH(8)) u_ao (.rst_n, .bus, .base_addr(AO_BASE), .code(ao_code));

  rfo_bus_if u_rfo (
    .rst_n, .bus, .my_addr(RFO_ADDR),
    .mcu_clk(rfo_mcu_clk), .cmd_valid(rfo_cmd_valid), .cmd_ack(rfo_cmd_ack),
    .lut_index(rfo_lut_index), .prog_en(rfo_prog_en), .update_en(rfo_update_en),
    .overrun(rfo_overrun)
  );

endmodule
