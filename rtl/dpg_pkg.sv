// dpg_pkg -- types and constants shared by the digital pattern generator
// (DPG) master module and the auxiliary bus modules.
//
// An instruction is one timed write on the write-only system bus. It is
// 64 bits wide and holds four fields: a 7-bit bus address, a 16-bit bus
// data word, a 36-bit time interval counted in master-clock (MC) cycles,
// and 5 control bits, three of which are used (last instruction, break
// point, strobe enable). Field widths, the 7/16-bit bus and the three
// control functions follow the paper; the bit positions of the fields
// inside the word, the position of each control bit, the host command
// codes and the status encoding are this design's own choices.
//
// Word layout (bit 63 on the left):
//   [63:59] ctrl      [58:23] interval      [22:16] addr      [15:0] data
//   ctrl[0] strobe enable, ctrl[1] break point, ctrl[2] last, ctrl[4:3] spare
package dpg_pkg;

  localparam int unsigned BUS_AW   = 7;   // bus address width
  localparam int unsigned BUS_DW   = 16;  // bus data width
  localparam int unsigned TIME_W   = 36;  // interval width, MC cycles
  localparam int unsigned CTRL_W   = 5;   // control bits
  localparam int unsigned INSTR_W  = CTRL_W + TIME_W + BUS_AW + BUS_DW; // 64
  localparam int unsigned MEM_BEATS = 4;  // 16-bit SDRAM words per instruction

  localparam int unsigned CTRL_STROBE = 0;
  localparam int unsigned CTRL_BREAK  = 1;
  localparam int unsigned CTRL_LAST   = 2;

  typedef struct packed {
    logic [CTRL_W-1:0] ctrl;
    logic [TIME_W-1:0] interval;
    logic [BUS_AW-1:0] addr;
    logic [BUS_DW-1:0] data;
  } instr_t;

  // The 24-line system bus: address, data and the single strobe line.
  typedef struct packed {
    logic [BUS_AW-1:0] addr;
    logic [BUS_DW-1:0] data;
    logic              strobe;
  } sch_bus_t;

  // Run state reported by the status request.
  typedef enum logic [1:0] {
    RS_IDLE     = 2'd0,
    RS_WAIT_TRG = 2'd1,
    RS_RUNNING  = 2'd2,
    RS_BREAK    = 2'd3
  } run_state_e;

  // Host commands: two ASCII characters, first character in bits [15:8].
  localparam logic [15:0] CMD_TRG_INT  = 16'h5449; // "TI" internal trigger source
  localparam logic [15:0] CMD_TRG_EXT  = 16'h5445; // "TE" external trigger source
  localparam logic [15:0] CMD_ARM      = 16'h4152; // "AR" arm the external trigger
  localparam logic [15:0] CMD_GO       = 16'h474F; // "GO" start / resume (software trigger)
  localparam logic [15:0] CMD_STOP_NXT = 16'h534E; // "SN" stop after the next instruction
  localparam logic [15:0] CMD_STOP_NOW = 16'h5349; // "SI" stop immediately
  localparam logic [15:0] CMD_WRITE    = 16'h5749; // "WI" + 3 address bytes + 8 instruction bytes
  localparam logic [15:0] CMD_LOADED   = 16'h504C; // "PL" program loaded, start prefetch
  localparam logic [15:0] CMD_STATUS   = 16'h5253; // "RS" status request

  function automatic instr_t make_instr(input logic last, input logic brk,
                                        input logic strobe,
                                        input logic [TIME_W-1:0] interval,
                                        input logic [BUS_AW-1:0] addr,
                                        input logic [BUS_DW-1:0] data);
    instr_t i;
    i.ctrl     = '0;
    i.ctrl[CTRL_STROBE] = strobe;
    i.ctrl[CTRL_BREAK]  = brk;
    i.ctrl[CTRL_LAST]   = last;
    i.interval = interval;
    i.addr     = addr;
    i.data     = data;
    return i;
  endfunction

endpackage
