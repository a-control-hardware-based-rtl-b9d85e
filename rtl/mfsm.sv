// mfsm -- main FSM of the pattern generator: the host command interpreter.
//
// The host (a PC, through the USB bridge chip) sends a byte stream; every
// command is two ASCII characters, followed by parameters where needed.
// The four command families of the paper are covered:
//   trigger control   "TI" internal (software) trigger, "TE" external Trg
//   execution control "AR" arm the external trigger, "GO" start/resume,
//                     "SN" stop after the next instruction, "SI" stop now
//   memory access     "WI" a3 a2 a1 i7 i6 ... i0 : write one instruction
//                     (3 address bytes, then the 8 instruction bytes,
//                     both most significant byte first), in any order;
//                     "PL" program loaded: starts the prefetch
//   status request    "RS": replies one status byte, followed, when the
//                     sequence is running or halted at a break point, by
//                     the 3-byte executed-instruction count (MSB first).
// Status byte: [1:0] run state (0 idle, 1 waiting for trigger, 2 running,
// 3 break point), [2] FIFO underrun seen in this run, [3] external
// trigger selected, [7:4] zero.
// The command letters, parameter formats and the status layout are this
// design's own (the paper only describes the protocol in outline).
// Unknown commands are dropped.
//
// Byte streams use valid/ready handshakes (a byte moves when both are
// high). A write command holds wr_req until the memory interface answers
// with wr_done; bytes are not accepted meanwhile. Control commands become
// one-cycle pulses in the cycle after their second character.
module mfsm
  import dpg_pkg::*;
#(
  parameter int unsigned IADDR_W = 23,
  parameter int unsigned CNT_W   = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  // host byte streams
  input  logic               rx_valid,
  input  logic [7:0]         rx_data,
  output logic               rx_ready,
  output logic               tx_valid,
  output logic [7:0]         tx_data,
  input  logic               tx_ready,
  // control of the sequencer
  output logic               ext_mode,
  output logic               cmd_go,
  output logic               cmd_arm,
  output logic               cmd_stop_next,
  output logic               cmd_stop_now,
  output logic               prefetch_start,
  // instruction writes
  output logic               wr_req,
  output logic [IADDR_W-1:0] wr_addr,
  output instr_t             wr_instr,
  input  logic               wr_done,
  // status
  input  run_state_e         run_state,
  input  logic [CNT_W-1:0]   instr_count,
  input  logic               underrun
);

  localparam int unsigned WR_ARGS = 3 + 8;

  typedef enum logic [2:0] {P_C0, P_C1, P_ARGS, P_WRITE, P_REPLY} pstate_e;

  pstate_e     state;
  logic [7:0]  c0;
  logic [87:0] args;
  logic [3:0]  argn;
  logic [31:0] reply;
  logic [2:0]  rlen, ridx;
  logic        rx_fire, tx_fire;
  logic [15:0] cmd;
  logic [23:0] count24;

  assign rx_ready = (state == P_C0) || (state == P_C1) || (state == P_ARGS);
  assign rx_fire  = rx_valid && rx_ready;
  assign tx_valid = (state == P_REPLY);
  assign tx_data  = reply[31 - 8*ridx[1:0] -: 8];
  assign tx_fire  = tx_valid && tx_ready;
  assign cmd      = {c0, rx_data};
  assign wr_req   = (state == P_WRITE);
  assign wr_addr  = args[64 +: IADDR_W];
  assign wr_instr = instr_t'(args[63:0]);
  assign count24  = 24'(instr_count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= P_C0;
      c0             <= '0;
      args           <= '0;
      argn           <= '0;
      reply          <= '0;
      rlen           <= '0;
      ridx           <= '0;
      ext_mode       <= 1'b0;
      cmd_go         <= 1'b0;
      cmd_arm        <= 1'b0;
      cmd_stop_next  <= 1'b0;
      cmd_stop_now   <= 1'b0;
      prefetch_start <= 1'b0;
    end else begin
      cmd_go         <= 1'b0;
      cmd_arm        <= 1'b0;
      cmd_stop_next  <= 1'b0;
      cmd_stop_now   <= 1'b0;
      prefetch_start <= 1'b0;
      case (state)
        P_C0: if (rx_fire) begin
          c0    <= rx_data;
          state <= P_C1;
        end
        P_C1: if (rx_fire) begin
          state <= P_C0;
          case (cmd)
            CMD_TRG_INT:  ext_mode       <= 1'b0;
            CMD_TRG_EXT:  ext_mode       <= 1'b1;
            CMD_ARM:      cmd_arm        <= 1'b1;
            CMD_GO:       cmd_go         <= 1'b1;
            CMD_STOP_NXT: cmd_stop_next  <= 1'b1;
            CMD_STOP_NOW: cmd_stop_now   <= 1'b1;
            CMD_LOADED:   prefetch_start <= 1'b1;
            CMD_WRITE: begin
              argn  <= '0;
              state <= P_ARGS;
            end
            CMD_STATUS: begin
              reply <= {4'b0, ext_mode, underrun, run_state, count24};
              rlen  <= (run_state == RS_RUNNING || run_state == RS_BREAK) ? 3'd4 : 3'd1;
              ridx  <= '0;
              state <= P_REPLY;
            end
            default: ;
          endcase
        end
        P_ARGS: if (rx_fire) begin
          args <= {args[79:0], rx_data};
          argn <= argn + 1'b1;
          if (argn == 4'(WR_ARGS - 1)) state <= P_WRITE;
        end
        P_WRITE: if (wr_done) state <= P_C0;
        P_REPLY: if (tx_fire) begin
          ridx <= ridx + 1'b1;
          if (ridx + 1'b1 == rlen) state <= P_C0;
        end
        default: state <= P_C0;
      endcase
    end
  end

  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));

endmodule
