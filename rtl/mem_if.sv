// mem_if -- memory interface of the pattern generator.
//
// It sits between the command interpreter, the SDRAM controller and the
// instruction FIFO, and does two things:
//  * write path: stores one 64-bit instruction at a random instruction
//    address (the host loads instructions one at a time, in any order);
//  * prefetch: once a program is complete (start pulse), it flushes the
//    FIFO and reads the program from instruction 0 upward, each
//    instruction as one burst of four 16-bit words, and pushes the
//    assembled instructions into the FIFO. Reading stops after the
//    instruction whose "last" bit is set, or at the end of memory.
// Both follow the paper. The SDRAM controller itself is vendor IP and is
// outside this design; the port below to it is this design's own,
// simple command/data protocol:
//   command : mem_cmd_valid/ready, mem_cmd_we, mem_cmd_addr (16-bit word
//             address, always a multiple of 4: one burst of 4 words)
//   write   : after a write command is accepted, 4 beats on mem_wdata
//             with mem_wvalid/mem_wready, word 0 (bits 15:0) first
//   read    : each read command returns, in order and some cycles later,
//             4 beats on mem_rdata with mem_rvalid (no back-pressure),
//             word 0 first.
// Up to MAX_OUTST read bursts may be outstanding; a read is issued only
// if the FIFO has room for every outstanding instruction, so the FIFO
// never overflows. A write waiting to go has priority over reads.
//
// Restart (start pulse, sent when a program is declared loaded and again
// after each run ends) waits for outstanding reads to drain, dropping
// their data, then flushes the FIFO and starts from instruction 0.
// primed goes high when the FIFO holds PRIME_LEVEL instructions or the
// whole program; the sequencer starts a run only then.
// The fourth beat of a burst goes straight from mem_rdata into the FIFO
// write port (bits 63:48 of the pushed word), saving one cycle and a
// 16-bit register; the first three beats are registered.
module mem_if
  import dpg_pkg::*;
#(
  parameter int unsigned IADDR_W     = 23,  // 8 M instructions
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned MAX_OUTST   = 4,
  parameter int unsigned PRIME_LEVEL = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control
  input  logic                     start,
  output logic                     primed,
  output logic                     prog_read_done, // last instruction pushed to FIFO
  // write request from the command interpreter (hold wr_req until wr_done)
  input  logic                     wr_req,
  input  logic [IADDR_W-1:0]       wr_addr,
  input  instr_t                   wr_instr,
  output logic                     wr_done,
  // instruction FIFO write side
  output logic                     fifo_flush,
  output logic                     fifo_wr_en,
  output instr_t                   fifo_wr_data,
  input  logic [$clog2(FIFO_DEPTH):0] fifo_count,
  // SDRAM controller user port
  output logic                     mem_cmd_valid,
  input  logic                     mem_cmd_ready,
  output logic                     mem_cmd_we,
  output logic [IADDR_W+1:0]       mem_cmd_addr,
  output logic                     mem_wvalid,
  input  logic                     mem_wready,
  output logic [15:0]              mem_wdata,
  input  logic                     mem_rvalid,
  input  logic [15:0]              mem_rdata
);

  localparam int unsigned OW = $clog2(MAX_OUTST + 1);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  typedef enum logic [1:0] {S_IDLE, S_RCMD, S_WCMD, S_WDATA} state_e;

  state_e         state;
  logic           active, restart_pend, seen_last;
  logic [IADDR_W:0] rd_ptr;             // one extra bit: end of memory
  logic [OW-1:0]  inflight;
  logic [1:0]     wbeat, rbeat;
  logic [47:0]    asm_q;
  logic           rd_end, can_read, do_restart, burst_done, keep;
  instr_t         asm_instr;
  logic [CW:0]    room_used;

  assign rd_end     = rd_ptr[IADDR_W];
  assign room_used  = (CW+1)'(fifo_count) + (CW+1)'(inflight);
  assign can_read   = active && !restart_pend && !seen_last && !rd_end &&
                      (room_used < (CW+1)'(FIFO_DEPTH)) &&
                      (inflight < OW'(MAX_OUTST));
  assign do_restart = restart_pend && (inflight == '0) && (state != S_RCMD);
  assign burst_done = mem_rvalid && (rbeat == 2'd3);
  assign asm_instr  = instr_t'({mem_rdata, asm_q});
  assign keep       = active && !restart_pend && !seen_last;

  // command / write-data channel
  always_comb begin
    mem_cmd_valid = 1'b0;
    mem_cmd_we    = 1'b0;
    mem_cmd_addr  = '0;
    mem_wvalid    = 1'b0;
    mem_wdata     = '0;
    case (state)
      S_RCMD: begin
        mem_cmd_valid = 1'b1;
        mem_cmd_addr  = {rd_ptr[IADDR_W-1:0], 2'b00};
      end
      S_WCMD: begin
        mem_cmd_valid = 1'b1;
        mem_cmd_we    = 1'b1;
        mem_cmd_addr  = {wr_addr, 2'b00};
      end
      S_WDATA: begin
        mem_wvalid = 1'b1;
        mem_wdata  = wr_instr[16*wbeat +: 16];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      wbeat   <= '0;
      wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      case (state)
        S_IDLE:
          if (wr_req && !wr_done) state <= S_WCMD;
          else if (can_read)      state <= S_RCMD;
        S_RCMD:
          if (mem_cmd_ready) state <= S_IDLE;
        S_WCMD:
          if (mem_cmd_ready) begin
            state <= S_WDATA;
            wbeat <= '0;
          end
        S_WDATA:
          if (mem_wready) begin
            wbeat <= wbeat + 1'b1;
            if (wbeat == 2'd3) begin
              state   <= S_IDLE;
              wr_done <= 1'b1;
            end
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  // read pointer, outstanding bursts, restart
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      restart_pend <= 1'b0;
      seen_last    <= 1'b0;
      rd_ptr       <= '0;
      inflight     <= '0;
    end else begin
      if (start) restart_pend <= 1'b1;
      if (do_restart && !start) begin
        restart_pend <= 1'b0;
        active       <= 1'b1;
        seen_last    <= 1'b0;
        rd_ptr       <= '0;
      end else begin
        if (state == S_RCMD && mem_cmd_ready) rd_ptr <= rd_ptr + 1'b1;
        if (burst_done && keep && asm_instr.ctrl[CTRL_LAST]) seen_last <= 1'b1;
      end
      inflight <= inflight + OW'(state == S_RCMD && mem_cmd_ready) - OW'(burst_done);
    end
  end

  // read data assembly
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbeat <= '0;
      asm_q <= '0;
    end else if (mem_rvalid) begin
      rbeat <= rbeat + 1'b1;
      asm_q[16*rbeat[1:0] +: 16] <= mem_rdata;
    end
  end

  assign fifo_flush   = do_restart && !start;
  assign fifo_wr_en   = burst_done && keep;
  assign fifo_wr_data = asm_instr;

  assign prog_read_done = active && !restart_pend && (seen_last || (rd_end && inflight == '0));
  assign primed = active && !restart_pend &&
                  (prog_read_done || fifo_count >= ($clog2(FIFO_DEPTH)+1)'(PRIME_LEVEL));

  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> inflight != '0);
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 mem_cmd_valid && !mem_cmd_ready |=> mem_cmd_valid && $stable(mem_cmd_addr) && $stable(mem_cmd_we));

endmodule
