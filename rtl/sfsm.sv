// sfsm -- the MC-synchronous sequencer (SFSM) of the pattern generator.
//
// It takes instructions from the FIFO and turns each into a timed write on
// the system bus. Everything happens on MC rising ticks (mc_rise), so all
// bus activity is synchronous with the master clock, as the paper requires.
//
// Timing of one instruction. Its interval field N (36 bits, N = 0 is
// treated as 1) is the number of MC cycles from the previous instruction,
// or from the MC edge at which the run started or resumed, to this one.
// At the MC rising edge where it executes, and if its strobe-enable bit is
// set, address and data are put on the bus; the strobe goes high at the
// following MC falling edge and low at the next rising edge, so it is half
// an MC period wide (1/2f_c, as in the paper) and its rising edge, where
// the modules latch, sits in the middle of a stable address/data window.
// An instruction without the strobe bit is a "dummy": it only spends time,
// which is how intervals beyond (2^36-1) MC cycles are built. The next
// instruction is taken from the FIFO at the edge where the current one
// executes, so one instruction per MC cycle is sustained.
//
// Run control (the paper gives the behaviour; the exact rules are this
// design's): GO (software trigger) starts a run from idle once the FIFO
// is primed, or resumes from a break point. ARM waits for a Trg rising
// edge to start. A break-point bit stops the sequence after that
// instruction, with the bus in its last state, until GO or (when the
// trigger source is external) a Trg edge; the next instruction then
// counts its interval from the MC edge that saw the trigger, giving a
// worst-case Trg-to-output latency of 2 MC periods for interval 1.
// STOP_NEXT ends the run after the next executed instruction, STOP_NOW
// ends it at once. A run also ends after the instruction with the "last"
// bit. run_end pulses when a run ends, so that the prefetch can restart.
// If the FIFO is empty when an instruction is needed (the SDRAM fell
// behind) the sequencer waits for it and sets the sticky underrun flag.
module sfsm
  import dpg_pkg::*;
#(
  parameter int unsigned CNT_W = 24     // executed-instruction counter
) (
  input  logic               clk,       // f_i
  input  logic               rst_n,
  input  logic               mc_rise,
  input  logic               mc_fall,
  input  logic               trg_pending,
  input  logic               ext_mode,  // trigger source is the Trg input
  input  logic               cmd_go,
  input  logic               cmd_arm,
  input  logic               cmd_stop_next,
  input  logic               cmd_stop_now,
  input  logic               primed,
  input  instr_t             fifo_rd_data,
  input  logic               fifo_empty,
  output logic               fifo_rd_en,
  output sch_bus_t           bus,
  output run_state_e         run_state,
  output logic [CNT_W-1:0]   instr_count,
  output logic               underrun,
  output logic               run_end
);

  run_state_e        state;
  instr_t            cur;
  logic              cur_valid;
  logic [TIME_W-1:0] cnt;
  logic              go_pend, stop_next_pend, strobe_arm;
  logic              trig_start, resume, exec_now, can_pop;

  function automatic logic [TIME_W-1:0] ival(input instr_t i);
    return (i.interval == '0) ? TIME_W'(1) : i.interval;
  endfunction

  assign trig_start = (go_pend || (state == RS_WAIT_TRG && trg_pending)) && primed && !fifo_empty;
  assign resume     = go_pend || (ext_mode && trg_pending);
  assign exec_now   = (state == RS_RUNNING) && cur_valid && (cnt == TIME_W'(1));
  assign can_pop    = !fifo_empty;

  // FIFO pop: at an MC tick, when a run starts, an instruction executes
  // and is followed by another, a break is released, or after an underrun.
  always_comb begin
    fifo_rd_en = 1'b0;
    if (mc_rise && !cmd_stop_now && can_pop) begin
      case (state)
        RS_IDLE, RS_WAIT_TRG: fifo_rd_en = trig_start;
        RS_RUNNING:
          if (!cur_valid) fifo_rd_en = 1'b1;
          else if (exec_now && !cur.ctrl[CTRL_LAST] && !cur.ctrl[CTRL_BREAK] && !stop_next_pend)
            fifo_rd_en = 1'b1;
        RS_BREAK: fifo_rd_en = resume && !stop_next_pend;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= RS_IDLE;
      cur            <= '0;
      cur_valid      <= 1'b0;
      cnt            <= '0;
      go_pend        <= 1'b0;
      stop_next_pend <= 1'b0;
      strobe_arm     <= 1'b0;
      bus            <= '0;
      instr_count    <= '0;
      underrun       <= 1'b0;
      run_end        <= 1'b0;
    end else begin
      run_end <= 1'b0;
      if (cmd_go)        go_pend        <= 1'b1;
      if (cmd_stop_next) stop_next_pend <= 1'b1;
      if (cmd_arm && state == RS_IDLE) state <= RS_WAIT_TRG;

      // strobe: high from the MC falling edge after execution to the next rising edge
      if (mc_fall && strobe_arm) begin
        bus.strobe <= 1'b1;
        strobe_arm <= 1'b0;
      end

      if (cmd_stop_now) begin
        if (state == RS_RUNNING || state == RS_BREAK) run_end <= 1'b1;
        state          <= RS_IDLE;
        cur_valid      <= 1'b0;
        go_pend        <= 1'b0;
        stop_next_pend <= 1'b0;
        strobe_arm     <= 1'b0;
        bus.strobe     <= 1'b0;
      end else if (mc_rise) begin
        bus.strobe <= 1'b0;
        // a software trigger is kept only while waiting for the program to be primed
        if (!(state == RS_IDLE && !primed)) go_pend <= cmd_go;
        case (state)
          RS_IDLE, RS_WAIT_TRG: begin
            if (stop_next_pend) begin
              state          <= RS_IDLE;
              stop_next_pend <= cmd_stop_next;
            end else if (trig_start) begin
              state       <= RS_RUNNING;
              cur         <= fifo_rd_data;
              cur_valid   <= 1'b1;
              cnt         <= ival(fifo_rd_data);
              instr_count <= '0;
              underrun    <= 1'b0;
              go_pend     <= 1'b0;
            end
          end
          RS_RUNNING: begin
            if (!cur_valid) begin
              if (can_pop) begin
                cur       <= fifo_rd_data;
                cur_valid <= 1'b1;
                cnt       <= ival(fifo_rd_data);
              end
            end else if (exec_now) begin
              instr_count <= instr_count + 1'b1;
              if (cur.ctrl[CTRL_STROBE]) begin
                bus.addr   <= cur.addr;
                bus.data   <= cur.data;
                strobe_arm <= 1'b1;
              end
              if (cur.ctrl[CTRL_LAST] || stop_next_pend) begin
                state          <= RS_IDLE;
                cur_valid      <= 1'b0;
                stop_next_pend <= cmd_stop_next;
                run_end        <= 1'b1;
              end else if (cur.ctrl[CTRL_BREAK]) begin
                state     <= RS_BREAK;
                cur_valid <= 1'b0;
              end else if (can_pop) begin
                cur <= fifo_rd_data;
                cnt <= ival(fifo_rd_data);
              end else begin
                cur_valid <= 1'b0;
                underrun  <= 1'b1;
              end
            end else begin
              cnt <= cnt - 1'b1;
            end
          end
          RS_BREAK: begin
            if (stop_next_pend) begin
              state          <= RS_IDLE;
              stop_next_pend <= cmd_stop_next;
              run_end        <= 1'b1;
            end else if (resume) begin
              state   <= RS_RUNNING;
              go_pend <= 1'b0;
              if (can_pop) begin
                cur       <= fifo_rd_data;
                cur_valid <= 1'b1;
                cnt       <= ival(fifo_rd_data);
              end else begin
                underrun <= 1'b1;
              end
            end
          end
          default: state <= RS_IDLE;
        endcase
      end
    end
  end

  assign run_state = state;

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) fifo_rd_en |-> !fifo_empty);
  a_strobe_only_fall: assert property (@(posedge clk) disable iff (!rst_n) $rose(bus.strobe) |-> $past(mc_fall));

endmodule
