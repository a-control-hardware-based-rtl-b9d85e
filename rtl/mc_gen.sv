// mc_gen -- master clock (MC) source for the pattern generator.
//
// The whole FPGA design runs on one fast internal clock, f_i (200 MHz).
// The MC (10 MHz) is not used as a clock: it is a level sampled in the
// f_i domain, and this block turns its edges into one-cycle ticks,
// mc_rise and mc_fall, that the synchronous FSM acts on.
//
// Two MC sources, as in the paper: an internal one and the external
// "Clk" input. The internal MC is made here by dividing f_i by DIV
// (200 MHz / 20 = 10 MHz); in the original board it comes from the
// on-board 24 MHz quartz through the FPGA's clock synthesizer, which is
// equivalent for the logic. DIV may be odd (e.g. 5 for a 40 MHz MC); the
// MC is then high one f_i cycle longer than it is low. The external Clk passes a two-flop
// synchronizer. ext_sel picks the source; it is meant to be static (a
// strap), and switching it while running may produce one short MC cycle.
//
// Timing: mc_rise / mc_fall are asserted for one f_i cycle, 3 f_i cycles
// after an external Clk edge (two synchronizer flops and the edge
// register) and 1 cycle after an internal MC edge. mc_out is the
// selected MC level, for distribution to cascaded units.
module mc_gen #(
  parameter int unsigned DIV = 20     // f_i / f_c; must be >= 4
) (
  input  logic clk,        // f_i
  input  logic rst_n,
  input  logic ext_sel,    // 1: use external Clk input
  input  logic ext_clk,    // external MC, asynchronous to clk
  output logic mc_out,     // selected MC level (f_i domain)
  output logic mc_rise,    // one-cycle tick at each MC rising edge
  output logic mc_fall     // one-cycle tick at each MC falling edge
);

  localparam int unsigned CW = $clog2(DIV);

  logic [CW-1:0] div_cnt;
  logic          mc_int;
  logic [1:0]    ext_sync;
  logic [1:0]    sel_sync;
  logic          mc_sel;
  logic          mc_q;

  // div_cnt runs 0 .. DIV-1; the MC rises when it leaves DIV/2-1 and falls
  // when it wraps, so it is high for DIV - DIV/2 and low for DIV/2 cycles
  // (a square wave for even DIV).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0;
      mc_int  <= 1'b0;
    end else begin
      if (div_cnt == CW'(DIV - 1)) begin
        div_cnt <= '0;
        mc_int  <= 1'b0;
      end else begin
        div_cnt <= div_cnt + 1'b1;
        if (div_cnt == CW'(DIV/2 - 1)) mc_int <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_sync <= '0;
      sel_sync <= '0;
    end else begin
      ext_sync <= {ext_sync[0], ext_clk};
      sel_sync <= {sel_sync[0], ext_sel};
    end
  end

  assign mc_sel = sel_sync[1] ? ext_sync[1] : mc_int;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mc_q    <= 1'b0;
      mc_rise <= 1'b0;
      mc_fall <= 1'b0;
    end else begin
      mc_q    <= mc_sel;
      mc_rise <= mc_sel & ~mc_q;
      mc_fall <= ~mc_sel & mc_q;
    end
  end

  assign mc_out = mc_q;

  initial begin
    assert (DIV >= 4) else $error("mc_gen: DIV must be >= 4");
  end

endmodule
