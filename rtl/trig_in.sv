// trig_in -- hardware trigger input ("Trg") of the pattern generator.
//
// As the paper prescribes, Trg is sampled at the fast internal clock f_i
// so that pulses much shorter than an MC period are not missed, while the
// action it causes is deferred to the next MC rising edge. A rising edge
// of Trg (after a two-flop synchronizer) sets a sticky flag, trg_pending.
// The flag is cleared by every MC rising tick (mc_rise): the sequencer
// looks at trg_pending in that same cycle, so an edge that arrives while
// nobody waits for it is forgotten and cannot release a later break point.
// An edge that coincides with an mc_rise tick is kept for the next one.
//
// Timing: trg_pending rises 3 f_i cycles after the Trg edge (2 sync flops
// + edge register). Pulses must be at least one f_i period wide to be
// seen with certainty.
module trig_in (
  input  logic clk,         // f_i
  input  logic rst_n,
  input  logic trg,         // asynchronous Trg input
  input  logic mc_rise,     // MC rising tick: consumes / discards the flag
  output logic trg_pending  // a Trg rising edge occurred since the last MC tick
);

  logic [1:0] sync;
  logic       trg_q;
  logic       edge_det;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync  <= '0;
      trg_q <= 1'b0;
    end else begin
      sync  <= {sync[0], trg};
      trg_q <= sync[1];
    end
  end

  assign edge_det = sync[1] & ~trg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      trg_pending <= 1'b0;
    else if (edge_det)
      trg_pending <= 1'b1;
    else if (mc_rise)
      trg_pending <= 1'b0;
  end

endmodule
