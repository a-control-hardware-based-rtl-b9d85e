// instr_fifo -- instruction buffer between the SDRAM reader and the
// synchronous FSM: 64 bits wide, 512 deep, as in the paper.
//
// It lets the sequencer keep running at one instruction per MC cycle
// while the SDRAM is busy with refresh. The paper uses a vendor FIFO
// generator; this is a plain synchronous FIFO written as an array, in the
// single f_i clock domain of this design (the paper calls it dual port;
// here one port writes and the other reads, on the same clock).
//
// Interface: first-word-fall-through. rd_data shows the oldest entry
// whenever empty is low; rd_en pops it. wr_en pushes wr_data. A push
// when full or a pop when empty is ignored (and flagged by assertions).
// flush empties the FIFO in one cycle. count is the fill level, 0..DEPTH.
module instr_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512   // power of two
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign do_wr = wr_en & ~full;
  assign do_rd = rd_en & ~empty;
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else if (flush) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0) else $error("instr_fifo: DEPTH must be a power of two");
  end

  // Overflow / underflow are caller errors.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !flush));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty && !flush));

endmodule
