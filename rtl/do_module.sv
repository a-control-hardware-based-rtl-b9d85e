// do_module -- digital output (DO) auxiliary module.
//
// As in the paper, a DO module is only an address decoder and a 16-bit
// latch: at the rising edge of the bus strobe, if the bus address equals
// the module's address (set by miniature switches on the board, here the
// input my_addr), the 16-bit data word is stored and drives the 16 TTL
// output lines. All 16 lines change together. The latch is clocked by
// the strobe itself, as the TTL original is; the reset that clears the
// outputs is this design's addition.
module do_module
  import dpg_pkg::*;
(
  input  logic              rst_n,
  input  sch_bus_t          bus,
  input  logic [BUS_AW-1:0] my_addr,
  output logic [BUS_DW-1:0] dout
);

  logic strobe;
  assign strobe = bus.strobe;

  always_ff @(posedge strobe or negedge rst_n) begin
    if (!rst_n)
      dout <= '0;
    else if (bus.addr == my_addr)
      dout <= bus.data;
  end

endmodule
