// ao_module -- 8-channel analog output (AO) auxiliary module, digital part.
//
// The paper's AO board carries an 8-channel, 16-bit, parallel-input DAC
// (DAC8728) and answers to 8 bus addresses, one per channel. This block
// is its bus side: it decodes the 8 consecutive addresses starting at
// base_addr (base_addr is taken as a multiple of 8, so address bits [2:0]
// select the channel) and, on the rising edge of the strobe, stores the
// data word as the code of that channel. code[k] is what the DAC's
// channel k is converting; the conversion to a voltage (typically
// +/-10 V) is analog and outside this design. Channels are written one
// bus write at a time, so two channels never change in the same MC
// cycle, as the paper notes. Alignment of the base address and the
// reset to code 0 are this design's choices.
module ao_module
  import dpg_pkg::*;
#(
  parameter int unsigned NCH = 8
) (
  input  logic                       rst_n,
  input  sch_bus_t                   bus,
  input  logic [BUS_AW-1:0]          base_addr,
  output logic [NCH-1:0][BUS_DW-1:0] code
);

  localparam int unsigned SW = $clog2(NCH);

  logic strobe;
  logic hit;
  assign strobe = bus.strobe;
  assign hit    = (bus.addr[BUS_AW-1:SW] == base_addr[BUS_AW-1:SW]);

  always_ff @(posedge strobe or negedge rst_n) begin
    if (!rst_n)
      code <= '0;
    else if (hit)
      code[bus.addr[SW-1:0]] <= bus.data;
  end

  initial begin
    assert (NCH >= 2 && (NCH & (NCH - 1)) == 0) else $error("ao_module: NCH must be a power of two");
  end

endmodule
