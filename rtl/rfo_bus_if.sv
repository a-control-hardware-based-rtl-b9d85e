// rfo_bus_if -- bus interface (the CPLD) of an RF output (RFO) module.
//
// An RFO module holds a microcontroller that drives a DDS chip. The bus
// is too fast for the microcontroller to watch, so a small programmable
// logic device captures the command: on the rising edge of the strobe,
// when the bus address equals my_addr, it stores the 16-bit data word
// and raises cmd_valid towards the microcontroller, which takes the word
// and acknowledges it with a one-cycle cmd_ack on its own clock (mcu_clk).
// The word is decoded as in the paper's RFO2 description: bits [9:0]
// select one of 1024 look-up-table entries (frequency, amplitude, phase);
// one bit enables reprogramming the DDS with that entry and another
// enables the update pulse that moves the preloaded values to the DDS
// outputs. Which bits those are (here 10 and 11) is this design's choice,
// as is the handshake: a toggle crosses from the strobe domain to mcu_clk
// through a two-flop synchronizer. A command written before the previous
// one was acknowledged replaces it and sets the sticky `overrun` flag.
// Latency: cmd_valid rises 3 to 4 mcu_clk cycles after the strobe edge.
module rfo_bus_if
  import dpg_pkg::*;
(
  input  logic              rst_n,
  input  sch_bus_t          bus,
  input  logic [BUS_AW-1:0] my_addr,
  // microcontroller side
  input  logic              mcu_clk,
  output logic              cmd_valid,
  input  logic              cmd_ack,
  output logic [9:0]        lut_index,
  output logic              prog_en,
  output logic              update_en,
  output logic              overrun
);

  logic              strobe;
  logic [BUS_DW-1:0] word;
  logic              req_tgl;
  logic [2:0]        req_sync;
  logic              new_cmd;
  logic              pend_q;

  assign strobe  = bus.strobe;
  assign new_cmd = req_sync[2] ^ req_sync[1];

  always_ff @(posedge strobe or negedge rst_n) begin
    if (!rst_n) begin
      word    <= '0;
      req_tgl <= 1'b0;
    end else if (bus.addr == my_addr) begin
      word    <= bus.data;
      req_tgl <= ~req_tgl;
    end
  end

  always_ff @(posedge mcu_clk or negedge rst_n) begin
    if (!rst_n) begin
      req_sync <= '0;
      pend_q   <= 1'b0;
      overrun  <= 1'b0;
    end else begin
      req_sync <= {req_sync[1:0], req_tgl};
      if (new_cmd) begin
        pend_q <= 1'b1;
        if (pend_q && !cmd_ack) overrun <= 1'b1;
      end else if (cmd_ack) begin
        pend_q <= 1'b0;
      end
    end
  end

  assign cmd_valid = pend_q;
  assign lut_index = word[9:0];
  assign prog_en   = word[10];
  assign update_en = word[11];

endmodule
