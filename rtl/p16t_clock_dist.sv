// p16t_clock_dist: clock path of one P16Trigger board.
//
// A board configured as clock source (master_i) takes either the clock of a
// Pixie-16 module or its on-board oscillator, and drives it onto the clock
// pair of every cabled output connector. Every board, the source included,
// passes the clock that arrives on its input connector on to the slot-2
// Pixie-16, which feeds the chassis' PXI clock tree. Cabling the source's
// own output back to its own input gives all chassis the same cable delay.
//
// The selection and fan-out follow the paper; the per-connector driver
// enable (drivers of uncabled connectors stay off) is this design's choice.
// The path is purely combinational: the board is a set of LVDS buffers and
// has no clock of its own. The real buffers add a delay of nanoseconds that
// is not modelled here.
module p16t_clock_dist #(
  parameter int unsigned NUM_OUT_PORTS = 8
) (
  input  logic                     master_i,
  input  p16t_pkg::clk_src_e       clk_src_i,
  input  logic                     osc_clk_i,
  input  logic                     pixie_clk_i,
  input  logic [NUM_OUT_PORTS-1:0] port_en_i,
  input  logic                     in_clk_i,
  output logic [NUM_OUT_PORTS-1:0] out_clk_o,
  output logic [NUM_OUT_PORTS-1:0] out_clk_oe,
  output logic                     pxi_clk_o
);
  import p16t_pkg::*;

  logic src_clk;

  always_comb begin
    src_clk    = (clk_src_i == CLK_FROM_OSC) ? osc_clk_i : pixie_clk_i;
    out_clk_o  = {NUM_OUT_PORTS{src_clk}} & {NUM_OUT_PORTS{master_i}};
    out_clk_oe = port_en_i & {NUM_OUT_PORTS{master_i}};
    pxi_clk_o  = in_clk_i;
  end

endmodule
