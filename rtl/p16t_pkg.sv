// p16t_pkg: sizes, encodings and the configuration record shared by the
// P16Trigger clock/trigger distribution logic.
//
// Each P16Trigger board has NUM_OUT_PORTS CAT-5 output connectors and two
// CAT-5 input connectors (A and B). Every connector carries one clock pair
// and PAIRS_PER_PORT trigger pairs. The numbers 8 (receivers), 3 and 6
// (trigger signals) come from the paper; the count of pairs per cable and
// the second input connector are this design's choices: a CAT-5 cable has
// four pairs, one for the clock and three for triggers, so 6 signals to 4
// receivers needs two cables per receiver.
package p16t_pkg;

  localparam int unsigned NUM_OUT_PORTS  = 8;  // receivers served in 3-signal mode
  localparam int unsigned PAIRS_PER_PORT = 3;  // trigger pairs per CAT-5 cable
  localparam int unsigned NUM_IN_PORTS   = 2;  // input connectors A and B
  localparam int unsigned NUM_SIG        = 6;  // trigger signals in 6-signal mode

  // Clock source of a board configured as clock source.
  typedef enum logic {
    CLK_FROM_PIXIE = 1'b0,  // clock from a Pixie-16 module
    CLK_FROM_OSC   = 1'b1   // on-board oscillator
  } clk_src_e;

  // How the trigger signals share the output connectors.
  typedef enum logic {
    TRIG_3X8 = 1'b0,  // signals 0..2 on every output connector
    TRIG_6X4 = 1'b1   // signals 0..2 on even, 3..5 on odd connectors
  } trig_mode_e;

  // Board configuration (set once, like jumpers).
  typedef struct packed {
    logic                     master;    // director chassis: clock source and trigger sender
    clk_src_e                 clk_src;   // used when master
    trig_mode_e               mode;
    logic [NUM_SIG-1:0]       reversed;  // per signal: reversed signalling
    logic [NUM_OUT_PORTS-1:0] port_en;   // output connectors with a cable attached
  } p16t_cfg_t;

endpackage
