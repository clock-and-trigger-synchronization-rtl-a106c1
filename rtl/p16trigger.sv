// p16trigger: one P16Trigger rear-I/O board.
//
// The board sits behind a PXI chassis backplane and links the chassis to the
// others over CAT-5 cables. It holds the clock path (p16t_clock_dist) and one
// p16t_trigger_line per trigger signal; this module maps those signals onto
// the pairs of the CAT-5 connectors according to the trigger mode:
//
//   TRIG_3X8 : signals 0..2 use pairs 0..2 of every output connector and of
//              input connector A; signals 3..5 are off. One cable per
//              receiver, up to 8 receivers.
//   TRIG_6X4 : signal s uses pair s%3. Signals 0..2 go out on the even output
//              connectors and come in on input connector A, signals 3..5 on
//              the odd output connectors and input connector B. Receiver r
//              is cabled to output connectors 2r and 2r+1, so 4 receivers.
//
// The 3/8 and 6/4 figures, the reversible signal direction and the AND of
// reversed signals follow the paper. The pair assignment, the second input
// connector and the use of only the A clock pair are this design's choices.
// The sizes come from p16t_pkg (NUM_OUT_PORTS = 8, PAIRS_PER_PORT = 3,
// NUM_SIG = 6 = 2 * PAIRS_PER_PORT, which the pair mapping relies on).
// Connector and backplane pins are (_i, _o, _oe) triples, as a board's
// bidirectional buffers would be; the logic is purely combinational.
module p16trigger
  import p16t_pkg::*;
(
  input  p16t_cfg_t                 cfg_i,
  // clock sources and received clock
  input  logic                      osc_clk_i,
  input  logic                      pixie_clk_i,
  output logic                      pxi_clk_o,
  // output CAT-5 connectors
  output logic [NUM_OUT_PORTS-1:0]  out_clk_o,
  output logic [NUM_OUT_PORTS-1:0]  out_clk_oe,
  input  logic [PAIRS_PER_PORT-1:0] out_trig_i  [NUM_OUT_PORTS],
  output logic [PAIRS_PER_PORT-1:0] out_trig_o  [NUM_OUT_PORTS],
  output logic [PAIRS_PER_PORT-1:0] out_trig_oe [NUM_OUT_PORTS],
  // input CAT-5 connectors A (index 0) and B (index 1)
  input  logic                      in_clk_i,
  input  logic [PAIRS_PER_PORT-1:0] in_trig_i   [NUM_IN_PORTS],
  output logic [PAIRS_PER_PORT-1:0] in_trig_o   [NUM_IN_PORTS],
  output logic [PAIRS_PER_PORT-1:0] in_trig_oe  [NUM_IN_PORTS],
  // backplane trigger lines
  input  logic [NUM_SIG-1:0]        bp_src_i,
  output logic [NUM_SIG-1:0]        bp_src_o,
  output logic [NUM_SIG-1:0]        bp_src_oe,
  input  logic [NUM_SIG-1:0]        bp_dist_i,
  output logic [NUM_SIG-1:0]        bp_dist_o,
  output logic [NUM_SIG-1:0]        bp_dist_oe
);

  // ---------------------------------------------------------------- clock
  p16t_clock_dist #(.NUM_OUT_PORTS(NUM_OUT_PORTS)) u_clk (
    .master_i   (cfg_i.master),
    .clk_src_i  (cfg_i.clk_src),
    .osc_clk_i  (osc_clk_i),
    .pixie_clk_i(pixie_clk_i),
    .port_en_i  (cfg_i.port_en),
    .in_clk_i   (in_clk_i),
    .out_clk_o  (out_clk_o),
    .out_clk_oe (out_clk_oe),
    .pxi_clk_o  (pxi_clk_o)
  );

  // ------------------------------------------------------- trigger lines
  logic                     mode6;
  logic [NUM_OUT_PORTS-1:0] even_ports, odd_ports;

  always_comb begin
    mode6 = (cfg_i.mode == TRIG_6X4);
    for (int k = 0; k < NUM_OUT_PORTS; k++) begin
      even_ports[k] = (k % 2 == 0);
      odd_ports[k]  = (k % 2 == 1);
    end
  end

  logic [NUM_OUT_PORTS-1:0] line_port_o  [NUM_SIG];
  logic [NUM_OUT_PORTS-1:0] line_port_oe [NUM_SIG];

  for (genvar s = 0; s < NUM_SIG; s++) begin : g_line
    localparam int unsigned PAIR = s % PAIRS_PER_PORT;
    localparam int unsigned HALF = s / PAIRS_PER_PORT;  // 0: signals 0..2, 1: 3..5

    logic                     enable;
    logic [NUM_OUT_PORTS-1:0] port_en;
    logic [NUM_OUT_PORTS-1:0] port_in;

    always_comb begin
      enable  = mode6 || (HALF == 0);
      port_en = cfg_i.port_en;
      if (mode6) port_en &= (HALF == 0) ? even_ports : odd_ports;
      for (int k = 0; k < NUM_OUT_PORTS; k++) port_in[k] = out_trig_i[k][PAIR];
    end

    p16t_trigger_line #(.NUM_PORTS(NUM_OUT_PORTS)) u_line (
      .enable_i  (enable),
      .master_i  (cfg_i.master),
      .reversed_i(cfg_i.reversed[s]),
      .port_en_i (port_en),
      .bp_src_i  (bp_src_i[s]),
      .bp_src_o  (bp_src_o[s]),
      .bp_src_oe (bp_src_oe[s]),
      .bp_dist_i (bp_dist_i[s]),
      .bp_dist_o (bp_dist_o[s]),
      .bp_dist_oe(bp_dist_oe[s]),
      .port_i    (port_in),
      .port_o    (line_port_o[s]),
      .port_oe   (line_port_oe[s]),
      .in_i      (in_trig_i[HALF][PAIR]),
      .in_o      (in_trig_o[HALF][PAIR]),
      .in_oe     (in_trig_oe[HALF][PAIR])
    );
  end

  // Output connector pair (k, p) belongs to signal p, or in 6-signal mode to
  // signal p+3 when k is odd.
  always_comb begin
    for (int k = 0; k < NUM_OUT_PORTS; k++) begin
      for (int p = 0; p < PAIRS_PER_PORT; p++) begin
        if (mode6 && (k % 2 == 1)) begin
          out_trig_o[k][p]  = line_port_o[p + PAIRS_PER_PORT][k];
          out_trig_oe[k][p] = line_port_oe[p + PAIRS_PER_PORT][k];
        end else begin
          out_trig_o[k][p]  = line_port_o[p][k];
          out_trig_oe[k][p] = line_port_oe[p][k];
        end
      end
    end
  end

endmodule
