// ddas_sync_top: clock and trigger distribution across several PXI chassis.
//
// One P16Trigger board sits behind each chassis' backplane. Chassis 0 holds
// the director module; its board is the clock source and trigger sender and
// is cabled to the input connectors of every chassis, its own included, so
// that every chassis sees the same cable delay. Each chassis' Pixie-16
// modules share one wire-OR READY line (ready_wire_or).
//
// Cabling (this design's choice; the paper allows 8 receivers with 3 trigger
// signals or 4 receivers with 6):
//   NUM_CHASSIS <= 4 : director output connector 2c   -> chassis c input A
//                      director output connector 2c+1 -> chassis c input B
//                      which serves both trigger modes.
//   NUM_CHASSIS 5..8 : director output connector c    -> chassis c input A
//                      (3-signal mode only).
// A pair whose far end does not drive reads high (LVDS fail-safe receiver).
//
// Backplane of chassis c, signal s:
//   source line: driven by the P16Trigger when it drives it (reversed
//     signalling on the director's board: system-wide READY), otherwise by
//     the director module (trig_src_i).
//   distribution line: driven by the P16Trigger in normal signalling (the
//     trigger as received), otherwise by the module that relays the
//     chassis-wide READY line onto it.
// The director module, the Pixie-16 modules and the analog buffers are not
// part of this RTL: their signals are ports. Everything is combinational;
// the real boards add about 18 ns of buffer delay, which is not modelled.
module ddas_sync_top
  import p16t_pkg::*;
#(
  parameter int unsigned NUM_CHASSIS = 4,
  parameter int unsigned SLOTS       = 14
) (
  input  p16t_cfg_t              cfg_i          [NUM_CHASSIS],
  input  logic [NUM_CHASSIS-1:0] osc_clk_i,
  input  logic [NUM_CHASSIS-1:0] pixie_clk_i,
  input  logic [NUM_SIG-1:0]     trig_src_i     [NUM_CHASSIS],
  input  logic [SLOTS-1:0]       module_ready_i [NUM_CHASSIS],
  input  logic [SLOTS-1:0]       slot_present_i [NUM_CHASSIS],
  output logic [NUM_CHASSIS-1:0] pxi_clk_o,
  output logic [NUM_SIG-1:0]     bp_src_o       [NUM_CHASSIS],
  output logic [NUM_SIG-1:0]     bp_dist_o      [NUM_CHASSIS],
  output logic [NUM_CHASSIS-1:0] chassis_ready_o
);

  localparam bit TWO_CABLES = (NUM_CHASSIS <= NUM_OUT_PORTS / 2);

  if (NUM_CHASSIS < 1 || NUM_CHASSIS > NUM_OUT_PORTS) begin : g_bad_count
    $error("ddas_sync_top: NUM_CHASSIS must be 1..%0d", NUM_OUT_PORTS);
  end

  // Board pins, per chassis.
  logic [NUM_OUT_PORTS-1:0]  out_clk      [NUM_CHASSIS];
  logic [NUM_OUT_PORTS-1:0]  out_clk_oe   [NUM_CHASSIS];
  logic [PAIRS_PER_PORT-1:0] out_trig_i   [NUM_CHASSIS][NUM_OUT_PORTS];
  logic [PAIRS_PER_PORT-1:0] out_trig_o   [NUM_CHASSIS][NUM_OUT_PORTS];
  logic [PAIRS_PER_PORT-1:0] out_trig_oe  [NUM_CHASSIS][NUM_OUT_PORTS];
  logic                      in_clk       [NUM_CHASSIS];
  logic [PAIRS_PER_PORT-1:0] in_trig_i    [NUM_CHASSIS][NUM_IN_PORTS];
  logic [PAIRS_PER_PORT-1:0] in_trig_o    [NUM_CHASSIS][NUM_IN_PORTS];
  logic [PAIRS_PER_PORT-1:0] in_trig_oe   [NUM_CHASSIS][NUM_IN_PORTS];
  logic [NUM_SIG-1:0]        bp_src_drv   [NUM_CHASSIS];
  logic [NUM_SIG-1:0]        bp_src_oe    [NUM_CHASSIS];
  logic [NUM_SIG-1:0]        bp_dist_drv  [NUM_CHASSIS];
  logic [NUM_SIG-1:0]        bp_dist_oe   [NUM_CHASSIS];

  for (genvar c = 0; c < NUM_CHASSIS; c++) begin : g_chassis

    ready_wire_or #(.SLOTS(SLOTS)) u_ready (
      .ready_i        (module_ready_i[c]),
      .present_i      (slot_present_i[c]),
      .chassis_ready_o(chassis_ready_o[c])
    );

    p16trigger u_p16t (
      .cfg_i      (cfg_i[c]),
      .osc_clk_i  (osc_clk_i[c]),
      .pixie_clk_i(pixie_clk_i[c]),
      .pxi_clk_o  (pxi_clk_o[c]),
      .out_clk_o  (out_clk[c]),
      .out_clk_oe (out_clk_oe[c]),
      .out_trig_i (out_trig_i[c]),
      .out_trig_o (out_trig_o[c]),
      .out_trig_oe(out_trig_oe[c]),
      .in_clk_i   (in_clk[c]),
      .in_trig_i  (in_trig_i[c]),
      .in_trig_o  (in_trig_o[c]),
      .in_trig_oe (in_trig_oe[c]),
      // The P16Trigger reads what the other drivers of each line put on it.
      .bp_src_i   (trig_src_i[c]),
      .bp_src_o   (bp_src_drv[c]),
      .bp_src_oe  (bp_src_oe[c]),
      .bp_dist_i  ({NUM_SIG{chassis_ready_o[c]}}),
      .bp_dist_o  (bp_dist_drv[c]),
      .bp_dist_oe (bp_dist_oe[c])
    );

    always_comb begin
      for (int s = 0; s < NUM_SIG; s++) begin
        bp_src_o[c][s]  = bp_src_oe[c][s]  ? bp_src_drv[c][s]  : trig_src_i[c][s];
        bp_dist_o[c][s] = bp_dist_oe[c][s] ? bp_dist_drv[c][s] : chassis_ready_o[c];
      end
    end
  end

  // ------------------------------------------------------------- cables
  // Director output connector k reaches chassis cab_chassis(k), input
  // connector cab_in(k); connectors beyond the cabled ones are open.
  function automatic int cab_chassis(int k);
    return TWO_CABLES ? k / 2 : k;
  endfunction
  function automatic int cab_in(int k);
    return TWO_CABLES ? k % 2 : 0;
  endfunction
  localparam int unsigned CABLED = TWO_CABLES ? 2 * NUM_CHASSIS : NUM_CHASSIS;

  always_comb begin
    // Defaults: open pairs read high.
    for (int c = 0; c < NUM_CHASSIS; c++) begin
      in_clk[c] = 1'b1;
      for (int h = 0; h < NUM_IN_PORTS; h++) in_trig_i[c][h] = '1;
      for (int k = 0; k < NUM_OUT_PORTS; k++) out_trig_i[c][k] = '1;
    end
    for (int k = 0; k < CABLED; k++) begin
      // clock pair, director to receiver (input A only)
      if (cab_in(k) == 0 && out_clk_oe[0][k]) in_clk[cab_chassis(k)] = out_clk[0][k];
      for (int p = 0; p < PAIRS_PER_PORT; p++) begin
        if (out_trig_oe[0][k][p])
          in_trig_i[cab_chassis(k)][cab_in(k)][p] = out_trig_o[0][k][p];
        if (in_trig_oe[cab_chassis(k)][cab_in(k)][p])
          out_trig_i[0][k][p] = in_trig_o[cab_chassis(k)][cab_in(k)][p];
      end
    end
  end

  // A cable pair must never be driven from both ends at once: both boards
  // must agree on the direction of each signal.
  always_comb begin
    for (int k = 0; k < CABLED; k++)
      for (int p = 0; p < PAIRS_PER_PORT; p++)
        assert final (!(out_trig_oe[0][k][p] && in_trig_oe[cab_chassis(k)][cab_in(k)][p]))
          else $error("ddas_sync_top: cable %0d pair %0d driven from both ends", k, p);
  end

endmodule
