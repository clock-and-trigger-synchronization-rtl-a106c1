// ddas_sync_top_tb: end-to-end test of the four-chassis distribution system
// at its default size (4 chassis, 14 slots each).
//
// Every chassis has its own oscillator and Pixie-16 clock; those of the
// director chassis run at 50 MHz (Pixie clock 5 ns behind the oscillator),
// the others at different rates so that a wrong source shows. The test walks
// through the configurations the distribution supports:
//   1. clock from the director board's oscillator, 3 triggers to all chassis
//   2. clock from the director chassis' Pixie-16, same triggers
//   3. 6 triggers over two cables per chassis
//   4. 3-signal mode with signal 2 reversed: system-wide READY is the AND of
//      the chassis READY lines, each the wire-OR of 14 modules
//   5. 6-signal mode with signals 2 and 5 reversed
//   6. chassis 3 unplugged from the director board: its READY is ignored
// Expected values come from the system rules, not from the RTL: the PXI
// clock of every cabled chassis equals the director's selected source (50
// rising edges per us), each normal trigger line of every cabled chassis
// equals the director module's line, each reversed source line in the
// director chassis equals the AND over cabled chassis of their present,
// ready modules. Every mechanism is counted and must occur at least once.
module ddas_sync_top_tb;
  import p16t_pkg::*;

  localparam int unsigned NC    = 4;
  localparam int unsigned SLOTS = 14;

  p16t_cfg_t          cfg [NC];
  logic [NC-1:0]      osc_clk, pixie_clk, pxi_clk, chassis_ready;
  logic [NUM_SIG-1:0] trig_src [NC], bp_src [NC], bp_dist [NC];
  logic [SLOTS-1:0]   module_ready [NC], slot_present [NC];

  int checks = 0, failures = 0;

  // mechanism counters
  int n_clk_osc = 0, n_clk_pixie = 0, n_trig3 = 0, n_trig6 = 0;
  int n_ready_and_hi = 0, n_ready_and_lo = 0, n_chassis_busy = 0, n_unplugged = 0;

  ddas_sync_top dut (
    .cfg_i(cfg), .osc_clk_i(osc_clk), .pixie_clk_i(pixie_clk),
    .trig_src_i(trig_src), .module_ready_i(module_ready), .slot_present_i(slot_present),
    .pxi_clk_o(pxi_clk), .bp_src_o(bp_src), .bp_dist_o(bp_dist),
    .chassis_ready_o(chassis_ready)
  );

  // ---------------------------------------------------------------- clocks
  initial begin
    osc_clk = '0; pixie_clk = '0;
  end
  always #10 osc_clk[0] = ~osc_clk[0];                 // 50 MHz, edges at 0 mod 10 ns
  initial begin #5; forever #10 pixie_clk[0] = ~pixie_clk[0]; end  // 50 MHz, 5 ns later
  for (genvar c = 1; c < NC; c++) begin : g_other_clk
    always #7  osc_clk[c]   = ~osc_clk[c];
    always #13 pixie_clk[c] = ~pixie_clk[c];
  end

  int pxi_edges [NC];
  bit count_edges = 0;
  for (genvar c = 0; c < NC; c++) begin : g_edge
    always @(posedge pxi_clk[c]) if (count_edges) pxi_edges[c]++;
  end

  // ---------------------------------------------------------------- helpers
  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  // Configure all boards: chassis 0 is the director.
  task automatic configure(clk_src_e src, trig_mode_e mode, logic [NUM_SIG-1:0] rev,
                           logic [NUM_OUT_PORTS-1:0] cabled);
    for (int c = 0; c < NC; c++) begin
      cfg[c].master   = (c == 0);
      cfg[c].clk_src  = src;
      cfg[c].mode     = mode;
      cfg[c].reversed = rev;
      cfg[c].port_en  = (c == 0) ? cabled : '0;
    end
  endtask

  // Chassis c is cabled when its first cable (director connector 2c) is.
  function automatic bit cabled_chassis(int c);
    return cfg[0].port_en[2 * c];
  endfunction

  // Random stimulus on the director's trigger lines and the modules' READY.
  task automatic randomize_inputs();
    for (int c = 0; c < NC; c++) begin
      trig_src[c]     = NUM_SIG'($urandom);
      slot_present[c] = SLOTS'($urandom) | SLOTS'($urandom) | SLOTS'($urandom);
      module_ready[c] = ~SLOTS'(0);
      // now and then one or two modules are busy
      if ($urandom_range(5) == 0) module_ready[c][$urandom_range(SLOTS - 1)] = 1'b0;
      if ($urandom_range(9) == 0) module_ready[c][$urandom_range(SLOTS - 1)] = 1'b0;
    end
  endtask

  // One 5 ns step: new stimulus, settle 1 ns, check, wait the rest. Steps
  // start at 2 mod 5 ns so that no director clock edge falls on a check.
  task automatic step_and_check(clk_src_e src);
    bit exp_chassis [NC];
    bit sys_ready;
    randomize_inputs();
    #1;
    sys_ready = 1;
    for (int c = 0; c < NC; c++) begin
      exp_chassis[c] = 1;
      for (int i = 0; i < SLOTS; i++)
        if (slot_present[c][i] && !module_ready[c][i]) exp_chassis[c] = 0;
      check(chassis_ready[c], exp_chassis[c], $sformatf("chassis %0d READY line", c));
      if (!exp_chassis[c]) n_chassis_busy++;
      if (cabled_chassis(c)) sys_ready &= exp_chassis[c];
    end
    for (int c = 0; c < NC; c++) begin
      if (!cabled_chassis(c)) begin
        n_unplugged++;
        continue;
      end
      check(pxi_clk[c], src == CLK_FROM_OSC ? osc_clk[0] : pixie_clk[0],
            $sformatf("chassis %0d PXI clock", c));
      for (int s = 0; s < NUM_SIG; s++) begin
        if (cfg[0].mode == TRIG_3X8 && s >= PAIRS_PER_PORT) continue;
        if (!cfg[0].reversed[s]) begin
          check(bp_dist[c][s], trig_src[0][s], $sformatf("chassis %0d trigger %0d", c, s));
          if (cfg[0].mode == TRIG_6X4) n_trig6++; else n_trig3++;
        end else if (c == 0) begin
          check(bp_src[0][s], sys_ready, $sformatf("system READY on line %0d", s));
          if (sys_ready) n_ready_and_hi++; else n_ready_and_lo++;
        end
      end
    end
    #4;
  endtask

  // Run one configuration for 1 us and check the PXI clock rate.
  task automatic run_config(clk_src_e src, trig_mode_e mode, logic [NUM_SIG-1:0] rev,
                            logic [NUM_OUT_PORTS-1:0] cabled);
    configure(src, mode, rev, cabled);
    @(posedge osc_clk[0]);
    #2;
    for (int c = 0; c < NC; c++) pxi_edges[c] = 0;
    count_edges = 1;
    repeat (200) step_and_check(src);  // 200 x 5 ns = 1 us
    count_edges = 0;
    for (int c = 0; c < NC; c++) if (cabled_chassis(c)) begin
      checks++;
      if (pxi_edges[c] != 50) begin
        failures++;
        $display("FAIL chassis %0d: %0d PXI clock edges in 1 us, expected 50", c, pxi_edges[c]);
      end
    end
    if (src == CLK_FROM_OSC) n_clk_osc++; else n_clk_pixie++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    randomize_inputs();
    run_config(CLK_FROM_OSC,   TRIG_3X8, 6'b000000, 8'hFF);  // 1
    run_config(CLK_FROM_PIXIE, TRIG_3X8, 6'b000000, 8'hFF);  // 2
    run_config(CLK_FROM_OSC,   TRIG_6X4, 6'b000000, 8'hFF);  // 3
    run_config(CLK_FROM_OSC,   TRIG_3X8, 6'b000100, 8'hFF);  // 4
    run_config(CLK_FROM_PIXIE, TRIG_6X4, 6'b100100, 8'hFF);  // 5
    run_config(CLK_FROM_OSC,   TRIG_3X8, 6'b000100, 8'h3F);  // 6

    $display("mechanisms: clock-osc %0d clock-pixie %0d trig3x8 %0d trig6x4 %0d",
             n_clk_osc, n_clk_pixie, n_trig3, n_trig6);
    $display("            sysREADY-high %0d sysREADY-low %0d chassis-busy %0d unplugged %0d",
             n_ready_and_hi, n_ready_and_lo, n_chassis_busy, n_unplugged);
    checks++;
    if (n_clk_osc == 0 || n_clk_pixie == 0 || n_trig3 == 0 || n_trig6 == 0 ||
        n_ready_and_hi == 0 || n_ready_and_lo == 0 || n_chassis_busy == 0 || n_unplugged == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
