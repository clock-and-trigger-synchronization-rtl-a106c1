// two_chassis_bench_tb: the two-chassis bench set-up, run through the RTL.
//
// Two chassis, clocked from the oscillator of the director chassis' board.
//   Trigger test: a pulse train on trigger line 0 of the director chassis'
//     source line (point T1) must appear on the distribution line of both
//     chassis (T2 and T3), identical in both, with no skew between them.
//   READY test: trigger line 1 is reversed and two independent square waves
//     stand in for the chassis READY lines (T2, T3). The director chassis'
//     source line (T1) must carry their AND at every sample. The test counts
//     rising and falling edges of the output that each input caused.
// It checks 50 rising clock edges per microsecond at both chassis' PXI clock.
module two_chassis_bench_tb;
  import p16t_pkg::*;

  localparam int unsigned NC = 2, SLOTS = 14;

  p16t_cfg_t          cfg [NC];
  logic [NC-1:0]      osc_clk, pixie_clk, pxi_clk, chassis_ready;
  logic [NUM_SIG-1:0] trig_src [NC], bp_src [NC], bp_dist [NC];
  logic [SLOTS-1:0]   module_ready [NC], slot_present [NC];

  int checks = 0, failures = 0;
  int n_pulses = 0, n_and_rise = 0, n_and_fall = 0, pxi_edges [NC];
  bit count_edges = 0;

  ddas_sync_top #(.NUM_CHASSIS(NC), .SLOTS(SLOTS)) dut (
    .cfg_i(cfg), .osc_clk_i(osc_clk), .pixie_clk_i(pixie_clk),
    .trig_src_i(trig_src), .module_ready_i(module_ready), .slot_present_i(slot_present),
    .pxi_clk_o(pxi_clk), .bp_src_o(bp_src), .bp_dist_o(bp_dist),
    .chassis_ready_o(chassis_ready)
  );

  initial begin osc_clk = '0; pixie_clk = '0; end
  always #10 osc_clk[0] = ~osc_clk[0];   // 50 MHz
  always #8  osc_clk[1] = ~osc_clk[1];   // unused oscillator of the other board
  always #12 pixie_clk  = ~pixie_clk;
  for (genvar c = 0; c < NC; c++) begin : g_edge
    always @(posedge pxi_clk[c]) if (count_edges) pxi_edges[c]++;
  end

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev_and, exp_and;
    for (int c = 0; c < NC; c++) begin
      cfg[c].master   = (c == 0);
      cfg[c].clk_src  = CLK_FROM_OSC;
      cfg[c].mode     = TRIG_3X8;
      cfg[c].reversed = 6'b000010;            // line 1 carries READY
      cfg[c].port_en  = (c == 0) ? 8'h0F : '0;
      trig_src[c]     = '0;
      slot_present[c] = 14'h0001;             // one module drives each READY line
      module_ready[c] = '0;
    end

    // clock rate
    @(posedge osc_clk[0]); #2;
    pxi_edges[0] = 0; pxi_edges[1] = 0; count_edges = 1;
    repeat (200) begin
      check(pxi_clk[0], osc_clk[0], "T2-side PXI clock");
      check(pxi_clk[1], osc_clk[0], "T3-side PXI clock");
      #5;
    end
    count_edges = 0;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (pxi_edges[c] != 50) begin failures++; $display("FAIL chassis %0d clock edges %0d", c, pxi_edges[c]); end
    end

    // trigger test: pulser on T1
    repeat (40) begin
      trig_src[0][0] = 1'b1; #1;
      check(bp_dist[0][0], 1'b1, "T2 follows T1 high");
      check(bp_dist[1][0], 1'b1, "T3 follows T1 high");
      n_pulses++;
      #($urandom_range(5, 50));
      trig_src[0][0] = 1'b0; #1;
      check(bp_dist[0][0], 1'b0, "T2 follows T1 low");
      check(bp_dist[1][0], 1'b0, "T3 follows T1 low");
      #($urandom_range(5, 50));
    end

    // READY test: two square waves of different periods on T2 and T3
    prev_and = bp_src[0][1];
    for (int t = 0; t < 2000; t++) begin
      module_ready[0][0] = ((t / 37) % 2) == 1;
      module_ready[1][0] = ((t / 53) % 2) == 0;
      #1;
      exp_and = module_ready[0][0] & module_ready[1][0];
      check(bp_src[0][1], exp_and, "T1 = AND of T2, T3");
      if (exp_and && !prev_and) n_and_rise++;
      if (!exp_and && prev_and) n_and_fall++;
      prev_and = exp_and;
      #4;
    end

    $display("trigger pulses %0d, READY AND rising %0d falling %0d", n_pulses, n_and_rise, n_and_fall);
    checks++;
    if (n_pulses == 0 || n_and_rise == 0 || n_and_fall == 0) begin
      failures++;
      $display("FAIL a test phase did not happen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
