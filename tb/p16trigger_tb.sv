// p16trigger_tb: self-checking test of one P16Trigger board.
//
// Random configurations (master or receiver, clock source, 3x8 or 6x4 mode,
// per-signal direction, cabled connectors) and random levels on every input
// pin, 3000 times. The reference works per connector pair: it finds which
// signal owns the pair in the current mode (pair p of output connector k
// carries signal p, or p+3 when k is odd in 6x4 mode; pair p of input
// connector h carries signal 3h+p) and applies the direction rules of that
// signal. It also counts that both modes, both directions and both clock
// sources were exercised.
module p16trigger_tb;
  import p16t_pkg::*;

  localparam int unsigned N = NUM_OUT_PORTS;
  localparam int unsigned P = PAIRS_PER_PORT;

  p16t_cfg_t    cfg;
  logic         osc_clk, pixie_clk, pxi_clk, in_clk;
  logic [N-1:0] out_clk, out_clk_oe;
  logic [P-1:0] out_trig_i [N], out_trig_o [N], out_trig_oe [N];
  logic [P-1:0] in_trig_i [NUM_IN_PORTS], in_trig_o [NUM_IN_PORTS], in_trig_oe [NUM_IN_PORTS];
  logic [NUM_SIG-1:0] bp_src_i, bp_src_o, bp_src_oe, bp_dist_i, bp_dist_o, bp_dist_oe;

  int checks = 0, failures = 0;
  int n_mode6 = 0, n_mode3 = 0, n_rev = 0, n_fwd = 0, n_osc = 0, n_pix = 0;

  p16trigger dut (
    .cfg_i(cfg), .osc_clk_i(osc_clk), .pixie_clk_i(pixie_clk), .pxi_clk_o(pxi_clk),
    .out_clk_o(out_clk), .out_clk_oe(out_clk_oe),
    .out_trig_i(out_trig_i), .out_trig_o(out_trig_o), .out_trig_oe(out_trig_oe),
    .in_clk_i(in_clk), .in_trig_i(in_trig_i), .in_trig_o(in_trig_o), .in_trig_oe(in_trig_oe),
    .bp_src_i(bp_src_i), .bp_src_o(bp_src_o), .bp_src_oe(bp_src_oe),
    .bp_dist_i(bp_dist_i), .bp_dist_o(bp_dist_o), .bp_dist_oe(bp_dist_oe)
  );

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  // Does output connector k carry signal s in this configuration?
  function automatic bit carries(int k, int s);
    if (cfg.mode == TRIG_3X8) return s < P;
    return (s / P) == (k % 2);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit used, and_v;
    int sig;
    repeat (3000) begin
      cfg.master   = 1'($urandom);
      cfg.clk_src  = clk_src_e'($urandom_range(1));
      cfg.mode     = trig_mode_e'($urandom_range(1));
      cfg.reversed = NUM_SIG'($urandom);
      cfg.port_en  = N'($urandom) | N'($urandom);
      osc_clk = 1'($urandom); pixie_clk = 1'($urandom); in_clk = 1'($urandom);
      for (int k = 0; k < N; k++) out_trig_i[k] = P'($urandom) | P'($urandom) | P'($urandom);
      for (int h = 0; h < NUM_IN_PORTS; h++) in_trig_i[h] = P'($urandom);
      bp_src_i = NUM_SIG'($urandom); bp_dist_i = NUM_SIG'($urandom);
      #1;
      if (cfg.mode == TRIG_6X4) n_mode6++; else n_mode3++;
      if (cfg.master && cfg.clk_src == CLK_FROM_OSC) n_osc++;
      if (cfg.master && cfg.clk_src == CLK_FROM_PIXIE) n_pix++;

      // clock
      check(pxi_clk, in_clk, "pxi clock");
      for (int k = 0; k < N; k++) begin
        check(out_clk_oe[k], cfg.master && cfg.port_en[k], "out_clk_oe");
        if (out_clk_oe[k])
          check(out_clk[k], cfg.clk_src == CLK_FROM_OSC ? osc_clk : pixie_clk, "out_clk");
      end

      // output connector pairs
      for (int k = 0; k < N; k++)
        for (int p = 0; p < P; p++) begin
          sig = (cfg.mode == TRIG_6X4 && k % 2 == 1) ? p + P : p;
          check(out_trig_oe[k][p],
                cfg.master && cfg.port_en[k] && carries(k, sig) && !cfg.reversed[sig],
                $sformatf("out_trig_oe[%0d][%0d]", k, p));
          if (out_trig_oe[k][p])
            check(out_trig_o[k][p], bp_src_i[sig], $sformatf("out_trig_o[%0d][%0d]", k, p));
        end

      // input connector pairs and backplane lines, per signal
      for (int s = 0; s < NUM_SIG; s++) begin
        used = (cfg.mode == TRIG_6X4) || s < P;
        if (used && cfg.reversed[s]) n_rev++;
        if (used && !cfg.reversed[s]) n_fwd++;
        check(in_trig_oe[s / P][s % P], used && cfg.reversed[s], $sformatf("in_trig_oe sig %0d", s));
        if (in_trig_oe[s / P][s % P])
          check(in_trig_o[s / P][s % P], bp_dist_i[s], $sformatf("in_trig_o sig %0d", s));
        check(bp_dist_oe[s], used && !cfg.reversed[s], $sformatf("bp_dist_oe[%0d]", s));
        if (bp_dist_oe[s])
          check(bp_dist_o[s], in_trig_i[s / P][s % P], $sformatf("bp_dist_o[%0d]", s));
        check(bp_src_oe[s], used && cfg.reversed[s] && cfg.master, $sformatf("bp_src_oe[%0d]", s));
        if (bp_src_oe[s]) begin
          and_v = 1;
          for (int k = 0; k < N; k++)
            if (cfg.port_en[k] && carries(k, s) && !out_trig_i[k][s % P]) and_v = 0;
          check(bp_src_o[s], and_v, $sformatf("bp_src_o[%0d] (AND)", s));
        end
      end
    end
    checks++;
    if (n_mode6 == 0 || n_mode3 == 0 || n_rev == 0 || n_fwd == 0 || n_osc == 0 || n_pix == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
