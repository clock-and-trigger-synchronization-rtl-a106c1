// p16t_clock_dist_tb: self-checking test of the P16Trigger clock path.
//
// Part 1 applies random levels to every input and compares each output with
// a reference written from the board's rules: the master drives the selected
// source onto every cabled output connector, every board passes its input
// clock on to the PXI path. Part 2 runs a 50 MHz oscillator and a 50 MHz
// Pixie-16 clock (phase-shifted by 5 ns), loops output connector 0 back to
// the input as the clock master does, and counts rising edges over 1 us: the
// PXI clock must carry 50 of them and follow the selected source.
module p16t_clock_dist_tb;
  import p16t_pkg::*;

  localparam int unsigned N = 8;

  logic         master, osc_clk, pixie_clk, in_clk, pxi_clk;
  clk_src_e     clk_src;
  logic [N-1:0] port_en, out_clk, out_clk_oe;
  bit           loopback;

  int checks = 0, failures = 0;

  p16t_clock_dist #(.NUM_OUT_PORTS(N)) dut (
    .master_i(master), .clk_src_i(clk_src), .osc_clk_i(osc_clk),
    .pixie_clk_i(pixie_clk), .port_en_i(port_en), .in_clk_i(in_clk),
    .out_clk_o(out_clk), .out_clk_oe(out_clk_oe), .pxi_clk_o(pxi_clk)
  );

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  // Free-running clocks for part 2 (enabled by run_clocks).
  bit run_clocks = 0;
  always begin
    #10;
    if (run_clocks) osc_clk = ~osc_clk;
  end
  initial begin
    #5;
    forever begin
      #10;
      if (run_clocks) pixie_clk = ~pixie_clk;
    end
  end
  always_comb if (loopback) in_clk = out_clk_oe[0] ? out_clk[0] : 1'b1;

  int pxi_edges = 0;
  always @(posedge pxi_clk) if (run_clocks) pxi_edges++;

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_src;
    loopback = 0;
    master = 0; clk_src = CLK_FROM_PIXIE; osc_clk = 0; pixie_clk = 0;
    in_clk = 0; port_en = '0;

    // Part 1: random levels.
    repeat (400) begin
      master    = 1'($urandom);
      clk_src   = clk_src_e'($urandom_range(1));
      osc_clk   = 1'($urandom);
      pixie_clk = 1'($urandom);
      in_clk    = 1'($urandom);
      port_en   = N'($urandom);
      #1;
      if (clk_src == CLK_FROM_OSC) exp_src = osc_clk; else exp_src = pixie_clk;
      check(pxi_clk, in_clk, "pxi clock follows input connector");
      for (int k = 0; k < N; k++) begin
        check(out_clk_oe[k], master && port_en[k], $sformatf("out_clk_oe[%0d]", k));
        if (out_clk_oe[k]) check(out_clk[k], exp_src, $sformatf("out_clk[%0d]", k));
      end
    end

    // Part 2: running clocks, source = oscillator, then Pixie-16.
    osc_clk = 0; pixie_clk = 0;
    master = 1; port_en = '1; loopback = 1;
    for (int src = 1; src >= 0; src--) begin
      clk_src   = clk_src_e'(src);
      run_clocks = 1;
      @(posedge osc_clk);
      #2;  // sample between edges: osc edges at 0 mod 10 ns, Pixie at 5 mod 10 ns
      pxi_edges = 0;
      repeat (200) begin
        #5;
        check(pxi_clk, src ? osc_clk : pixie_clk, "pxi clock equals selected source");
      end
      // 200 x 5 ns = 1 us at 50 MHz: 50 rising edges
      checks++;
      if (pxi_edges != 50) begin
        failures++;
        $display("FAIL %0d rising edges in 1 us, expected 50", pxi_edges);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
