// p16t_trigger_line_tb: self-checking test of one P16Trigger trigger signal.
//
// Random levels on every input, 2000 times. The reference states each driver
// rule separately: in normal signalling the master fans the backplane source
// line out to the cabled output pairs and every board drives the received
// signal onto the distribution line; in reversed signalling every board sends
// the distribution line back up its input pair and the master drives the AND
// of the cabled output pairs onto the source line. A disabled signal drives
// nothing. Values are compared only where the driver is on.
module p16t_trigger_line_tb;

  localparam int unsigned N = 8;

  logic         enable, master, reversed;
  logic [N-1:0] port_en, port_i, port_o, port_oe;
  logic         bp_src_i, bp_src_o, bp_src_oe;
  logic         bp_dist_i, bp_dist_o, bp_dist_oe;
  logic         in_i, in_o, in_oe;

  int checks = 0, failures = 0;
  int n_fwd = 0, n_rev = 0, n_and_low = 0;

  p16t_trigger_line #(.NUM_PORTS(N)) dut (
    .enable_i(enable), .master_i(master), .reversed_i(reversed), .port_en_i(port_en),
    .bp_src_i(bp_src_i), .bp_src_o(bp_src_o), .bp_src_oe(bp_src_oe),
    .bp_dist_i(bp_dist_i), .bp_dist_o(bp_dist_o), .bp_dist_oe(bp_dist_oe),
    .port_i(port_i), .port_o(port_o), .port_oe(port_oe),
    .in_i(in_i), .in_o(in_o), .in_oe(in_oe)
  );

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic all_ready;
    repeat (2000) begin
      enable    = ($urandom_range(7) != 0);
      master    = 1'($urandom);
      reversed  = 1'($urandom);
      port_en   = N'($urandom);
      // bias the returned pairs towards 1 so that the AND is sometimes true
      port_i    = N'($urandom) | N'($urandom) | N'($urandom);
      bp_src_i  = 1'($urandom);
      bp_dist_i = 1'($urandom);
      in_i      = 1'($urandom);
      #1;

      all_ready = 1'b1;
      for (int k = 0; k < N; k++) if (port_en[k] && !port_i[k]) all_ready = 1'b0;

      if (!enable) begin
        check(|port_oe, 1'b0, "disabled: output pairs off");
        check(bp_dist_oe, 1'b0, "disabled: distribution line off");
        check(bp_src_oe, 1'b0, "disabled: source line off");
        check(in_oe, 1'b0, "disabled: input pair off");
      end else if (!reversed) begin
        n_fwd++;
        check(in_oe, 1'b0, "normal: input pair is an input");
        check(bp_src_oe, 1'b0, "normal: source line is an input");
        check(bp_dist_oe, 1'b1, "normal: distribution line driven");
        check(bp_dist_o, in_i, "normal: distribution line = input pair");
        for (int k = 0; k < N; k++) begin
          check(port_oe[k], master & port_en[k], $sformatf("normal: port_oe[%0d]", k));
          if (port_oe[k]) check(port_o[k], bp_src_i, $sformatf("normal: port_o[%0d]", k));
        end
      end else begin
        n_rev++;
        check(|port_oe, 1'b0, "reversed: output pairs are inputs");
        check(bp_dist_oe, 1'b0, "reversed: distribution line is an input");
        check(in_oe, 1'b1, "reversed: input pair driven");
        check(in_o, bp_dist_i, "reversed: input pair = distribution line");
        check(bp_src_oe, master, "reversed: source line driven by master");
        if (master) begin
          check(bp_src_o, all_ready, "reversed: source line = AND of cabled pairs");
          if (!all_ready) n_and_low++;
        end
      end
    end
    checks++;
    if (n_fwd == 0 || n_rev == 0 || n_and_low == 0) begin
      failures++;
      $display("FAIL coverage: normal %0d reversed %0d AND-low %0d", n_fwd, n_rev, n_and_low);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
