// ready_wire_or_tb: self-checking test of the chassis READY wire-OR line.
//
// The reference models the open-collector line slot by slot: it starts high
// (pull-up) and any present module that is not ready pulls it low. Directed
// cases (all ready, one module busy in each slot, busy module in an empty
// slot) are followed by 1000 random patterns.
module ready_wire_or_tb;

  localparam int unsigned SLOTS = 14;

  logic [SLOTS-1:0] ready, present;
  logic             chassis_ready;

  int checks = 0, failures = 0;

  ready_wire_or #(.SLOTS(SLOTS)) dut (
    .ready_i(ready), .present_i(present), .chassis_ready_o(chassis_ready)
  );

  function automatic logic line_model(logic [SLOTS-1:0] rdy, logic [SLOTS-1:0] pres);
    logic line = 1'b1;
    for (int i = 0; i < SLOTS; i++)
      if (pres[i] && !rdy[i]) line = 1'b0;
    return line;
  endfunction

  task automatic check(input string what);
    checks++;
    if (chassis_ready !== line_model(ready, present)) begin
      failures++;
      $display("FAIL %s: ready=%b present=%b got %0b", what, ready, present, chassis_ready);
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
    present = '1; ready = '1; #1; check("all ready");
    for (int i = 0; i < SLOTS; i++) begin
      present = '1; ready = '1; ready[i] = 1'b0; #1;
      check($sformatf("slot %0d busy", i));
      present[i] = 1'b0; #1;
      check($sformatf("busy slot %0d empty", i));
    end
    repeat (1000) begin
      present = SLOTS'($urandom);
      ready   = SLOTS'($urandom) | SLOTS'($urandom) | SLOTS'($urandom);
      #1; check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
