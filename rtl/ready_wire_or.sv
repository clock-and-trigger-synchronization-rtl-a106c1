// ready_wire_or: the chassis-wide READY line on a PXI backplane.
//
// Every Pixie-16 module connects its module-wide READY to one shared
// open-collector line: a module that is not ready pulls the line low, a
// pull-up holds it high otherwise. The line therefore reads READY only when
// every attached module is ready (wire-OR of the low-active "not ready",
// i.e. an AND of READY). Slots without a module (present_i low) do not pull.
// The shared line follows the paper; the slot count is this design's choice
// (14 modules of 16 channels cover the paper's up to 226 channels per
// chassis). Combinational.
module ready_wire_or #(
  parameter int unsigned SLOTS = 14
) (
  input  logic [SLOTS-1:0] ready_i,
  input  logic [SLOTS-1:0] present_i,
  output logic             chassis_ready_o
);

  logic [SLOTS-1:0] pull_low;

  always_comb begin
    pull_low        = present_i & ~ready_i;
    chassis_ready_o = ~|pull_low;
  end

endmodule
