// p16t_trigger_line: the buffers of one trigger signal on a P16Trigger board.
//
// Each signal touches four places: the backplane source line (the director
// module drives it, probe point T1), the backplane distribution line (read
// by all modules, T2/T3), the signal's pair on each output connector and its
// pair on the input connector. Every bidirectional place is an (_i, _o, _oe)
// triple.
//
//   normal   : bp_src  -> every enabled output pair          (master only)
//              input pair -> bp_dist
//   reversed : bp_dist -> input pair (back towards the master)
//              AND of all enabled output pairs -> bp_src    (master only)
//
// In reversed signalling every chassis sends its chassis-wide READY up its
// cable and the director's board forms the system-wide READY as the AND of
// what comes back, as the paper describes. Output pairs without a cable
// (port_en_i low) count as true in the AND. enable_i low switches every
// driver off (a signal that the current mode does not use). Combinational.
module p16t_trigger_line #(
  parameter int unsigned NUM_PORTS = 8
) (
  input  logic                 enable_i,
  input  logic                 master_i,
  input  logic                 reversed_i,
  input  logic [NUM_PORTS-1:0] port_en_i,
  // backplane source line (T1)
  input  logic                 bp_src_i,
  output logic                 bp_src_o,
  output logic                 bp_src_oe,
  // backplane distribution line (T2/T3)
  input  logic                 bp_dist_i,
  output logic                 bp_dist_o,
  output logic                 bp_dist_oe,
  // this signal's pair on each output connector
  input  logic [NUM_PORTS-1:0] port_i,
  output logic [NUM_PORTS-1:0] port_o,
  output logic [NUM_PORTS-1:0] port_oe,
  // this signal's pair on the input connector
  input  logic                 in_i,
  output logic                 in_o,
  output logic                 in_oe
);

  logic fwd, rev;

  always_comb begin
    fwd = enable_i & ~reversed_i;
    rev = enable_i &  reversed_i;

    // normal direction
    port_o     = {NUM_PORTS{bp_src_i & fwd & master_i}};
    port_oe    = port_en_i & {NUM_PORTS{fwd & master_i}};
    bp_dist_o  = in_i & fwd;
    bp_dist_oe = fwd;

    // reversed direction
    in_o      = bp_dist_i & rev;
    in_oe     = rev;
    bp_src_o  = (&(port_i | ~port_en_i)) & rev & master_i;
    bp_src_oe = rev & master_i;
  end

endmodule
