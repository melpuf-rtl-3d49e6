// melpuf_inv_pair: synthesizable form of the MeLPUF entropy source, two
// inverters connected in a loop (Inv 1 drives Inv 2, Inv 2 drives Inv 1).
//
// This is what gets implemented on silicon or in FPGA LUTs: the loop has two
// stable states, and the one it powers up in is set by device mismatch. The
// module has no inputs, so nothing can write the state; it can only be read.
// Both nodes are kept (keep attributes) so that synthesis does not remove or
// merge the loop; on an FPGA each inverter then occupies one LUT.
//
// Ports: inv1_out (Inv 1 output, the response bit), inv2_out (Inv 2 output).
// Timing: none; the outputs are valid once the loop has settled after power-up.
//
// The combinational loop reported by lint and synthesis tools is intended: it
// is the memory element itself. In a two-state simulator the loop takes
// whatever consistent value the simulator's initialisation gives it, so
// simulations that need a predictable, per-die response use the behavioural
// model melpuf_bistable instead (melpuf_cell parameter SYNTH_PAIR selects).
// The structure follows the paper; the keep attributes are this design's own.
module melpuf_inv_pair (
  output logic inv1_out,
  output logic inv2_out
);
  timeunit 1ns;
  timeprecision 1ps;

  (* keep *) logic n1;   // Inv 1 output = Inv 2 input
  (* keep *) logic n2;   // Inv 2 output = Inv 1 input

  assign n1 = ~n2;       // Inv 1
  assign n2 = ~n1;       // Inv 2

  assign inv1_out = n1;
  assign inv2_out = n2;

endmodule
