// melpuf_bistable: BEHAVIOURAL MODEL of the MeLPUF entropy source, a pair of
// cross-coupled inverters (Inv 1 and Inv 2). Not synthesizable as written.
//
// In silicon (or in FPGA LUTs) the cell is two inverters in a loop. At power-up
// both nodes start low, the loop passes through a metastable point and settles
// into one of its two stable states; which one depends on the threshold-voltage
// mismatch between the two inverters, plus some thermal noise. That analog
// behaviour cannot be expressed in two-state logic, so this model stands in for
// it:
//   * every instance carries a fixed mismatch, derived from SEED and spread
//     uniformly over [-MISMATCH_RANGE, MISMATCH_RANGE];
//   * every power-up adds a fresh noise term, spread uniformly over
//     [-NOISE, NOISE] and derived from SEED and the power-up count k = 0, 1, ...;
//   * SETTLE_NS after vdd rises the pair resolves: Inv 1's output becomes 1 when
//     mismatch + noise > 0 and 0 otherwise; Inv 2's output is its complement.
// While vdd is low, and during the settling time, both outputs read 0 (all
// nodes discharged, unresolved). The cell has no write path: once resolved it
// keeps its state for as long as vdd stays high, so the response is read-only.
//
// Ports: vdd (supply present), inv1_out, inv2_out (the two loop nodes).
// Timing: outputs valid SETTLE_NS after the rising edge of vdd. vdd must stay
// low for longer than SETTLE_NS between two power-ups.
//
// The structure (two inverters, Inv 1 driving the read-out) follows the paper;
// the mismatch/noise numbers are this model's own and are chosen so that the
// expected bit-error rate between two power-ups is NOISE / (3 * MISMATCH_RANGE),
// about 2.57 % for the default NOISE of 77.
module melpuf_bistable
  import melpuf_pkg::*;
#(
  parameter int unsigned SEED      = 0,
  parameter int          NOISE     = NOISE_DEFAULT,
  parameter int unsigned SETTLE_NS = 2
) (
  input  logic vdd,
  output logic inv1_out,
  output logic inv2_out
);
  timeunit 1ns;
  timeprecision 1ps;

  logic        node;        // Inv 1 output, i.e. Inv 2 input
  logic        resolved;    // the loop has left its metastable point
  int unsigned n_powerup;   // power-ups seen so far
  int          mismatch;    // fixed device mismatch of this instance

  initial begin
    node      = 1'b0;
    resolved  = 1'b0;
    n_powerup = 0;
    mismatch  = spread(mix32(SEED), MISMATCH_RANGE);
  end

  // Each power-up first discards the previous state, then resolves after the
  // settling time. While vdd is low the outputs are gated to 0 below.
  always @(posedge vdd) begin
    resolved <= 1'b0;
    #(SETTLE_NS * 1ns);
    if (vdd) begin
      node     <= (mismatch + spread(mix32(mix32(SEED) ^ mix32(n_powerup + 1)), NOISE)) > 0;
      resolved <= 1'b1;
    end
    n_powerup <= n_powerup + 1;
  end

  assign inv1_out = vdd & resolved &  node;
  assign inv2_out = vdd & resolved & ~node;

endmodule
