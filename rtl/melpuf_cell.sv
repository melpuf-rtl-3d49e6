// melpuf_cell: one MeLPUF site, placed on the output of a host logic gate.
//
// The cell is a cross-coupled inverter pair (melpuf_bistable), a balancing
// register on the output of each inverter and a 2:1 control MUX:
//
//   ctrl = 0  PUF mode:        puf_out = registered output of Inv 1
//   ctrl = 1  functional mode: puf_out = data_in (the host gate's output)
//
// puf_out replaces the gate output for the gate's fanout cone, and is also the
// line on which the response bit is sampled. Both inverters drive a register so
// that they see the same load; only Inv 1's register feeds the MUX. The other
// register is brought out as puf_bal, which always holds the complement of the
// response once the pair has resolved (the balanced "01"/"10" pair).
//
// Ports: clk, vdd (supply of the behavioural pair), ctrl (the control signal,
// shared by all cells), data_in (host gate output), puf_out, puf_bal.
// Timing: in PUF mode puf_out shows the pair's state one clk edge after the pair
// has resolved; in functional mode puf_out follows data_in combinationally.
// With BALANCE_REGS = 0 the registers are left out and Inv 1 drives the MUX
// directly, as in the bare unit structure.
//
// SYNTH_PAIR selects the inverter pair: 0 (default) the behavioural model
// melpuf_bistable, whose per-die response a testbench can predict; 1 the
// synthesizable loop melpuf_inv_pair, for implementation. With SYNTH_PAIR = 1
// the vdd input is unused.
//
// The inverter pair, the MUX polarity (0 selects the PUF) and the register
// balancing follow the paper. The balancing registers have no reset: they are
// plain pipeline registers sampling the pair every cycle.
module melpuf_cell
  import melpuf_pkg::*;
#(
  parameter int unsigned SEED         = 0,
  parameter int          NOISE        = NOISE_DEFAULT,
  parameter bit          BALANCE_REGS = 1'b1,
  parameter bit          SYNTH_PAIR   = 1'b0
) (
  input  logic clk,
  input  logic vdd,
  input  logic ctrl,
  input  logic data_in,
  output logic puf_out,
  output logic puf_bal
);
  timeunit 1ns;
  timeprecision 1ps;

  logic inv1, inv2;  // the two nodes of the loop
  logic puf_bit;     // response bit offered to the MUX

  if (SYNTH_PAIR) begin : g_loop
    // Synthesizable loop; vdd only feeds the behavioural model.
    melpuf_inv_pair u_pair (
      .inv1_out(inv1),
      .inv2_out(inv2)
    );
  end else begin : g_model
    melpuf_bistable #(.SEED(SEED), .NOISE(NOISE)) u_pair (
      .vdd     (vdd),
      .inv1_out(inv1),
      .inv2_out(inv2)
    );
  end

  if (BALANCE_REGS) begin : g_bal
    logic reg1, reg2;
    always_ff @(posedge clk) begin
      reg1 <= inv1;
      reg2 <= inv2;
    end
    assign puf_bit = reg1;
    assign puf_bal = reg2;
  end else begin : g_nobal
    assign puf_bit = inv1;
    assign puf_bal = inv2;
  end

  // Control MUX: input 0 is the PUF, input 1 the host logic.
  assign puf_out = ctrl ? data_in : puf_bit;

endmodule
