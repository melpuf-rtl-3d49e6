// melpuf_top: a block of N_PUF MeLPUF sites with their capture logic.
//
// Each of the N_PUF sites sits on the output of one gate of a host logic
// design: gate_out[i] is the gate's original output and cell_out[i] is what the
// gate's fanout cone now receives. The host logic itself is outside this module
// (it is whatever design the sites were inserted into), which is why both sides
// of every site are ports.
//
// Operation:
//   1. At power-up each inverter pair settles into a random state.
//   2. After reset the controller holds the shared control signal low (PUF
//      mode, puf_mode = 1); every cell_out[i] carries site i's response bit.
//   3. After SETTLE_CYCLES the controller writes the N_PUF bits into the
//      signature RAM, SIG_W bits per cycle (bit i in word i / SIG_W, position
//      i % SIG_W).
//   4. It then raises the control signal: cell_out = gate_out and the host runs
//      normally; sig_valid says the RAM holds the signature, which is read out
//      through rd_addr / rd_data (one cycle read latency).
//   5. A pulse on reread repeats steps 2-4 without a power cycle.
//
// Ports: clk, rst_n (asynchronous, active low), vdd (supply present; drives the
// behavioural inverter pairs), reread, gate_out, cell_out, puf_mode, sig_valid,
// rd_addr, rd_data.
// Timing: signature valid SETTLE_CYCLES + N_PUF/SIG_W cycles after reset
// release, if vdd rose at least SETTLE_CYCLES clocks before that point.
//
// Following the paper: 1024 sites by default, a cross-coupled pair plus a
// control MUX per site, balancing registers, one control signal that is low for
// read-out and high for normal operation, and routing of the response to a RAM.
// Own choices: the RAM width, the settling time, the reread request and
// CHIP_SEED, which selects the simulated die (its per-site mismatches).
// SYNTH_PAIR = 1 builds every site with the synthesizable inverter loop
// instead of the behavioural model (for implementation; vdd is then unused).
module melpuf_top
  import melpuf_pkg::*;
#(
  parameter int unsigned N_PUF         = N_PUF_DEFAULT,
  parameter int unsigned SIG_W         = SIG_W_DEFAULT,
  parameter int unsigned SETTLE_CYCLES = SETTLE_CYCLES_DEFAULT,
  parameter int          NOISE         = NOISE_DEFAULT,
  parameter int unsigned CHIP_SEED     = 1,
  parameter bit          SYNTH_PAIR    = 1'b0,
  localparam int unsigned WORDS        = N_PUF / SIG_W,
  localparam int unsigned AW           = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             vdd,
  input  logic             reread,
  input  logic [N_PUF-1:0] gate_out,
  output logic [N_PUF-1:0] cell_out,
  output logic             puf_mode,
  output logic             sig_valid,
  input  logic [AW-1:0]    rd_addr,
  output logic [SIG_W-1:0] rd_data
);
  timeunit 1ns;
  timeprecision 1ps;

  logic             ctrl;
  logic             we;
  logic [AW-1:0]    waddr;
  logic [SIG_W-1:0] wdata;

  for (genvar i = 0; i < N_PUF; i++) begin : g_site
    // The second balancing register only loads Inv 2; its output is not used.
    melpuf_cell #(
      .SEED (32'((CHIP_SEED << 16) + i)),
      .NOISE     (NOISE),
      .SYNTH_PAIR(SYNTH_PAIR)
    ) u_cell (
      .clk    (clk),
      .vdd    (vdd),
      .ctrl   (ctrl),
      .data_in(gate_out[i]),
      .puf_out(cell_out[i]),
      .puf_bal()
    );
  end

  melpuf_ctrl #(
    .N_PUF        (N_PUF),
    .SIG_W        (SIG_W),
    .SETTLE_CYCLES(SETTLE_CYCLES)
  ) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .reread   (reread),
    .puf_bits (cell_out),
    .ctrl     (ctrl),
    .we       (we),
    .waddr    (waddr),
    .wdata    (wdata),
    .sig_valid(sig_valid)
  );

  melpuf_sig_ram #(
    .SIG_W(SIG_W),
    .WORDS(WORDS)
  ) u_ram (
    .clk  (clk),
    .we   (we),
    .waddr(waddr),
    .wdata(wdata),
    .raddr(rd_addr),
    .rdata(rd_data)
  );

  assign puf_mode = ~ctrl;

endmodule
