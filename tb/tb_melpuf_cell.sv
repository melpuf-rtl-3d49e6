// tb_melpuf_cell: self-checking test of one MeLPUF site (pair + balancing
// registers + control MUX).
//
// Eight cells with balancing registers and eight without, all noiseless, share
// clk, vdd, ctrl and data_in. The test checks:
//   * PUF mode (ctrl = 0): after power-up and one clock edge puf_out is the
//     reference power-up state and puf_bal its complement;
//   * the register balancing adds exactly one clock edge: between the pair's
//     resolution and the next edge the balanced cells still show 0 while the
//     unbalanced ones already show the state;
//   * functional mode (ctrl = 1): puf_out follows data_in, for random data;
//   * back in PUF mode the same response reappears (read-only, no write path);
//   * eight more cells built with the synthesizable loop (SYNTH_PAIR = 1),
//     whose state is not predictable, show complementary, stable registers
//     and the same functional-mode pass-through.
module tb_melpuf_cell;
  timeunit 1ns;
  timeprecision 1ps;
  import melpuf_ref_pkg::*;

  localparam int NC = 8;

  logic clk = 1'b0;
  logic vdd, ctrl;
  logic [NC-1:0] din;
  logic [NC-1:0] out_b, bal_b, out_u, bal_u;
  logic [NC-1:0] exp_bits;

  always #5 clk = ~clk;   // 100 MHz

  for (genvar i = 0; i < NC; i++) begin : g_dut
    melpuf_cell #(.SEED(300 + i), .NOISE(0), .BALANCE_REGS(1'b1)) ub (
      .clk(clk), .vdd(vdd), .ctrl(ctrl), .data_in(din[i]), .puf_out(out_b[i]), .puf_bal(bal_b[i]));
    melpuf_cell #(.SEED(300 + i), .NOISE(0), .BALANCE_REGS(1'b0)) uu (
      .clk(clk), .vdd(vdd), .ctrl(ctrl), .data_in(din[i]), .puf_out(out_u[i]), .puf_bal(bal_u[i]));
    assign exp_bits[i] = ref_bit(300 + i, 0, 0);
  end

  // Cells built with the synthesizable inverter loop.
  logic [NC-1:0] out_s, bal_s;
  for (genvar i = 0; i < NC; i++) begin : g_syn
    melpuf_cell #(.SYNTH_PAIR(1'b1)) us (
      .clk(clk), .vdd(vdd), .ctrl(ctrl), .data_in(din[i]), .puf_out(out_s[i]), .puf_bal(bal_s[i]));
  end

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vdd  = 1'b0;
    ctrl = 1'b0;
    din  = '1;
    repeat (3) @(posedge clk);
    #1;
    check(out_b == '0 && out_u == '0, "PUF mode output low before power-up");
    vdd = 1'b1;              // the pairs resolve 2 ns later, before the next edge
    #3;
    check(out_u == exp_bits, "unbalanced cell shows the state at once");
    check(out_b == '0, "balanced cell waits for the register");
    @(posedge clk);
    #1;
    check(exp_bits != '0 && exp_bits != '1, "reference response has both values");
    check(out_b == exp_bits, "balanced cell shows the state after one edge");
    check(bal_b == ~exp_bits, "second register holds the complement");
    check(bal_u == ~exp_bits, "Inv 2 holds the complement");
    check(out_s == ~bal_s, "synthesizable loop: registers hold complementary nodes");
    begin
      logic [NC-1:0] syn0;
      syn0 = out_s;
      @(posedge clk);
      #1;
      check(out_s == syn0, "synthesizable loop: state held");
    end
    // functional mode
    ctrl = 1'b1;
    for (int t = 0; t < 20; t++) begin
      din = NC'($urandom);
      #1;
      check(out_b == din && out_u == din && out_s == din, $sformatf("functional mode passes data %h", din));
      @(posedge clk);
    end
    // back to PUF mode: same response
    ctrl = 1'b0;
    #1;
    check(out_b == exp_bits && out_u == exp_bits, "response unchanged after functional mode");
    repeat (5) @(posedge clk);
    #1;
    check(out_b == exp_bits, "response stable while powered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
