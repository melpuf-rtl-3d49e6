// tb_melpuf_top: end-to-end test of the MeLPUF block at its default size
// (1024 sites, 32-bit signature words, 16 settling cycles), no parameters set.
//
// One complete operation and its variants:
//   1. power-up: vdd rises, reset is released; during PUF mode every cell_out
//      must carry the reference power-up state of its site;
//   2. capture: sig_valid must rise exactly SETTLE_CYCLES + 1024/32 = 48 cycles
//      after reset release; all 32 RAM words are read back and compared with
//      the reference signature;
//   3. functional mode: cell_out must equal gate_out for random host values;
//   4. reread: a second capture without a power cycle must give the same
//      signature and the same latency;
//   5. power cycle: a new power-up gives a new measurement, compared with the
//      reference for the second power-up; the bit-error rate against the first
//      measurement (intra-HD) and the share of ones are reported and bounded.
// Each mechanism (capture, functional mode, reread, power cycle) is counted; one
// that never happened counts as a failure.
module tb_melpuf_top;
  timeunit 1ns;
  timeprecision 1ps;
  import melpuf_ref_pkg::*;

  localparam int N    = 1024;
  localparam int W    = 32;
  localparam int WD   = N / W;
  localparam int AW   = $clog2(WD);
  localparam int S    = 16;
  localparam int NZ   = 77;
  localparam int CHIP = 1;

  logic clk = 1'b0;
  logic rst_n, vdd, reread;
  logic [N-1:0] gate_out, cell_out;
  logic puf_mode, sig_valid;
  logic [AW-1:0] rd_addr;
  logic [W-1:0] rd_data;

  always #5 clk = ~clk;   // 100 MHz

  melpuf_top dut (
    .clk(clk), .rst_n(rst_n), .vdd(vdd), .reread(reread), .gate_out(gate_out),
    .cell_out(cell_out), .puf_mode(puf_mode), .sig_valid(sig_valid),
    .rd_addr(rd_addr), .rd_data(rd_data));

  int checks = 0, failures = 0;
  int n_capture = 0, n_func = 0, n_reread = 0, n_powercycle = 0;
  logic [N-1:0] ref0, ref1, sig0, sig1, sig_rr;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [N-1:0] reference(input int unsigned k);
    logic [N-1:0] r;
    for (int i = 0; i < N; i++) r[i] = ref_bit(ref_site_seed(CHIP, i), k, NZ);
    return r;
  endfunction

  // Wait for sig_valid, checking PUF mode and the response lines meanwhile.
  task automatic wait_capture(input logic [N-1:0] expv, input string tag);
    int cyc;
    cyc = 0;
    while (!sig_valid && cyc < 2000) begin
      @(posedge clk);
      #1;
      cyc++;
      if (cyc == 2) check(puf_mode && cell_out == expv, {tag, ": response on the cell outputs"});
    end
    check(cyc == S + WD, $sformatf("%s: capture latency %0d, expected %0d", tag, cyc, S + WD));
    check(!puf_mode, {tag, ": functional mode after capture"});
    n_capture++;
  endtask

  task automatic read_sig(output logic [N-1:0] s);
    for (int w = 0; w < WD; w++) begin
      @(negedge clk);
      rd_addr = AW'(w);
      @(posedge clk);
      #1;
      s[w * W +: W] = rd_data;
    end
  endtask

  task automatic functional(input string tag);
    for (int t = 0; t < 8; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i += 32) gate_out[i +: 32] = $urandom;
      #1;
      check(cell_out == gate_out, {tag, ": host values pass in functional mode"});
    end
    n_func++;
  endtask

  task automatic power_up();
    vdd = 1'b1;
    repeat (S / 2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hd, ones;
    ref0 = reference(0);
    ref1 = reference(1);
    vdd = 1'b0; rst_n = 1'b0; reread = 1'b0; rd_addr = '0;
    for (int i = 0; i < N; i += 32) gate_out[i +: 32] = $urandom;
    repeat (4) @(posedge clk);
    // 1-2: power-up and capture
    power_up();
    wait_capture(ref0, "power-up");
    read_sig(sig0);
    check(sig0 == ref0, "signature in RAM matches the reference");
    // 3: functional mode
    functional("after power-up");
    // 4: reread
    @(negedge clk);
    reread = 1'b1;
    @(negedge clk);
    reread = 1'b0;
    check(puf_mode && !sig_valid, "reread enters PUF mode");
    n_reread++;
    wait_capture(ref0, "reread");
    read_sig(sig_rr);
    check(sig_rr == sig0, "reread gives the same signature");
    functional("after reread");
    // 5: power cycle
    @(negedge clk);
    vdd = 1'b0;
    rst_n = 1'b0;
    repeat (4) @(posedge clk);
    #1;
    check(cell_out == '0, "cells read 0 with the supply off");
    power_up();
    n_powercycle++;
    wait_capture(ref1, "second power-up");
    read_sig(sig1);
    check(sig1 == ref1, "second measurement matches the reference");
    hd = $countones(sig0 ^ sig1);
    ones = $countones(sig0);
    $display("intra-HD between power-ups: %0d of %0d bits (%0.2f %%)", hd, N, 100.0 * hd / N);
    $display("share of ones: %0d of %0d bits (%0.2f %%)", ones, N, 100.0 * ones / N);
    check(hd > 0 && hd < N / 16, "intra-HD between 0 and 6.25 %");
    check(ones > N * 2 / 5 && ones < N * 3 / 5, "share of ones between 40 and 60 %");
    functional("after power cycle");
    $display("mechanisms: capture=%0d functional=%0d reread=%0d power_cycle=%0d",
             n_capture, n_func, n_reread, n_powercycle);
    check(n_capture > 0, "capture happened");
    check(n_func > 0, "functional mode happened");
    check(n_reread > 0, "reread happened");
    check(n_powercycle > 0, "power cycle happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
