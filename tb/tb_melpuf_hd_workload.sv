// tb_melpuf_hd_workload: uniqueness and robustness of simulated MeLPUF dies.
//
// Two populations of dies are built from melpuf_top, each die with its own
// CHIP_SEED (its own set of inverter-pair mismatches):
//   A: 10 dies, as the ten boards of the hardware evaluation, but with 64
//      sites each instead of 1024 to keep the simulation build short;
//   B: 20 dies with 64 sites, like the 64-bit responses of the circuit-level
//      Monte-Carlo study (which used 10,000 runs; 20 are simulated here).
// Every die is powered up twice. After each power-up the testbench waits for
// the capture, reads the signature RAM and checks it bit by bit against the
// reference model. It then computes
//   inter-HD = mean over die pairs of HD(first signatures) / n,
//   intra-HD = mean over dies of HD(first, second signature) / n,
// prints both, and checks inter-HD within 47..53 % and intra-HD within 1..5 %.
module tb_melpuf_hd_workload;
  timeunit 1ns;
  timeprecision 1ps;
  import melpuf_ref_pkg::*;

  localparam int NA  = 64,   CA = 10;
  localparam int NB  = 64,   CB = 20;
  localparam int W   = 32;
  localparam int WDA = NA / W, WDB = NB / W;
  localparam int AWA = 1, AWB = 1;
  localparam int NZ  = 77;

  logic clk = 1'b0;
  logic rst_n, vdd;
  logic [AWA-1:0] ra;
  logic [AWB-1:0] rb;
  logic [W-1:0]   da [CA];
  logic [W-1:0]   db [CB];
  logic [CA-1:0]  va;
  logic [CB-1:0]  vb;

  always #5 clk = ~clk;

  for (genvar c = 0; c < CA; c++) begin : g_a
    logic [NA-1:0] co;
    logic pm;
    melpuf_top #(.N_PUF(NA), .CHIP_SEED(1 + c)) u (
      .clk(clk), .rst_n(rst_n), .vdd(vdd), .reread(1'b0), .gate_out('0),
      .cell_out(co), .puf_mode(pm), .sig_valid(va[c]), .rd_addr(ra), .rd_data(da[c]));
  end
  for (genvar c = 0; c < CB; c++) begin : g_b
    logic [NB-1:0] co;
    logic pm;
    melpuf_top #(.N_PUF(NB), .CHIP_SEED(101 + c)) u (
      .clk(clk), .rst_n(rst_n), .vdd(vdd), .reread(1'b0), .gate_out('0),
      .cell_out(co), .puf_mode(pm), .sig_valid(vb[c]), .rd_addr(rb), .rd_data(db[c]));
  end

  int checks = 0, failures = 0;
  logic [NA-1:0] sa [CA][2];
  logic [NB-1:0] sb [CB][2];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic measure(input int k);
    vdd = 1'b1;
    repeat (8) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    wait (&va && &vb);
    for (int w = 0; w < WDA; w++) begin
      @(negedge clk);
      ra = AWA'(w);
      rb = AWB'(w % WDB);
      @(posedge clk);
      #1;
      for (int c = 0; c < CA; c++) sa[c][k][w * W +: W] = da[c];
      if (w < WDB) for (int c = 0; c < CB; c++) sb[c][k][w * W +: W] = db[c];
    end
    for (int c = 0; c < CA; c++) begin
      logic [NA-1:0] r;
      for (int i = 0; i < NA; i++) r[i] = ref_bit(ref_site_seed(1 + c, i), k, NZ);
      check(sa[c][k] == r, $sformatf("die A%0d power-up %0d matches the reference", c, k));
    end
    for (int c = 0; c < CB; c++) begin
      logic [NB-1:0] r;
      for (int i = 0; i < NB; i++) r[i] = ref_bit(ref_site_seed(101 + c, i), k, NZ);
      check(sb[c][k] == r, $sformatf("die B%0d power-up %0d matches the reference", c, k));
    end
    @(negedge clk);
    vdd = 1'b0;
    rst_n = 1'b0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real inter_a, intra_a, inter_b, intra_b;
    longint hd;
    vdd = 1'b0; rst_n = 1'b0; ra = '0; rb = '0;
    repeat (4) @(posedge clk);
    measure(0);
    measure(1);
    hd = 0;
    for (int u = 0; u < CA - 1; u++)
      for (int v = u + 1; v < CA; v++) hd += $countones(sa[u][0] ^ sa[v][0]);
    inter_a = 100.0 * real'(hd) / (real'(NA) * CA * (CA - 1) / 2);
    hd = 0;
    for (int c = 0; c < CA; c++) hd += $countones(sa[c][0] ^ sa[c][1]);
    intra_a = 100.0 * real'(hd) / (real'(NA) * CA);
    hd = 0;
    for (int u = 0; u < CB - 1; u++)
      for (int v = u + 1; v < CB; v++) hd += $countones(sb[u][0] ^ sb[v][0]);
    inter_b = 100.0 * real'(hd) / (real'(NB) * CB * (CB - 1) / 2);
    hd = 0;
    for (int c = 0; c < CB; c++) hd += $countones(sb[c][0] ^ sb[c][1]);
    intra_b = 100.0 * real'(hd) / (real'(NB) * CB);
    $display("A: %0d dies x %0d bits: inter-HD %0.2f %%, intra-HD %0.2f %%", CA, NA, inter_a, intra_a);
    $display("B: %0d dies x %0d bits: inter-HD %0.2f %%, intra-HD %0.2f %%", CB, NB, inter_b, intra_b);
    check(inter_a > 47.0 && inter_a < 53.0, "A inter-HD near 50 %");
    check(intra_a > 1.0 && intra_a < 5.0, "A intra-HD near 2.6 %");
    check(inter_b > 47.0 && inter_b < 53.0, "B inter-HD near 50 %");
    check(intra_b > 1.0 && intra_b < 5.0, "B intra-HD near 2.6 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
