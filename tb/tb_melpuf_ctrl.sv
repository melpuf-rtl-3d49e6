// tb_melpuf_ctrl: self-checking test of the capture controller.
//
// With N_PUF = 64, SIG_W = 8 and SETTLE_CYCLES = 4 the test releases reset and
// checks that ctrl stays low (PUF mode) until the capture ends, that the
// signature is valid exactly SETTLE_CYCLES + N_PUF/SIG_W cycles after reset
// release, that every word written carries the right slice of puf_bits at the
// right address and only while ctrl is low, and that each word is written once.
// It then pulses reread with new response bits and checks a second capture.
module tb_melpuf_ctrl;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N  = 64;
  localparam int W  = 8;
  localparam int S  = 4;
  localparam int WD = N / W;
  localparam int AW = $clog2(WD);

  logic clk = 1'b0;
  logic rst_n, reread;
  logic [N-1:0] bits;
  logic ctrl, we, sig_valid;
  logic [AW-1:0] waddr;
  logic [W-1:0] wdata;

  always #5 clk = ~clk;

  melpuf_ctrl #(.N_PUF(N), .SIG_W(W), .SETTLE_CYCLES(S)) dut (
    .clk(clk), .rst_n(rst_n), .reread(reread), .puf_bits(bits), .ctrl(ctrl),
    .we(we), .waddr(waddr), .wdata(wdata), .sig_valid(sig_valid));

  int checks = 0, failures = 0;
  logic [W-1:0] seen [WD];
  int nwrites [WD];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Collect the writes and compare them with the response bits.
  always @(posedge clk) begin
    if (rst_n && we) begin
      check(!ctrl, "write only in PUF mode");
      check(int'(waddr) < WD, "write address in range");
      check(wdata == bits[int'(waddr) * W +: W], $sformatf("word %0d carries its slice", waddr));
      seen[waddr] <= wdata;
      nwrites[waddr] <= nwrites[waddr] + 1;
    end
  end

  task automatic run_capture(input string tag);
    int cyc;
    cyc = 0;
    for (int w = 0; w < WD; w++) nwrites[w] = 0;
    while (!sig_valid && cyc < 1000) begin
      @(posedge clk);
      #1;
      cyc++;
      if (!sig_valid) check(!ctrl, {tag, ": PUF mode until captured"});
    end
    check(cyc == S + WD, $sformatf("%s: latency %0d cycles, expected %0d", tag, cyc, S + WD));
    check(ctrl, {tag, ": functional mode after capture"});
    for (int w = 0; w < WD; w++) begin
      check(nwrites[w] == 1, $sformatf("%s: word %0d written once", tag, w));
      check(seen[w] == bits[w * W +: W], $sformatf("%s: word %0d content", tag, w));
    end
    repeat (3) @(posedge clk);
    #1;
    check(ctrl && sig_valid && !we, {tag, ": stays in functional mode"});
  endtask

  initial begin
    #50000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n  = 1'b0;
    reread = 1'b0;
    bits   = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    #1;
    check(!ctrl && !sig_valid && !we, "reset: PUF mode, nothing valid");
    @(negedge clk);
    rst_n = 1'b1;
    run_capture("power-up");
    // reread with a different response on the lines
    @(negedge clk);
    bits   = {$urandom, $urandom};
    reread = 1'b1;
    @(negedge clk);
    reread = 1'b0;
    check(!ctrl && !sig_valid, "reread returns to PUF mode");
    run_capture("reread");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
