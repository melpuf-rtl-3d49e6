// tb_melpuf_sig_ram: self-checking test of the signature RAM.
//
// Fills all 32 words of 32 bits with random data, reads every word back with
// the one-cycle read latency, checks that a cycle with we low changes nothing,
// and that a read of the word being written in the same cycle returns the old
// value. A shadow array in the testbench holds the expected contents.
module tb_melpuf_sig_ram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W  = 32;
  localparam int WD = 32;
  localparam int AW = $clog2(WD);

  logic clk = 1'b0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [WD];

  always #5 clk = ~clk;

  melpuf_sig_ram #(.SIG_W(W), .WORDS(WD)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic read_word(input int a, output logic [W-1:0] d);
    @(negedge clk);
    raddr = AW'(a);
    @(posedge clk);
    #1;
    d = rdata;
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] d;
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    // fill
    for (int a = 0; a < WD; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = $urandom; shadow[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    // read back
    for (int a = 0; a < WD; a++) begin
      read_word(a, d);
      check(d == shadow[a], $sformatf("read word %0d: %h expected %h", a, d, shadow[a]));
    end
    // we low: data on the write port is ignored
    for (int a = 0; a < 4; a++) begin
      @(negedge clk);
      we = 1'b0; waddr = AW'(a); wdata = ~shadow[a];
    end
    for (int a = 0; a < 4; a++) begin
      read_word(a, d);
      check(d == shadow[a], $sformatf("no write with we low, word %0d", a));
    end
    // read during write of the same word returns the old contents
    @(negedge clk);
    we = 1'b1; waddr = AW'(5); raddr = AW'(5); wdata = ~shadow[5];
    @(posedge clk);
    #1;
    check(rdata == shadow[5], "read-during-write returns old data");
    shadow[5] = ~shadow[5];
    @(negedge clk);
    we = 1'b0;
    read_word(5, d);
    check(d == shadow[5], "new data visible after the write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
