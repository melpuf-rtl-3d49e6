// tb_melpuf_inv_pair: self-checking test of the synthesizable inverter loop.
//
// Sixteen loops are observed for 100 clock-free time steps. The power-up state
// of each is whatever the simulator's initialisation gives it, so the test does
// not predict it; it checks the properties that hold whatever the state: the
// two nodes are always complementary, and each loop keeps its state over time.
module tb_melpuf_inv_pair;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NP = 16;

  logic [NP-1:0] q, qn;

  for (genvar i = 0; i < NP; i++) begin : g_dut
    melpuf_inv_pair u (.inv1_out(q[i]), .inv2_out(qn[i]));
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
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NP-1:0] first;
    #1;
    first = q;
    for (int t = 0; t < 100; t++) begin
      check(q == ~qn, $sformatf("nodes complementary (%h / %h)", q, qn));
      check(q == first, "state held");
      #1;
    end
    $display("power-up state of the %0d loops: %b", NP, first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
