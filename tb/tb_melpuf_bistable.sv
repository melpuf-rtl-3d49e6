// tb_melpuf_bistable: self-checking test of the behavioural inverter-pair model.
//
// 32 pairs without noise and 32 with the default noise are powered up and down
// five times. After each power-up the test checks that both nodes read 0 before
// the settling time, that afterwards the two nodes are complementary, that Inv
// 1's state matches the reference model (melpuf_ref_pkg) for that power-up, and
// that the state holds while the supply stays on. It also checks that over the
// 64 sites both values occur, and that the noisy group shows some, but few,
// bit changes between power-ups.
module tb_melpuf_bistable;
  timeunit 1ns;
  timeprecision 1ps;
  import melpuf_ref_pkg::*;

  localparam int NS   = 32;   // sites per group
  localparam int NZ   = 77;   // noise of the noisy group
  localparam int RUNS = 5;

  logic vdd;
  logic [NS-1:0] q0, qn0, q1, qn1;   // group 0 noiseless, group 1 noisy

  for (genvar i = 0; i < NS; i++) begin : g_dut
    melpuf_bistable #(.SEED(1000 + i), .NOISE(0)) u0 (.vdd(vdd), .inv1_out(q0[i]), .inv2_out(qn0[i]));
    melpuf_bistable #(.SEED(2000 + i), .NOISE(NZ)) u1 (.vdd(vdd), .inv1_out(q1[i]), .inv2_out(qn1[i]));
  end

  int checks = 0, failures = 0;
  int ones = 0, changes = 0;
  logic [NS-1:0] first1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vdd = 1'b0;
    #10;
    check(q0 == '0 && qn0 == '0 && q1 == '0 && qn1 == '0, "nodes low while unpowered");
    for (int k = 0; k < RUNS; k++) begin
      vdd = 1'b1;
      #1;
      check(q0 == '0 && qn0 == '0, "unresolved during settling");
      #4;
      for (int i = 0; i < NS; i++) begin
        check(q0[i] == ~qn0[i] && q1[i] == ~qn1[i], $sformatf("complementary nodes site %0d", i));
        check(q0[i] == ref_bit(1000 + i, k, 0), $sformatf("noiseless site %0d run %0d", i, k));
        check(q1[i] == ref_bit(2000 + i, k, NZ), $sformatf("noisy site %0d run %0d", i, k));
        if (k == 0) ones += int'(q0[i]) + int'(q1[i]);
      end
      if (k == 0) first1 = q1;
      else changes += $countones(q1 ^ first1);
      // the state is held while powered
      begin
        logic [NS-1:0] h0, h1;
        h0 = q0; h1 = q1;
        #50;
        check(q0 == h0 && q1 == h1, "state held while powered");
      end
      vdd = 1'b0;
      #1;
      check(q0 == '0 && q1 == '0, "nodes discharge at power-down");
      #20;
    end
    check(ones > 16 && ones < 48, $sformatf("both power-up values occur (%0d ones of 64)", ones));
    check(changes < 4 * NS / 4, $sformatf("noisy group mostly stable (%0d changes)", changes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
