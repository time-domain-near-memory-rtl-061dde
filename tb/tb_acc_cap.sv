// tb_acc_cap -- self-checking testbench of the accumulation capacitor model.
// Applies current pulses of known amplitude and width and checks
// V = I*T/C (nA*ns/fF = mV) after each pulse, the hold between pulses,
// the discharge in the reset phase and the 300 mV over-range flag.
module tb_acc_cap;
  timeunit 1ns;
  timeprecision 1ps;

  real i_in_na = 0.0;
  logic discharge = 1'b1;
  real v_mv;
  logic over_range;
  int checks = 0, failures = 0;

  acc_cap dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(real a, real b);
    return (a - b) < 1.0e-6 && (b - a) < 1.0e-6;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expect_v;
    #10 discharge = 1'b0;
    #10;
    check(near(v_mv, 0.0), "starts discharged");
    expect_v = 0.0;
    // 7 pulses of 166.5 nA, 12.5 ns each, 12.5 ns apart
    for (int k = 0; k < 7; k++) begin
      i_in_na = 166.5; #12.5;
      i_in_na = 0.0;   #12.5;
      expect_v += 166.5 * 12.5 / 200.0;
      check(near(v_mv, expect_v), $sformatf("after pulse %0d: %f vs %f", k, v_mv, expect_v));
    end
    #500;
    check(near(v_mv, expect_v), "voltage held between pulses");
    check(!over_range, "no over-range at 72.8 mV");
    discharge = 1'b1; #10;
    check(near(v_mv, 0.0), "discharged in the reset phase");
    // Random pulse widths and currents
    discharge = 1'b0; expect_v = 0.0;
    for (int k = 0; k < 20; k++) begin
      real i, t;
      i = 11.1 * real'($urandom % 16);
      t = 1.0 + real'($urandom % 20);
      i_in_na = i; #(t);
      i_in_na = 0.0; #5;
      expect_v += i * t / 200.0;
      check(near(v_mv, expect_v), $sformatf("random pulse %0d", k));
    end
    // Over-range: keep charging past 300 mV
    discharge = 1'b1; #1; discharge = 1'b0;
    i_in_na = 166.5; #400; i_in_na = 0.0; #1;
    check(over_range, $sformatf("over-range flagged at %f mV", v_mv));
    discharge = 1'b1; #1;
    check(!over_range, "over-range clears on discharge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
