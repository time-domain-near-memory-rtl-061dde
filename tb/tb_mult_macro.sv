// tb_mult_macro -- self-checking testbench of one multiply macro.
// For random and corner (input, weight) pairs it runs a multiplication
// phase of 18 cycles at 40 MHz, counts the pulses (must equal the input
// code) and checks the capacitor voltage against
// x * w * 11.1 nA * 12.5 ns / 200 fF. It checks that the output to the
// delay cell is 0 until phi_accumulate closes and equals the capacitor
// voltage after, that the capacitor holds with phi_multiply open, and
// that discharge empties it.
module tb_mult_macro;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, pg_rst_n = 1'b0, pg_en = 1'b0;
  logic phi_multiply = 1'b0, phi_accumulate = 1'b0, discharge = 1'b1;
  logic [3:0] x_code = '0, w_code = '0;
  real v_out_mv, v_cap_mv;
  logic pulse, over_range;
  int checks = 0, failures = 0, pulses = 0;

  mult_macro dut (.*);

  always #12.5 clk = ~clk;
  always @(posedge pulse) pulses++;

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

  task automatic run(input int x, input int w);
    real expect_v;
    @(negedge clk);
    discharge = 1'b1; pg_rst_n = 1'b0; phi_accumulate = 1'b0;
    x_code = 4'(x); w_code = 4'(w);
    @(negedge clk);
    discharge = 1'b0; pulses = 0;
    pg_rst_n = 1'b1; pg_en = 1'b1; phi_multiply = 1'b1;
    repeat (18) @(negedge clk);
    phi_multiply = 1'b0; pg_en = 1'b0;
    expect_v = real'(x * w) * 11.1 * 12.5 / 200.0;
    check(pulses == x, $sformatf("x=%0d: %0d pulses", x, pulses));
    check(near(v_cap_mv, expect_v), $sformatf("x=%0d w=%0d: V=%f expected %f", x, w, v_cap_mv, expect_v));
    check(near(v_out_mv, 0.0), "delay-cell output 0 while phi_accumulate open");
    check(!over_range, "inside the linear range");
    repeat (3) @(negedge clk);
    phi_accumulate = 1'b1; #1;
    check(near(v_out_mv, expect_v), "phi_accumulate passes the product voltage");
    check(near(v_cap_mv, expect_v), "capacitor holds after the multiplication phase");
    @(negedge clk); phi_accumulate = 1'b0; discharge = 1'b1; #1;
    check(near(v_cap_mv, 0.0), "reset phase discharges the capacitor");
  endtask

  initial begin
    run(0, 15); run(15, 0); run(15, 15); run(7, 1); run(1, 7);
    for (int k = 0; k < 20; k++) run($urandom % 16, $urandom % 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
