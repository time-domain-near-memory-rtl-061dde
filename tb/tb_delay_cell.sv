// tb_delay_cell -- self-checking testbench of the current-starved delay
// cell model. For a set of control voltages it applies a rising edge and
// measures the delay to the output edge, which must be
// T0 + ALPHA*V (+ BETA*V^2 + GAMMA*V^3 for the nonlinear instance); it
// checks that the delay grows with the control voltage and that falling
// edges pass after T_FALL_NS.
module tb_delay_cell;
  timeunit 1ns;
  timeprecision 1ps;

  localparam real BETA_NL = 0.02, GAMMA_NL = 0.0001;
  logic in = 1'b0;
  real v_ctrl_mv = 0.0;
  logic out, out_nl;
  realtime t_in, t_out, t_out_nl;
  int checks = 0, failures = 0;

  delay_cell dut (.in(in), .v_ctrl_mv(v_ctrl_mv), .out(out));
  delay_cell #(.BETA(BETA_NL), .GAMMA(GAMMA_NL)) dut_nl (.in(in), .v_ctrl_mv(v_ctrl_mv), .out(out_nl));

  always @(posedge out) t_out = $realtime;
  always @(posedge out_nl) t_out_nl = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(real a, real b);
    return (a - b) < 0.002 && (b - a) < 0.002;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real prev_d, d, e, e_nl;
    prev_d = 0.0;
    for (int k = 0; k <= 16; k++) begin
      v_ctrl_mv = 10.0 * k;
      #100;
      in = 1'b1; t_in = $realtime;
      #20000;
      d = t_out - t_in;
      e = 5000.0 + 36.0 * v_ctrl_mv;
      e_nl = e + BETA_NL * v_ctrl_mv * v_ctrl_mv + GAMMA_NL * v_ctrl_mv * v_ctrl_mv * v_ctrl_mv;
      check(near(d, e), $sformatf("V=%f: delay %f expected %f", v_ctrl_mv, d, e));
      check(near(t_out_nl - t_in, e_nl), $sformatf("V=%f: nonlinear delay %f expected %f", v_ctrl_mv, t_out_nl - t_in, e_nl));
      check(d > prev_d, "delay grows with the control voltage");
      prev_d = d;
      in = 1'b0; t_in = $realtime;
      #1.5;
      check(out == 1'b1, "output still high before T_FALL");
      #1;
      check(out == 1'b0, "falling edge passes after T_FALL");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
