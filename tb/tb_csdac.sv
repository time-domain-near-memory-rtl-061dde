// tb_csdac -- self-checking testbench of the current-steering DAC model.
// Sweeps all codes with the switch open and closed and compares the
// steered currents with code * 11.1 nA (full scale 166.5 nA), and checks
// that the total current is conserved between the two outputs.
module tb_csdac;
  timeunit 1ns;
  timeprecision 1ps;

  logic [3:0] code = '0;
  logic sw = 1'b0;
  real i_cap_na, i_dump_na;
  int checks = 0, failures = 0;

  csdac dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(real a, real b);
    return (a - b) < 1.0e-6 && (b - a) < 1.0e-6;
  endfunction

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 15; c >= 0; c--) begin
      code = 4'(c);
      sw = 1'b1; #1;
      check(near(i_cap_na, 11.1 * c), $sformatf("code %0d steered current %f", c, i_cap_na));
      check(near(i_dump_na, 0.0), "no dump current while steered");
      sw = 1'b0; #1;
      check(near(i_cap_na, 0.0), "no capacitor current while switch open");
      check(near(i_dump_na, 11.1 * c), $sformatf("code %0d dump current %f", c, i_dump_na));
    end
    code = 4'hF; sw = 1'b1; #1;
    check(near(i_cap_na, 166.5), "full scale 166.5 nA");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
