// acc_cap -- behavioural model of the accumulation (integration) capacitor.
// This is a behavioural model of an analog block, not synthesizable logic.
//
// The DAC current charges the capacitor, so its voltage is the integral of
// the current over the time it flows: V = I * T / C. With the pulse train
// from the N-pulse generator switching a weight-dependent current, V is
// proportional to input x weight. The model integrates the piecewise-
// constant input current exactly: at every change of i_in_na it adds
// i_prev * dt / C (nA * ns / fF = mV). discharge high empties the capacitor
// (reset phase) and holds it at 0.
//
// over_range is high while the voltage exceeds V_LIN_MAX_MV (300 mV in the
// paper): above it the DAC current sources and the starving PMOS leave
// their linear region. The model keeps integrating linearly but flags it.
//
// Interface: i_in_na (real, nA), discharge (logic), v_mv (real, mV),
// over_range (logic). Timing: v_mv updates when the current changes, i.e.
// at the end of every pulse.
module acc_cap #(
  parameter real C_FF         = tdnmc_pkg::C_ACC_FF,
  parameter real V_LIN_MAX_MV = tdnmc_pkg::V_LIN_MAX_MV
) (
  input  real  i_in_na,
  input  logic discharge,
  output real  v_mv,
  output logic over_range
);
  timeunit 1ns;
  timeprecision 1ps;

  real     v_acc;
  real     i_prev;
  realtime t_prev;

  initial begin
    v_acc  = 0.0;
    i_prev = 0.0;
    t_prev = 0.0;
  end

  always @(i_in_na or discharge) begin
    if (discharge) v_acc = 0.0;
    else           v_acc = v_acc + i_prev * ($realtime - t_prev) / C_FF;
    i_prev = i_in_na;
    t_prev = $realtime;
  end

  assign v_mv       = v_acc;
  assign over_range = (v_acc > V_LIN_MAX_MV);
endmodule
