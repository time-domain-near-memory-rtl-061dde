// accum_unit -- accumulation unit: cascaded current-starved delay cells.
// Built from behavioural delay-cell models, so it is a behavioural model.
//
// N delay cells in series; cell i is starved by the product voltage V_i of
// multiply macro i. A single rising edge at chain_in passes every cell in
// turn, so it reaches chain_out after the sum of the per-cell delays,
//   t_acc = N*T0 + ALPHA*sum(V_i) + BETA*sum(V_i^2) + ...
// which carries the dot product in its linear term. Any nonlinearity of
// the cells accumulates along the chain as well.
//
// Interface: chain_in, v_mv[N] (real, mV), chain_out, tap[N] (output of
// each cell; tap[N-1] is chain_out). Timing: purely delay based, no clock.
module accum_unit #(
  parameter int unsigned N         = tdnmc_pkg::N_MACROS,
  parameter real         T0_NS     = tdnmc_pkg::T0_NS,
  parameter real         ALPHA     = tdnmc_pkg::ALPHA_NS_PER_MV,
  parameter real         BETA      = tdnmc_pkg::BETA_NS_PER_MV2,
  parameter real         GAMMA     = tdnmc_pkg::GAMMA_NS_PER_MV3,
  parameter real         T_FALL_NS = tdnmc_pkg::T_FALL_NS
) (
  input  logic chain_in,
  input  real  v_mv [N],
  output logic chain_out,
  output logic tap  [N]
);
  timeunit 1ns;
  timeprecision 1ps;

  logic node [N+1];

  assign node[0] = chain_in;

  for (genvar i = 0; i < N; i++) begin : g_cell
    delay_cell #(
      .T0_NS(T0_NS), .ALPHA(ALPHA), .BETA(BETA), .GAMMA(GAMMA),
      .T_FALL_NS(T_FALL_NS)
    ) u_cell (
      .in       (node[i]),
      .v_ctrl_mv(v_mv[i]),
      .out      (node[i+1])
    );
    assign tap[i] = node[i+1];
  end

  assign chain_out = node[N];
endmodule
