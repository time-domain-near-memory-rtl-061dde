// delay_cell -- behavioural model of the current-starved delay cell.
// This is a behavioural model of an analog block, not synthesizable logic.
//
// The real cell is a chain of eight inverters whose supply current comes
// through a PMOS; the product voltage V on the PMOS gate sets that current
// and so the delay of the chain. Eight inverters do not invert, so the
// output follows the input. A rising input edge reaches the output after
//   t_d = T0 + ALPHA*V + BETA*V^2 + GAMMA*V^3     (ns, V in mV)
// the polynomial the paper uses for the cell's voltage-to-delay curve;
// ALPHA is the gain, BETA and GAMMA its nonlinearity (0 by default, an
// ideal linear cell). A falling edge passes after T_FALL_NS: only the
// charging side is starved in this model. The control voltage is read at
// the moment the rising edge arrives. An input pulse shorter than the
// delay is swallowed.
//
// Interface: in, v_ctrl_mv (real, mV), out. The coefficient values are this
// design's choices: the paper's simulation shows delays of some microseconds
// that grow with the gate voltage, and ALPHA is chosen so that one product
// LSB of voltage adds about one 25 ns clock period.
module delay_cell #(
  parameter real T0_NS     = tdnmc_pkg::T0_NS,
  parameter real ALPHA     = tdnmc_pkg::ALPHA_NS_PER_MV,
  parameter real BETA      = tdnmc_pkg::BETA_NS_PER_MV2,
  parameter real GAMMA     = tdnmc_pkg::GAMMA_NS_PER_MV3,
  parameter real T_FALL_NS = tdnmc_pkg::T_FALL_NS
) (
  input  logic in,
  input  real  v_ctrl_mv,
  output logic out
);
  timeunit 1ns;
  timeprecision 1ps;

  real         t_rise;
  logic        out_q;
  int unsigned edge_no;   // identifies the newest input edge

  initial begin
    out_q   = 1'b0;
    edge_no = 0;
  end

  // Each input edge schedules its output edge; an edge that is overtaken by
  // a newer input edge before it has come out is dropped (a pulse shorter
  // than the cell delay does not pass).
  always @(in) begin
    edge_no++;
    if (in)
      t_rise = T0_NS + ALPHA * v_ctrl_mv + BETA * v_ctrl_mv * v_ctrl_mv
             + GAMMA * v_ctrl_mv * v_ctrl_mv * v_ctrl_mv;
    fork
      begin : propagate
        automatic int unsigned my_edge = edge_no;
        automatic logic        level   = in;
        automatic real         t_d     = in ? t_rise : T_FALL_NS;
        #(t_d);
        if (my_edge == edge_no) out_q = level;
      end
    join_none
  end

  assign out = out_q;
endmodule
