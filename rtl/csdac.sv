// csdac -- behavioural model of the 4-bit current-steering DAC.
// This is a behavioural model of an analog block, not synthesizable logic.
//
// The real circuit (cascoded PMOS current mirrors biased by vbias1/vbias2,
// binary weighted 1:2:4:8, one PMOS differential pair per bit) produces a
// current proportional to the weight code and steers it either to the
// accumulation capacitor or to a dump node. Here the current is
// I = code * I_LSB (nA); while sw is high it flows to the capacitor
// (i_cap_na), otherwise it goes to the dump side (i_dump_na).
// Bit names in the paper's schematic: B (LSB), B1, B2, B3 (MSB).
//
// Interface: code[BITS-1:0] weight code, sw switch control (the gated pulse
// train during the multiplication phase), outputs as real currents in nA.
// Timing: the output follows its inputs with no delay.
//
// I_LSB: the paper gives 11.5 nA per LSB and a full scale of 166 nA, which
// do not agree for 15 LSBs; its simulation shows 166.5 nA full scale and
// 11.09 nA for one LSB. The default 11.1 nA follows the full-scale value.
// Finite output resistance is not modelled (the paper cascodes the mirrors
// to make it small).
module csdac #(
  parameter int unsigned BITS     = tdnmc_pkg::W_BITS,
  parameter real         I_LSB_NA = tdnmc_pkg::I_LSB_NA
) (
  input  logic [BITS-1:0] code,
  input  logic            sw,
  output real             i_cap_na,
  output real             i_dump_na
);
  timeunit 1ns;
  timeprecision 1ps;

  real i_total;

  always_comb begin
    i_total = 0.0;
    for (int b = 0; b < BITS; b++)
      if (code[b]) i_total += I_LSB_NA * real'(1 << b);
    i_cap_na  = sw ? i_total : 0.0;
    i_dump_na = sw ? 0.0 : i_total;
  end
endmodule
