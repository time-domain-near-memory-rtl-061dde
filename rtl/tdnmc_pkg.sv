// tdnmc_pkg -- shared sizes, analog model constants and types of the
// time-domain near-memory MAC engine (cascaded delay-line accumulation).
//
// The engine multiplies a vector of 4-bit inputs by a vector of 4-bit weights
// and sums the products. Each input becomes a burst of N_in clock pulses, each
// weight a DAC current; the charge a pulse burst dumps on a capacitor is the
// product. The capacitor voltages then slow a chain of current-starved delay
// cells, and a counter measures the total delay, which is the dot product.
//
// Values from the paper: 4-bit inputs and weights, 40 MHz clock, 200 fF
// capacitor, 166.5 nA DAC full scale (11.1 nA per LSB), 300 mV linear
// range. The number of multiply macros (4), the delay-cell coefficients and
// the counter width are this design's own choices.
package tdnmc_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  // Digital sizes
  localparam int unsigned IN_BITS  = 4;   // input code width (N-pulse generator)
  localparam int unsigned W_BITS   = 4;   // weight code width (current-steering DAC)
  localparam int unsigned N_MACROS = 4;   // multiply macros = delay cells in the chain
  localparam int unsigned CNT_W    = 12;  // delay-measurement counter width

  // Analog model constants (units: nA, fF, ns, mV; nA*ns/fF = mV)
  localparam real T_CLK_NS        = 25.0;    // 40 MHz operating clock
  localparam real I_LSB_NA        = 11.1;    // DAC unit current
  localparam real C_ACC_FF        = 200.0;   // accumulation capacitor
  localparam real V_LIN_MAX_MV    = 300.0;   // linear range of capacitor / PMOS starving device
  localparam real T0_NS           = 5000.0;  // delay of one cell at zero control voltage
  localparam real ALPHA_NS_PER_MV = 36.0;    // linear voltage-to-delay gain of one cell
  localparam real BETA_NS_PER_MV2 = 0.0;     // second-order delay coefficient
  localparam real GAMMA_NS_PER_MV3 = 0.0;    // third-order delay coefficient
  localparam real T_FALL_NS       = 2.0;     // falling-edge delay of one cell

  // Phases of one MAC operation
  typedef enum logic [2:0] {
    PH_IDLE,        // waiting for start, pulse generators held in reset
    PH_MULTIPLY,    // pulse bursts steer DAC current onto the capacitors
    PH_ACC_LAUNCH,  // capacitors connected to the delay cells, measurement started
    PH_ACC_WAIT,    // edge travelling through the delay chain, counter running
    PH_RESET        // capacitors discharged, pulse generators reset
  } phase_e;
endpackage
