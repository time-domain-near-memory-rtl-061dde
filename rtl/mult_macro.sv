// mult_macro -- one multiply macro: input x weight as a capacitor voltage.
// Contains behavioural models of analog parts (csdac, acc_cap), so the
// macro as a whole is a behavioural model; its pulse generator is RTL.
//
// The input code drives an N-pulse generator, which emits x_code clock
// pulses. The weight code sets the current of a current-steering DAC.
// While phi_multiply is closed, each pulse steers the DAC current onto the
// accumulation capacitor for one clock high time, so the capacitor ends at
//   V = x_code * w_code * I_LSB * T_high / C.
// With the defaults (11.1 nA, 12.5 ns high time at 40 MHz, 200 fF) one
// product LSB is 0.694 mV and 15 x 15 is 156 mV, inside the 300 mV linear
// range. phi_accumulate connects the capacitor to the delay cell it
// controls (v_out_mv reads 0 while it is open); discharge empties it.
//
// Interface: clk; pg_rst_n, pg_en (pulse generator reset and enable);
// phi_multiply, phi_accumulate, discharge (phase switches); x_code, w_code;
// v_out_mv (to the delay cell), v_cap_mv (capacitor node), pulse (the burst),
// over_range. Timing: x_code is loaded on the first clock edge after
// pg_rst_n rises; the burst follows over the next x_code cycles.
//
// The paper's block diagram labels the DAC input "Input" and the pulse
// generator input "Weight", while its text and timing diagram put the
// input on the pulse generator and the weight on the DAC; this macro
// follows the text. The switches are modelled as ideal: the charge switch
// is closed when both the pulse and phi_multiply are high.
module mult_macro #(
  parameter int unsigned IN_BITS = tdnmc_pkg::IN_BITS,
  parameter int unsigned W_BITS  = tdnmc_pkg::W_BITS,
  parameter real         I_LSB_NA = tdnmc_pkg::I_LSB_NA,
  parameter real         C_FF     = tdnmc_pkg::C_ACC_FF
) (
  input  logic               clk,
  input  logic               pg_rst_n,
  input  logic               pg_en,
  input  logic               phi_multiply,
  input  logic               phi_accumulate,
  input  logic               discharge,
  input  logic [IN_BITS-1:0] x_code,
  input  logic [W_BITS-1:0]  w_code,
  output real                v_out_mv,
  output real                v_cap_mv,
  output logic               pulse,
  output logic               over_range
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [IN_BITS-1:0] pg_count, pg_reg;
  logic               pg_window;
  logic               sw;
  real                i_cap, i_dump;

  npulse_gen #(.W(IN_BITS)) u_pg (
    .clk        (clk),
    .rst_n      (pg_rst_n),
    .enable     (pg_en),
    .reg_in     (x_code),
    .counter_out(pg_count),
    .reg_out    (pg_reg),
    .match      (pg_window),
    .match_out  (pulse)
  );

  assign sw = pulse && phi_multiply;

  csdac #(.BITS(W_BITS), .I_LSB_NA(I_LSB_NA)) u_dac (
    .code     (w_code),
    .sw       (sw),
    .i_cap_na (i_cap),
    .i_dump_na(i_dump)
  );

  acc_cap #(.C_FF(C_FF)) u_cap (
    .i_in_na   (i_cap),
    .discharge (discharge),
    .v_mv      (v_cap_mv),
    .over_range(over_range)
  );

  assign v_out_mv = phi_accumulate ? v_cap_mv : 0.0;
endmodule
