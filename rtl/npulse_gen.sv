// npulse_gen -- N-pulse generator (PWM burst generator with clock gating).
//
// Turns a W-bit input code N_in into a burst of exactly N_in clock pulses,
// so that the code becomes an on-time N_in * T_clk (T_pulse = N_in / f_clk).
// As in the paper it is a W-bit input register, a W-bit counter and an
// equality comparator: the pulse window ("match") starts high after reset and
// falls, and stays low, once the counter equals the stored code. A valid flag
// blocks the comparison until the code has been loaded, so the reset values
// 0 == 0 cannot end the window early. Code 0 gives no pulse, code 15 gives 15.
//
// Interface (names follow the paper's "counter_compare_logic_4bit" symbol):
//   clk, rst_n (asynchronous, active low), enable, reg_in[W-1:0]
//   counter_out  counter value
//   reg_out      registered input code
//   match        pulse window: high from reset until counter == code
//   match_out    pulse train: clk gated by the window
// Timing: reg_in is loaded on the first rising clock edge after rst_n rises
// (it is loaded once; hold rst_n low to load a new code). From the next edge
// on, with enable high, the counter counts every cycle. The window spans the
// high phases of the N_in clock cycles that follow the load edge.
//
// Design choices not in the paper: the code is sampled only once after reset;
// the counter only counts once the code is valid; the gate is a latch-based
// clock-gating cell (latch transparent while clk is low, then clk AND latched
// window). The latch in this cell is intentional and is the one latch of
// the design.
module npulse_gen #(
  parameter int unsigned W = tdnmc_pkg::IN_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic [W-1:0] reg_in,
  output logic [W-1:0] counter_out,
  output logic [W-1:0] reg_out,
  output logic         match,
  output logic         match_out
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [W-1:0] cnt_q, reg_q;
  logic         valid_q;   // code loaded, comparison allowed
  logic         match_q;   // sticky window state
  logic         hit;       // comparator: counter equals stored code
  logic         gate_en;
  logic         gate_l;

  assign hit   = valid_q && (cnt_q == reg_q);
  assign match = match_q && !hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      reg_q   <= '0;
      valid_q <= 1'b0;
      match_q <= 1'b1;
    end else begin
      if (!valid_q) begin
        reg_q   <= reg_in;
        valid_q <= 1'b1;
      end
      if (enable && valid_q) cnt_q <= cnt_q + 1'b1;
      match_q <= match;
    end
  end

  // Clock gate: the enable is captured while clk is low so that the gated
  // clock never carries a shortened pulse.
  assign gate_en = match && valid_q && enable;

  always_latch begin
    if (!clk) gate_l = gate_en;
  end

  // Once the window has closed it stays closed until the next reset.
  a_window_sticky: assert property (@(posedge clk) disable iff (!rst_n)
    !match_q |=> !match_q);

  assign match_out   = clk && gate_l;
  assign counter_out = cnt_q;
  assign reg_out     = reg_q;
endmodule
