// mac_ctrl -- phase controller of one MAC operation.
//
// Runs the three phases of the engine's timing diagram:
//   multiplication: the N-pulse generators leave reset, load their input
//     codes and emit their bursts; phi_multiply lets each burst steer DAC
//     current onto its capacitor. The phase lasts 2^PG_BITS + 2 cycles:
//     one for the registered release of the generators' reset, one to load
//     the code, and the longest burst (code 2^PG_BITS - 1, PG_BITS being the input width).
//   accumulation: phi_accumulate connects every capacitor to its delay
//     cell; one cycle later the chain input edge is launched and the
//     controller waits for the delay measurement unit's done.
//   reset: phi_accumulate opens, discharge empties the capacitors, the
//     pulse generators return to reset and the chain input falls; the phase
//     lasts at least RST_CYCLES cycles and until the chain has emptied.
// The chain input is driven from a falling-edge flip-flop, so its edge comes
// half a clock period after a rising edge and the measured count rounds
// the delay to the nearest clock period.
//
// Interface: clk, rst_n (async, active low); start (one op per pulse while
// idle); busy, done (one-cycle pulse at the end of the reset phase), phase;
// pg_rst_n, pg_en, phi_multiply, phi_accumulate, discharge, chain_in;
// meas_done, meas_idle from the delay measurement unit.
// The paper gives the phases and their order; the cycle counts, the
// launch on the falling edge and the handshakes are this design's choices.
module mac_ctrl
  import tdnmc_pkg::*;
#(
  parameter int unsigned PG_BITS    = tdnmc_pkg::IN_BITS,
  parameter int unsigned RST_CYCLES = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  output phase_e phase,
  output logic   pg_rst_n,
  output logic   pg_en,
  output logic   phi_multiply,
  output logic   phi_accumulate,
  output logic   discharge,
  output logic   chain_in,
  input  logic   meas_done,
  input  logic   meas_idle
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned MULT_CYCLES = (1 << PG_BITS) + 1;
  localparam int unsigned CYC_W = $clog2(MULT_CYCLES + RST_CYCLES + 1);

  phase_e           state_q;
  logic [CYC_W-1:0] cyc_q;
  logic             chain_in_q;
  logic             pg_rst_n_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= PH_IDLE;
      cyc_q   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        PH_IDLE: begin
          cyc_q <= '0;
          if (start) state_q <= PH_MULTIPLY;
        end
        PH_MULTIPLY: begin
          if (cyc_q == CYC_W'(MULT_CYCLES)) begin
            cyc_q   <= '0;
            state_q <= PH_ACC_LAUNCH;
          end else begin
            cyc_q <= cyc_q + 1'b1;
          end
        end
        PH_ACC_LAUNCH: state_q <= PH_ACC_WAIT;
        PH_ACC_WAIT: begin
          if (meas_done) begin
            cyc_q   <= '0;
            state_q <= PH_RESET;
          end
        end
        PH_RESET: begin
          if (cyc_q < CYC_W'(RST_CYCLES)) cyc_q <= cyc_q + 1'b1;
          else if (meas_idle && !chain_in_q) begin
            done    <= 1'b1;
            state_q <= PH_IDLE;
          end
        end
        default: state_q <= PH_IDLE;
      endcase
    end
  end

  // The pulse generators' asynchronous reset comes straight from a flip-flop
  // so that it cannot glitch; it rises one cycle into the multiplication phase.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pg_rst_n_q <= 1'b0;
    else        pg_rst_n_q <= (state_q == PH_MULTIPLY);
  end

  // Chain input launched half a period after the rising edge.
  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) chain_in_q <= 1'b0;
    else        chain_in_q <= (state_q == PH_ACC_WAIT);
  end

  // Phase rules: the two switches never close together, and the chain
  // input only rises while the capacitors are connected to the cells.
  a_switches_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(phi_multiply && phi_accumulate));
  a_launch_in_accumulation: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(chain_in_q) |-> (state_q == PH_ACC_WAIT));

  assign phase          = state_q;
  assign busy           = (state_q != PH_IDLE);
  assign pg_rst_n       = pg_rst_n_q;
  assign pg_en          = (state_q == PH_MULTIPLY);
  assign phi_multiply   = (state_q == PH_MULTIPLY);
  assign phi_accumulate = (state_q == PH_ACC_LAUNCH) || (state_q == PH_ACC_WAIT);
  assign discharge      = (state_q == PH_RESET) || !rst_n;
  assign chain_in       = chain_in_q;
endmodule
