// delay_meas -- delay measurement unit: control logic plus counter.
//
// Turns the delay between the rising edge at the delay-chain input and the
// rising edge at its output into a count of clock periods, the digital MAC
// result. The control logic watches both edges and enables the counter
// while the input is high and the output still low; when the output edge
// arrives the count is captured on dout and done pulses for one cycle.
//
// Both chain signals are brought into the clock domain by identical
// two-flop synchronisers, so their latency cancels: the count is the
// number of rising clock edges between the two edges. If the input edge is
// launched half a clock period after a rising edge (as mac_ctrl does), the
// result is round(t_delay / T_clk); in general it lies within one count of
// t_delay / T_clk, the quantisation the paper describes. The counter
// clears while the synchronised input is low and saturates at all ones,
// which raises overflow for that measurement.
//
// Interface: clk, rst_n (async, active low); chain_in, chain_out
// (asynchronous edges); en (counter enable, as in the paper's block
// diagram); count (running value); dout, done, overflow (result);
// idle (both synchronised chain signals low: the chain has emptied).
// The paper names only "control logic" and "counter"; the synchronisers,
// the capture register and the saturation are this design's choices.
module delay_meas #(
  parameter int unsigned CNT_W = tdnmc_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             chain_in,
  input  logic             chain_out,
  output logic             en,
  output logic [CNT_W-1:0] count,
  output logic [CNT_W-1:0] dout,
  output logic             done,
  output logic             overflow,
  output logic             idle
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [1:0]       in_sync, out_sync;
  logic             in_s, out_s, out_s_d;
  logic [CNT_W-1:0] cnt_q;
  logic             sat_q;

  assign in_s  = in_sync[1];
  assign out_s = out_sync[1];
  assign en    = in_s && !out_s;
  assign idle  = !in_s && !out_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_sync  <= '0;
      out_sync <= '0;
      out_s_d  <= 1'b0;
      cnt_q    <= '0;
      sat_q    <= 1'b0;
      dout     <= '0;
      done     <= 1'b0;
      overflow <= 1'b0;
    end else begin
      in_sync  <= {in_sync[0], chain_in};
      out_sync <= {out_sync[0], chain_out};
      out_s_d  <= out_s;
      done     <= 1'b0;
      if (!in_s) begin
        cnt_q <= '0;
        sat_q <= 1'b0;
      end else if (en) begin
        if (cnt_q == '1) sat_q <= 1'b1;
        else             cnt_q <= cnt_q + 1'b1;
      end
      if (in_s && out_s && !out_s_d) begin
        dout     <= cnt_q;
        overflow <= sat_q;
        done     <= 1'b1;
      end
    end
  end

  assign count = cnt_q;
endmodule
