// tdnmc_top -- time-domain near-memory MAC engine (cascaded delay-line
// accumulation). Holds behavioural models of its analog parts, so the top
// as a whole is a behavioural model; weight store, pulse generators,
// controller and measurement unit are synthesizable RTL.
//
// One operation computes a dot product of N 4-bit inputs x[i] with N 4-bit
// weights w[i] held in the weight store:
//   1. multiplication: macro i turns x[i] into x[i] clock pulses that steer
//      the DAC current w[i]*I_LSB onto its capacitor, V_i ~ x[i]*w[i];
//   2. accumulation: the capacitors starve the N cascaded delay cells and
//      one edge travels the chain; the counter measures its delay,
//      dout = round((N*T0 + ALPHA*sum V_i + ...)/T_clk);
//   3. reset: capacitors discharged, pulse generators and chain reset.
// With the defaults one product LSB adds about one count, so
// dout ~ N*T0/T_clk + sum(x[i]*w[i]) = 800 + dot product; the constant
// offset is the zero-voltage delay of the chain and is not removed here.
//
// Interface: clk (40 MHz), rst_n (async, active low); host port of the
// weight store (w_we, w_addr, w_wdata, w_rdata); x_in[N] input codes, which
// must be stable from start until the pulse generators have loaded them
// (three cycles); start (pulse, accepted while busy is low); busy, done
// (one-cycle pulse when the operation is over; assertions check that start
// and weight writes only come while busy is low), dout, overflow (counter
// saturated), over_range (a capacitor went above the linear range during
// the operation, sticky until the next start), phase.
// An operation takes dout + 29 cycles from the start cycle to done.
// The macro count N, the delay-cell coefficients and the counter width
// are this design's choices; the bit widths, clock, DAC current and
// capacitor follow the paper.
module tdnmc_top #(
  parameter int unsigned N        = tdnmc_pkg::N_MACROS,
  parameter int unsigned IN_BITS  = tdnmc_pkg::IN_BITS,
  parameter int unsigned W_BITS   = tdnmc_pkg::W_BITS,
  parameter int unsigned CNT_W    = tdnmc_pkg::CNT_W,
  parameter real         I_LSB_NA = tdnmc_pkg::I_LSB_NA,
  parameter real         C_FF     = tdnmc_pkg::C_ACC_FF,
  parameter real         T0_NS    = tdnmc_pkg::T0_NS,
  parameter real         ALPHA    = tdnmc_pkg::ALPHA_NS_PER_MV,
  parameter real         BETA     = tdnmc_pkg::BETA_NS_PER_MV2,
  parameter real         GAMMA    = tdnmc_pkg::GAMMA_NS_PER_MV3,
  localparam int unsigned AW      = (N > 1) ? $clog2(N) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_we,
  input  logic [AW-1:0]      w_addr,
  input  logic [W_BITS-1:0]  w_wdata,
  output logic [W_BITS-1:0]  w_rdata,
  input  logic [IN_BITS-1:0] x_in [N],
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [CNT_W-1:0]   dout,
  output logic               overflow,
  output logic               over_range,
  output tdnmc_pkg::phase_e  phase
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [W_BITS-1:0] weights [N];
  logic pg_rst_n, pg_en, phi_multiply, phi_accumulate, discharge;
  logic chain_in, chain_out;
  logic tap [N];
  logic meas_en, meas_done, meas_idle;
  logic [CNT_W-1:0] meas_count;
  logic [N-1:0] macro_over;
  logic pulse [N];
  logic over_q;
  real  v_cell [N];
  real  v_cap  [N];

  weight_sram #(.DEPTH(N), .W(W_BITS)) u_wmem (
    .clk      (clk),
    .we       (w_we),
    .addr     (w_addr),
    .wdata    (w_wdata),
    .rdata    (w_rdata),
    .weights_o(weights)
  );

  mac_ctrl #(.PG_BITS(IN_BITS)) u_ctrl (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .busy          (busy),
    .done          (done),
    .phase         (phase),
    .pg_rst_n      (pg_rst_n),
    .pg_en         (pg_en),
    .phi_multiply  (phi_multiply),
    .phi_accumulate(phi_accumulate),
    .discharge     (discharge),
    .chain_in      (chain_in),
    .meas_done     (meas_done),
    .meas_idle     (meas_idle)
  );

  for (genvar i = 0; i < N; i++) begin : g_macro
    mult_macro #(
      .IN_BITS(IN_BITS), .W_BITS(W_BITS), .I_LSB_NA(I_LSB_NA), .C_FF(C_FF)
    ) u_mac (
      .clk           (clk),
      .pg_rst_n      (pg_rst_n),
      .pg_en         (pg_en),
      .phi_multiply  (phi_multiply),
      .phi_accumulate(phi_accumulate),
      .discharge     (discharge),
      .x_code        (x_in[i]),
      .w_code        (weights[i]),
      .v_out_mv      (v_cell[i]),
      .v_cap_mv      (v_cap[i]),
      .pulse         (pulse[i]),
      .over_range    (macro_over[i])
    );
  end

  accum_unit #(
    .N(N), .T0_NS(T0_NS), .ALPHA(ALPHA), .BETA(BETA), .GAMMA(GAMMA)
  ) u_acc (
    .chain_in (chain_in),
    .v_mv     (v_cell),
    .chain_out(chain_out),
    .tap      (tap)
  );

  delay_meas #(.CNT_W(CNT_W)) u_meas (
    .clk      (clk),
    .rst_n    (rst_n),
    .chain_in (chain_in),
    .chain_out(chain_out),
    .en       (meas_en),
    .count    (meas_count),
    .dout     (dout),
    .done     (meas_done),
    .overflow (overflow),
    .idle     (meas_idle)
  );

  // Sticky per-operation flag: any capacitor above the linear range.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    over_q <= 1'b0;
    else if (start && !busy)       over_q <= 1'b0;
    else if (|macro_over)          over_q <= 1'b1;
  end

  assign over_range = over_q;

  // Host rules: the weights feed the DACs directly, so they must not change
  // during an operation; a start while busy would be ignored.
  a_no_weight_write_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !w_we);
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !start);
endmodule
