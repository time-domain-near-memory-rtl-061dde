// tb_mac_sweep -- linearity sweep of the cascaded delay-line engine.
// Sweeps the ideal accumulated MAC code from 0 to 16 (all weights 1, the
// code spread evenly over the four inputs) on two engines fed the same
// vectors: one with ideal linear delay cells (default parameters) and one
// whose cells have a second-order term. The linear engine must return
// exactly 800 + code. The nonlinear one must match the model
//   dout = round(sum_i (5000 + 36 V_i + BETA V_i^2) / 25)
// and its excess over the linear engine must grow with the code: the
// distortion that accumulates along the chain.
module tb_mac_sweep;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int  N = 4;
  localparam real BETA_NL = 2.0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0;
  logic [1:0] w_addr = '0;
  logic [3:0] w_wdata = '0, w_rdata, w_rdata_nl;
  logic [3:0] x_in [N];
  logic start = 1'b0;
  logic busy, done, overflow, over_range;
  logic busy_nl, done_nl, overflow_nl, over_range_nl;
  logic [11:0] dout, dout_nl;
  tdnmc_pkg::phase_e phase, phase_nl;
  int checks = 0, failures = 0;
  bit got, got_nl;

  tdnmc_top dut (.*);
  tdnmc_top #(.BETA(BETA_NL)) dut_nl (
    .clk(clk), .rst_n(rst_n), .w_we(w_we), .w_addr(w_addr), .w_wdata(w_wdata), .w_rdata(w_rdata_nl),
    .x_in(x_in), .start(start), .busy(busy_nl), .done(done_nl), .dout(dout_nl),
    .overflow(overflow_nl), .over_range(over_range_nl), .phase(phase_nl));

  always #12.5 clk = ~clk;
  always @(posedge clk) begin
    if (done) got <= 1'b1;
    if (done_nl) got_nl <= 1'b1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int excess, prev_excess, expect_nl;
    real t, v;
    for (int i = 0; i < N; i++) x_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); w_we = 1'b1; w_addr = 2'(i); w_wdata = 4'd1;
    end
    @(negedge clk); w_we = 1'b0;
    prev_excess = 0;
    for (int code = 0; code <= 16; code++) begin
      t = 0.0;
      for (int i = 0; i < N; i++) begin
        x_in[i] = 4'(code / N + ((i < code % N) ? 1 : 0));
        v = real'(x_in[i]) * 11.1 * 12.5 / 200.0;
        t += 5000.0 + 36.0 * v + BETA_NL * v * v;
      end
      expect_nl = int'($floor(t / 25.0 + 0.5));
      @(negedge clk); got = 1'b0; got_nl = 1'b0; start = 1'b1;
      @(negedge clk); start = 1'b0;
      wait (got && got_nl);
      @(negedge clk);
      excess = int'(dout_nl) - int'(dout);
      $display("code %2d: linear %0d  nonlinear %0d  excess %0d", code, int'(dout) - 800, int'(dout_nl) - 800, excess);
      check(dout == 12'(800 + code), $sformatf("linear engine: code %0d gave %0d", code, dout));
      check(dout_nl == 12'(expect_nl), $sformatf("nonlinear engine: code %0d gave %0d expected %0d", code, dout_nl, expect_nl));
      check(excess >= prev_excess, "distortion does not shrink as the code grows");
      prev_excess = excess;
    end
    check(prev_excess >= 2, $sformatf("distortion visible at full sweep (%0d counts)", prev_excess));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
