// tb_tdnmc_top -- end-to-end stress test of the engine with parameters
// chosen to reach its limits: a 10-bit counter, an 80 fF capacitor (so a
// full-scale product exceeds the 300 mV linear range) and delay cells with
// a second-order term. Every result is compared with a model computed here:
//   V_i  = x_i * w_i * 11.1 nA * 12.5 ns / 80 fF
//   t    = sum_i (5000 ns + 36 ns/mV * V_i + BETA * V_i^2)
//   dout = min(round(t / 25 ns), 1023), overflow when saturated
//   over_range when some V_i > 300 mV
// It counts the mechanisms it made happen -- multiplication, accumulation
// and reset phases, all-zero input, over-range, counter overflow, and a
// visible nonlinear distortion (result above the linear prediction) --
// and fails if any of them never happened.
module tb_tdnmc_top;
  timeunit 1ns;
  timeprecision 1ps;
  import tdnmc_pkg::*;

  localparam int  N = 4;
  localparam int  CW = 10;
  localparam real C_TB = 80.0;
  localparam real BETA_TB = 0.05;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0;
  logic [1:0] w_addr = '0;
  logic [3:0] w_wdata = '0, w_rdata;
  logic [3:0] x_in [N];
  logic start = 1'b0, busy, done, overflow, over_range;
  logic [CW-1:0] dout;
  phase_e phase, phase_d;
  int checks = 0, failures = 0;
  int n_mult = 0, n_acc = 0, n_rst = 0, n_zero = 0, n_over = 0, n_ovf = 0, n_nonlin = 0;
  int weights [N];

  tdnmc_top #(.CNT_W(CW), .C_FF(C_TB), .BETA(BETA_TB)) dut (.*);

  always #12.5 clk = ~clk;

  always @(posedge clk) begin
    phase_d <= phase;
    if (phase == PH_MULTIPLY && phase_d != PH_MULTIPLY) n_mult++;
    if (phase == PH_ACC_WAIT && phase_d != PH_ACC_WAIT) n_acc++;
    if (phase == PH_RESET && phase_d != PH_RESET) n_rst++;
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

  task automatic write_weights(input int w0, input int w1, input int w2, input int w3);
    int w [N];
    w = '{w0, w1, w2, w3};
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      w_we = 1'b1; w_addr = 2'(i); w_wdata = 4'(w[i]);
      weights[i] = w[i];
    end
    @(negedge clk); w_we = 1'b0;
  endtask

  task automatic mac(input int x0, input int x1, input int x2, input int x3);
    int x [N];
    int expect_d;
    real v, t, t_lin, q;
    bit exp_over, exp_ovf;
    x = '{x0, x1, x2, x3};
    t = 0.0; t_lin = 0.0; exp_over = 1'b0;
    for (int i = 0; i < N; i++) begin
      x_in[i] = 4'(x[i]);
      v = real'(x[i] * weights[i]) * 11.1 * 12.5 / C_TB;
      if (v > 300.0) exp_over = 1'b1;
      t += 5000.0 + 36.0 * v + BETA_TB * v * v;
      t_lin += 5000.0 + 36.0 * v;
    end
    q = t / 25.0;
    expect_d = int'($floor(q + 0.5));
    exp_ovf = (expect_d > (1 << CW) - 1);
    if (exp_ovf) expect_d = (1 << CW) - 1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(!over_range, "over-range flag cleared by start");
    wait (done);
    @(negedge clk);
    if (q - $floor(q) > 0.48 && q - $floor(q) < 0.52 && !exp_ovf)
      check(dout == CW'(expect_d) || dout == CW'(expect_d - 1), $sformatf("dout %0d expected %0d (tie)", dout, expect_d));
    else
      check(dout == CW'(expect_d), $sformatf("x=%p w=%p: dout %0d expected %0d", x, weights, dout, expect_d));
    check(overflow == exp_ovf, $sformatf("overflow %0d expected %0d", overflow, exp_ovf));
    check(over_range == exp_over, $sformatf("over_range %0d expected %0d", over_range, exp_over));
    if (overflow) n_ovf++;
    if (over_range) n_over++;
    if (x0 == 0 && x1 == 0 && x2 == 0 && x3 == 0) n_zero++;
    if (!exp_ovf && int'(dout) > int'($floor(t_lin / 25.0 + 0.5)) + 1) n_nonlin++;
  endtask

  initial begin
    for (int i = 0; i < N; i++) x_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_weights(2, 2, 2, 2);
    mac(0, 0, 0, 0);
    mac(3, 2, 1, 0);
    mac(15, 0, 0, 0);      // 30 units: 52 mV, nonlinear term visible
    write_weights(15, 0, 0, 0);
    mac(15, 0, 0, 0);      // 390 mV: over-range and overflow
    write_weights(1, 1, 1, 1);
    mac(4, 4, 4, 4);       // flags clear again
    write_weights(15, 11, 0, 0);
    mac(15, 0, 0, 0);      // 390 mV: over-range
    mac(0, 9, 0, 0);       // 172 mV: counter overflows, inside the range
    $display("mechanisms: multiply=%0d accumulate=%0d reset=%0d zero_input=%0d over_range=%0d overflow=%0d nonlinear=%0d",
             n_mult, n_acc, n_rst, n_zero, n_over, n_ovf, n_nonlin);
    check(n_mult > 0 && n_mult == n_acc && n_acc == n_rst, "every operation ran all three phases");
    check(n_zero > 0, "all-zero input exercised");
    check(n_over > 0, "over-range exercised");
    check(n_ovf > 0, "counter overflow exercised");
    check(n_nonlin > 0, "delay-cell nonlinearity visible");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
