// tb_tdnmc_full -- end-to-end test of the engine at its default size
// (4 macros, 4-bit inputs and weights, 12-bit counter, 40 MHz, linear
// delay cells). It loads weights through the host port, runs MAC
// operations with corner and random input vectors and compares dout with
// a model of the physics computed here:
//   V_i  = x_i * w_i * 11.1 nA * 12.5 ns / 200 fF
//   t    = 4 * 5000 ns + 36 ns/mV * sum(V_i)
//   dout = round(t / 25 ns)            (= 800 + dot product here)
// It also checks dout - 800 against the integer dot product, the cycle
// count of each operation, and counts the mechanisms it exercised: the
// three phases, an all-zero input (no pulses at all), a full-scale burst
// of 15 pulses, and a start issued the cycle after done.
module tb_tdnmc_full;
  timeunit 1ns;
  timeprecision 1ps;
  import tdnmc_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0;
  logic [1:0] w_addr = '0;
  logic [3:0] w_wdata = '0, w_rdata;
  logic [3:0] x_in [N];
  logic start = 1'b0, busy, done, overflow, over_range;
  logic [11:0] dout;
  phase_e phase, phase_d;
  int checks = 0, failures = 0;
  int n_mult = 0, n_acc = 0, n_rst = 0, n_zero = 0, n_full = 0, n_b2b = 0;
  int weights [N];

  tdnmc_top dut (.*);

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
    for (int i = 0; i < N; i++) begin
      w_addr = 2'(i);
      @(negedge clk);
      check(w_rdata == 4'(weights[i]), $sformatf("weight %0d reads back", i));
    end
  endtask

  task automatic mac(input int x0, input int x1, input int x2, input int x3, input bit b2b);
    int x [N];
    int dot, expect_d, cycles;
    real vsum, t, q;
    x = '{x0, x1, x2, x3};
    dot = 0; vsum = 0.0;
    for (int i = 0; i < N; i++) begin
      x_in[i] = 4'(x[i]);
      dot += x[i] * weights[i];
      vsum += real'(x[i] * weights[i]) * 11.1 * 12.5 / 200.0;
    end
    t = 4.0 * 5000.0 + 36.0 * vsum;
    q = t / 25.0;
    expect_d = int'($floor(q + 0.5));
    if (x0 == 0 && x1 == 0 && x2 == 0 && x3 == 0) n_zero++;
    if (x0 == 15 || x1 == 15 || x2 == 15 || x3 == 15) n_full++;
    if (b2b) n_b2b++;
    if (!b2b) @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    // a tie (fraction near .5) may round either way after clock alignment
    if (q - $floor(q) > 0.48 && q - $floor(q) < 0.52)
      check(dout == 12'(expect_d) || dout == 12'(expect_d - 1),
            $sformatf("x=%p w=%p: dout %0d expected %0d (tie)", x, weights, dout, expect_d));
    else
      check(dout == 12'(expect_d),
            $sformatf("x=%p w=%p: dout %0d expected %0d", x, weights, dout, expect_d));
    check(int'(dout) - 800 <= dot && int'(dout) - 800 >= dot - 1,
          $sformatf("dout-800=%0d against dot product %0d", int'(dout) - 800, dot));
    check(!overflow && !over_range, "no overflow, inside the linear range");
    check(cycles == int'(dout) + 29,
          $sformatf("operation took %0d cycles for dout %0d", cycles, dout));
  endtask

  initial begin
    for (int i = 0; i < N; i++) x_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_weights(15, 15, 15, 15);
    mac(15, 15, 15, 15, 0);
    mac(15, 15, 15, 15, 1);
    mac(0, 0, 0, 0, 1);
    write_weights(1, 2, 3, 4);
    mac(1, 1, 1, 1, 0);
    mac(7, 0, 0, 0, 0);
    mac(0, 0, 0, 9, 0);
    write_weights(0, 15, 7, 3);
    mac(15, 15, 15, 15, 0);
    for (int r = 0; r < 6; r++) begin
      write_weights($urandom % 16, $urandom % 16, $urandom % 16, $urandom % 16);
      mac($urandom % 16, $urandom % 16, $urandom % 16, $urandom % 16, 0);
      mac($urandom % 16, $urandom % 16, $urandom % 16, $urandom % 16, 1);
    end
    $display("mechanisms: multiply=%0d accumulate=%0d reset=%0d zero_input=%0d full_scale=%0d back_to_back=%0d",
             n_mult, n_acc, n_rst, n_zero, n_full, n_b2b);
    check(n_mult > 0 && n_mult == n_acc && n_acc == n_rst, "every operation ran all three phases");
    check(n_zero > 0, "all-zero input exercised");
    check(n_full > 0, "full-scale burst exercised");
    check(n_b2b > 0, "back-to-back start exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
