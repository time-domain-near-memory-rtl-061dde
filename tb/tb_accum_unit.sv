// tb_accum_unit -- self-checking testbench of the cascaded delay-line
// accumulation unit. With random product voltages on the four cells it
// launches one edge and checks that it reaches each tap and the output
// after the running sum of the per-cell delays, for an ideal linear chain
// and for a chain with second- and third-order terms, where the
// distortion must equal BETA*sum(V^2) + GAMMA*sum(V^3).
module tb_accum_unit;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N = 4;
  localparam real BETA_NL = 0.02, GAMMA_NL = 0.0001;
  logic chain_in = 1'b0;
  real v_mv [N];
  logic chain_out, chain_out_nl;
  logic tap [N];
  logic tap_nl [N];
  realtime t_tap [N];
  realtime t_out_nl, t0;
  int checks = 0, failures = 0;

  accum_unit #(.N(N)) dut (.chain_in(chain_in), .v_mv(v_mv), .chain_out(chain_out), .tap(tap));
  accum_unit #(.N(N), .BETA(BETA_NL), .GAMMA(GAMMA_NL)) dut_nl (
    .chain_in(chain_in), .v_mv(v_mv), .chain_out(chain_out_nl), .tap(tap_nl));

  for (genvar i = 0; i < N; i++) begin : g_t
    always @(posedge tap[i]) t_tap[i] = $realtime;
  end
  always @(posedge chain_out_nl) t_out_nl = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(real a, real b);
    return (a - b) < 0.005 && (b - a) < 0.005;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc, distort;
    for (int r = 0; r < 12; r++) begin
      for (int i = 0; i < N; i++) v_mv[i] = real'($urandom % 1570) / 10.0;
      #100;
      chain_in = 1'b1; t0 = $realtime;
      #60000;
      acc = 0.0; distort = 0.0;
      for (int i = 0; i < N; i++) begin
        acc += 5000.0 + 36.0 * v_mv[i];
        distort += BETA_NL * v_mv[i] * v_mv[i] + GAMMA_NL * v_mv[i] * v_mv[i] * v_mv[i];
        check(near(t_tap[i] - t0, acc), $sformatf("tap %0d at %f expected %f", i, t_tap[i] - t0, acc));
      end
      check(chain_out == 1'b1, "edge reached the chain output");
      check(near(t_out_nl - t0, acc + distort), $sformatf("nonlinear chain %f expected %f", t_out_nl - t0, acc + distort));
      chain_in = 1'b0;
      #20;
      check(chain_out == 1'b0, "chain empties after the input falls");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
