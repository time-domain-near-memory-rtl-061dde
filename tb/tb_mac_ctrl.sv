// tb_mac_ctrl -- self-checking testbench of the phase controller.
// Starts operations and follows the phase sequence multiply ->
// accumulate (launch, wait) -> reset -> idle. It checks the cycle count of
// the multiplication phase (18 cycles), that the pulse-generator reset is
// released inside it, that phi_multiply and phi_accumulate never overlap,
// that the chain input rises on a falling clock edge during the
// accumulation phase and stays high until the measurement is done, that
// the reset phase lasts at least 4 cycles with discharge high and waits
// for the chain to empty, and that done pulses once per operation.
module tb_mac_ctrl;
  timeunit 1ns;
  timeprecision 1ps;
  import tdnmc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done, pg_rst_n, pg_en, phi_multiply, phi_accumulate, discharge, chain_in;
  logic meas_done = 1'b0, meas_idle = 1'b1;
  phase_e phase;
  int checks = 0, failures = 0;
  int n_mult, n_rst, n_done, n_pgrel, n_acc_wait;
  bit overlap;
  realtime t_chain;

  mac_ctrl dut (.*);

  always #12.5 clk = ~clk;

  always @(posedge clk) begin
    if (phase == PH_MULTIPLY) n_mult++;
    if (phase == PH_MULTIPLY && pg_rst_n) n_pgrel++;
    if (phase == PH_RESET && discharge) n_rst++;
    if (phase == PH_ACC_WAIT) n_acc_wait++;
    if (phi_multiply && phi_accumulate) overlap = 1'b1;
  end
  always @(posedge chain_in) t_chain = $realtime;
  always @(posedge done) n_done++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic op(input int meas_cycles, input int drain_cycles);
    n_mult = 0; n_rst = 0; n_done = 0; n_pgrel = 0; n_acc_wait = 0; overlap = 1'b0;
    @(negedge clk);
    check(!busy && phase == PH_IDLE, "idle before start");
    check(!pg_rst_n, "pulse generators held in reset while idle");
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(busy && phase == PH_MULTIPLY, "start enters the multiplication phase");
    check(phi_multiply && pg_en, "phi_multiply and enable in the multiplication phase");
    wait (phase == PH_ACC_WAIT);
    @(negedge clk);
    check(n_mult == 18, $sformatf("multiplication phase lasted %0d cycles", n_mult));
    check(n_pgrel == 17, $sformatf("pulse generators released for %0d cycles", n_pgrel));
    check(phi_accumulate && !phi_multiply, "accumulation phase switches");
    repeat (2) @(negedge clk);
    check(chain_in, "chain input launched");
    // clk rises at 12.5 + 25k ns and falls at 25k ns
    check(t_chain - 25.0 * $floor(t_chain / 25.0) == 0.0,
          $sformatf("chain input rose on a falling edge, t=%f", t_chain));
    repeat (meas_cycles) @(negedge clk);
    check(chain_in && phase == PH_ACC_WAIT, "waits for the measurement");
    meas_done = 1'b1; meas_idle = 1'b0;
    @(negedge clk);
    meas_done = 1'b0;
    check(phase == PH_RESET && discharge && !phi_accumulate, "reset phase discharges");
    @(negedge clk);
    check(!chain_in, "chain input falls in the reset phase");
    repeat (drain_cycles) @(negedge clk);
    check(phase == PH_RESET, "reset phase waits for the chain to empty");
    meas_idle = 1'b1;
    wait (!busy);
    @(negedge clk);
    check(n_rst >= 5, $sformatf("reset phase lasted %0d cycles", n_rst));
    check(n_done == 1, $sformatf("one done pulse, got %0d", n_done));
    check(!overlap, "phi_multiply and phi_accumulate never overlap");
    check(n_acc_wait >= meas_cycles, "accumulation lasted until done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    check(discharge, "discharge held during reset");
    rst_n = 1'b1;
    op(10, 8); op(200, 10); op(3, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
