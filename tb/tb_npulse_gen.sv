// tb_npulse_gen -- self-checking testbench of the N-pulse generator.
// For every 4-bit code it resets the generator, releases it with enable
// high and counts the pulses on match_out; the count must equal the code,
// the window (match) must stay high for exactly that many cycles after the
// load, the first pulse must come one cycle after the load edge, and the
// registered code and counter must read back. It also checks that the
// window starts high out of reset (no false 0 == 0 match) and that
// enable low holds the burst.
module tb_npulse_gen;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 4;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0;
  logic [W-1:0] reg_in = '0, counter_out, reg_out;
  logic match, match_out;
  int checks = 0, failures = 0;
  int pulses = 0;
  int cyc = 0;

  npulse_gen #(.W(W)) dut (.*);

  always #12.5 clk = ~clk;
  always @(posedge match_out) pulses++;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int win, first_pulse_cyc, c0;
    for (int code = 0; code < 16; code++) begin
      @(negedge clk);
      rst_n = 1'b0; enable = 1'b0; reg_in = W'(code);
      @(negedge clk);
      check(match == 1'b1, $sformatf("match high in reset (code %0d)", code));
      check(counter_out == 0 && reg_out == 0, "counter and register cleared in reset");
      pulses = 0;
      rst_n = 1'b1; enable = 1'b1;
      c0 = cyc;
      // Load edge: the next rising edge.
      @(negedge clk);
      check(reg_out == W'(code), $sformatf("code %0d registered, got %0d", code, reg_out));
      check(pulses == 0, "no pulse before the code is loaded");
      win = 0; first_pulse_cyc = -1;
      for (int k = 0; k < 20; k++) begin
        if (match) win++;
        @(negedge clk);
        if (first_pulse_cyc < 0 && pulses > 0) first_pulse_cyc = k;
      end
      check(pulses == code, $sformatf("code %0d gave %0d pulses", code, pulses));
      check(win == code, $sformatf("code %0d window %0d cycles", code, win));
      if (code > 0) check(first_pulse_cyc == 0, $sformatf("first pulse in cycle %0d", first_pulse_cyc));
      check(match == 1'b0, "window stays low after the burst");
      check(counter_out == W'(20), $sformatf("counter counted every enabled cycle, %0d", counter_out));
    end
    // enable low holds the burst: 3 cycles on, 5 off, then on again.
    @(negedge clk); rst_n = 1'b0; reg_in = 4'd9; enable = 1'b0;
    @(negedge clk); rst_n = 1'b1; pulses = 0;
    @(negedge clk); enable = 1'b1;
    repeat (3) @(negedge clk);
    enable = 1'b0;
    repeat (5) @(negedge clk);
    check(pulses == 3, $sformatf("3 pulses while enabled, got %0d", pulses));
    enable = 1'b1;
    repeat (12) @(negedge clk);
    check(pulses == 9, $sformatf("burst of 9 completed after pause, got %0d", pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
