// tb_delay_meas -- self-checking testbench of the delay measurement unit.
// The testbench plays the delay chain: it raises chain_in half a clock
// period after a rising edge, as the controller does, and raises
// chain_out a random delay later. The captured count must be
// round(delay / 25 ns), done must pulse once, and idle must return once
// both signals fall. A second instance with a 6-bit counter measures
// delays beyond 63 periods and must saturate and flag overflow.
module tb_delay_meas;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  logic chain_in = 1'b0, chain_out = 1'b0;
  logic en, done, overflow, idle;
  logic [11:0] count, dout;
  logic en6, done6, overflow6, idle6;
  logic [5:0] count6, dout6;
  int checks = 0, failures = 0, dones = 0, dones6 = 0;

  delay_meas dut (.*);
  delay_meas #(.CNT_W(6)) dut6 (
    .clk(clk), .rst_n(rst_n), .chain_in(chain_in), .chain_out(chain_out),
    .en(en6), .count(count6), .dout(dout6), .done(done6), .overflow(overflow6), .idle(idle6));

  always #12.5 clk = ~clk;
  always @(posedge clk) begin
    if (done) dones++;
    if (done6) dones6++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input real td);
    int expect_d, d0;
    real frac;
    bit saw_en;
    @(negedge clk);
    d0 = dones;
    chain_in = 1'b1;
    saw_en = 1'b0;
    fork
      begin #(td) chain_out = 1'b1; end
      begin repeat (4) @(posedge clk); saw_en = en; end
    join
    wait (dones == d0 + 1);
    repeat (2) @(posedge clk);
    expect_d = int'($floor(td / 25.0 + 0.5));
    check(saw_en, "counter enabled during the measurement");
    check(dout == 12'(expect_d), $sformatf("td=%f: dout %0d expected %0d", td, dout, expect_d));
    check(!overflow, "no overflow in the 12-bit counter");
    if (expect_d > 63) check(overflow6 && dout6 == 6'd63, $sformatf("6-bit counter saturates, dout6=%0d ovf=%0d", dout6, overflow6));
    else               check(!overflow6 && dout6 == 6'(expect_d), "6-bit counter agrees below its range");
    check(dones == d0 + 1, "one done pulse per measurement");
    chain_in = 1'b0;
    #3 chain_out = 1'b0;
    repeat (4) @(posedge clk);
    check(idle && idle6, "idle once the chain has emptied");
  endtask

  initial begin
    real td;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    measure(200.0); measure(1013.0); measure(1587.9); measure(3001.0);
    for (int k = 0; k < 30; k++) begin
      // keep clear of the half-period ties
      td = 100.0 + 25.0 * real'($urandom % 1600) + 13.0 + real'($urandom % 23);
      if (td - 25.0 * $floor(td / 25.0) > 24.0) td -= 1.0;
      measure(td);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
