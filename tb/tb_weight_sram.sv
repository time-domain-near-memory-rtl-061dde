// tb_weight_sram -- self-checking testbench of the weight store.
// Writes random weights, reads them back through the registered port
// (one cycle latency) and through the parallel DAC outputs, overwrites
// single words and checks that the others keep their value.
module tb_weight_sram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int DEPTH = 4, W = 4;
  logic clk = 1'b0, we = 1'b0;
  logic [1:0] addr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] weights_o [DEPTH];
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_sram #(.DEPTH(DEPTH), .W(W)) dut (.*);

  always #12.5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 20; round++) begin
      for (int a = 0; a < DEPTH; a++) begin
        if (round == 0 || ($urandom % 2) == 1) begin
          @(negedge clk);
          we = 1'b1; addr = 2'(a); wdata = W'($urandom);
          model[a] = wdata;
        end
      end
      @(negedge clk); we = 1'b0;
      for (int a = 0; a < DEPTH; a++) begin
        addr = 2'(a);
        @(negedge clk);
        check(rdata == model[a], $sformatf("read word %0d: %0h vs %0h", a, rdata, model[a]));
        check(weights_o[a] == model[a], $sformatf("parallel word %0d", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
