// weight_sram -- weight store next to the multiply macros.
//
// Holds one W-bit weight per multiply macro. A host writes and reads it
// through a single synchronous port; all words are also presented in
// parallel on weights_o, which drives the current-steering DACs directly,
// so no weight has to travel over a bus during a MAC operation (the
// near-memory idea of the engine).
//
// Interface: clk; we, addr, wdata (write on the rising edge when we is
// high); rdata (registered read of addr, one cycle latency); weights_o
// (all words, combinational from the array).
// The paper only says that the weights sit in SRAM. The size (one word per
// macro), the single port and the parallel read-out are this design's
// choices; the array is written as a register array, not a foundry macro.
// Like an SRAM it has no reset: write every word before it is used.
module weight_sram #(
  parameter int unsigned DEPTH = tdnmc_pkg::N_MACROS,
  parameter int unsigned W     = tdnmc_pkg::W_BITS,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata,
  output logic [W-1:0]  weights_o [DEPTH]
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(addr) < DEPTH)) mem[addr] <= wdata;
    rdata <= (32'(addr) < DEPTH) ? mem[addr] : '0;
  end

  assign weights_o = mem;
endmodule
