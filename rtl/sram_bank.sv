// sram_bank: one bank of on-chip SRAM, 8-bit words, written as an array.
//
// Stands for one compiled SRAM macro (the design uses two weight banks of 15872 words and
// four intermediate-result banks of 14336 words). Two synchronous read ports and one write
// port; read data is registered, so a read issued in cycle t returns in cycle t+1 (the
// single-cycle memory latency the paper reports). Contents are not reset. Two read ports are
// this design's choice so that a dot product can fetch both operands in the same cycle; the
// paper does not say how its macros are ported.
module sram_bank #(
  parameter int DEPTH = 14336,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re0,
  input  logic [AW-1:0] raddr0,
  output logic [7:0]    rdata0,
  input  logic          re1,
  input  logic [AW-1:0] raddr1,
  output logic [7:0]    rdata1,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [7:0]    wdata
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re0) rdata0 <= mem[raddr0];
    if (re1) rdata1 <= mem[raddr1];
  end
endmodule
