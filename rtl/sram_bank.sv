// sram_bank: one bank of the local memory pool, DEPTH words of DW bits.
//
// Simple dual-port (one read, one write per cycle) synchronous SRAM written as
// an array, so synthesis maps it to a memory macro or flip-flops. Read data
// appears one cycle after re; a read and a write of the same word in one cycle
// return the old word. Contents are cleared by neither reset nor power-up.
module sram_bank #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DW    = 16
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [DW-1:0]            rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [DW-1:0]            wdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
