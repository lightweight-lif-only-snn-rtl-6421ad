// sram_1024x64: one SRAM block of 1024 words by 64 bits.
//
// The ASIC version of the accelerator builds every weights memory out of
// blocks of this size, placed side by side to reach the width of one weight
// row. This is a synthesizable model of such a block written as an array: a
// single port, a write when ce and we are set, and a synchronous read when ce
// is set without we (read data valid in the cycle after the request and held
// until the next read). The contents are not reset, as in a real SRAM.
module sram_1024x64
  import snn_pkg::*;
#(
  parameter int unsigned WIDTH = SRAM_WIDTH,
  parameter int unsigned DEPTH = SRAM_DEPTH
) (
  input  logic                     clk,
  input  logic                     ce,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
