// weight_memory: the weights memory of one neuron layer.
//
// Row r holds the weights of all N_OUT neurons for input synapse r, so one
// read addressed by the synapse index of an input spike delivers, in
// parallel, the weight every neuron core must add. Neuron n's weight sits in
// bits [n*W_W +: W_W] of the row. As in the paper's ASIC, the wide row is
// built from NB = ceil(N_OUT*W_W/64) SRAM blocks of 64 x 1024 bits read in
// parallel; block b holds row bits [64*b +: 64].
//
// Loading the weights is not described in the paper; this design writes one
// 64-bit word of one block per cycle through the wr_* port (bank, row, data).
// A write and a read must not be issued in the same cycle.
//
// Timing: rd_en in cycle t, weights valid from cycle t+1 until the next read.
module weight_memory
  import snn_pkg::*;
#(
  parameter int unsigned N_IN  = 400,   // synapses (rows)
  parameter int unsigned N_OUT = 800,   // neurons (weights per row)
  localparam int unsigned NB   = (N_OUT * W_W + SRAM_WIDTH - 1) / SRAM_WIDTH,
  localparam int unsigned AW   = $clog2(SRAM_DEPTH),
  localparam int unsigned RW   = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned BW   = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                         clk,
  input  logic                         rd_en,
  input  logic [RW-1:0]                rd_addr,
  output logic [N_OUT-1:0][W_W-1:0]    rd_weights,
  input  logic                         wr_en,
  input  logic [BW-1:0]                wr_bank,
  input  logic [AW-1:0]                wr_addr,
  input  logic [SRAM_WIDTH-1:0]        wr_data
);

  logic [NB*SRAM_WIDTH-1:0] row;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic sel;
    assign sel = wr_en && (wr_bank == BW'(b));
    sram_1024x64 u_sram (
      .clk   (clk),
      .ce    (rd_en || sel),
      .we    (sel),
      .addr  (wr_en ? wr_addr : AW'(rd_addr)),
      .wdata (wr_data),
      .rdata (row[b*SRAM_WIDTH +: SRAM_WIDTH])
    );
  end

  assign rd_weights = row[N_OUT*W_W-1:0];

  initial assert (N_IN <= SRAM_DEPTH) else $error("weight_memory: N_IN exceeds the SRAM depth");
  assert property (@(posedge clk) !(rd_en && wr_en));

endmodule
