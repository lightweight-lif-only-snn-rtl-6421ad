// snn_layer: one fully connected layer of LIF neurons.
//
// The layer is the paper's "neuron layer": a layer controller, a weights
// memory built from SRAM blocks, one neuron core per neuron and a leading-one
// position detector (LOPD). An input spike's synapse index addresses one row
// of the weights memory; the row gives every neuron core its weight in the
// same cycle, so all N_OUT neurons are updated in parallel. When time moves
// on, the cores threshold the finished step; the spike bits of the cores that
// fired are sent one per cycle, lowest neuron first, with the LOPD turning
// them back into synapse indices for the next layer. Every layer of the
// network is a separate instance, so all layers work at the same time on
// different parts of the spike stream.
//
// Interface: input and output token streams with valid/ready (differential
// time, kind, synapse index), and the weight-load port of the weights memory.
// Timing: one cycle from accepting a token to updating the potentials; an
// output spike appears the cycle after the step that produced it is closed.
module snn_layer
  import snn_pkg::*;
#(
  parameter int unsigned N_IN   = 400,
  parameter int unsigned N_OUT  = 800,
  localparam int unsigned IN_W  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned OUT_W = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned NB    = (N_OUT * W_W + SRAM_WIDTH - 1) / SRAM_WIDTH,
  localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  dtok_t                   in_tok,
  input  logic [IN_W-1:0]         in_idx,
  output logic                    in_ready,
  output logic                    out_valid,
  output dtok_t                   out_tok,
  output logic [OUT_W-1:0]        out_idx,
  input  logic                    out_ready,
  input  logic                    wr_en,
  input  logic [BW-1:0]           wr_bank,
  input  logic [$clog2(SRAM_DEPTH)-1:0] wr_addr,
  input  logic [SRAM_WIDTH-1:0]   wr_data,
  output logic                    stall
);

  logic                      mem_rd_en;
  logic [IN_W-1:0]           mem_rd_addr;
  logic [N_OUT-1:0][W_W-1:0] weights;
  logic                      core_en, core_close, core_add_en, core_clear;
  logic [DT_W-1:0]           core_shift;
  logic [N_OUT-1:0]          fire, spike;
  logic                      any_fire, spk_any, spk_ack;
  logic signed [P_W-1:0]     potential [N_OUT];   // observation only

  layer_controller #(.IN_IDX_W(IN_W)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_tok, .in_idx, .in_ready,
    .mem_rd_en, .mem_rd_addr,
    .core_en, .core_close, .core_shift, .core_add_en, .core_clear,
    .any_fire, .spk_any, .spk_ack,
    .out_valid, .out_tok, .out_ready,
    .stall
  );

  weight_memory #(.N_IN(N_IN), .N_OUT(N_OUT)) u_wmem (
    .clk,
    .rd_en      (mem_rd_en),
    .rd_addr    (mem_rd_addr),
    .rd_weights (weights),
    .wr_en, .wr_bank, .wr_addr, .wr_data
  );

  for (genvar n = 0; n < N_OUT; n++) begin : g_core
    neuron_core u_core (
      .clk, .rst_n,
      .en        (core_en),
      .close     (core_close),
      .shift     (core_shift),
      .add_en    (core_add_en),
      .weight    (signed'(weights[n])),
      .clear     (core_clear),
      .spk_clr   (spk_ack && (out_idx == OUT_W'(n))),
      .fire      (fire[n]),
      .spike     (spike[n]),
      .potential (potential[n])
    );
  end

  assign any_fire = |fire;

  lopd #(.N(N_OUT), .IDX_W(OUT_W)) u_lopd (
    .bits (spike),
    .any  (spk_any),
    .idx  (out_idx)
  );

endmodule
