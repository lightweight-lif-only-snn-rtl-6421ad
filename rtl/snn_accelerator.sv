// snn_accelerator: feedforward LIF-only spiking neural network accelerator.
//
// M input spike trains in differential time enter a spike merger tree, which
// puts all their spikes into one time-ordered stream of (dt, synapse index)
// tokens. That stream feeds a chain of fully connected LIF layers, one
// snn_layer instance per layer of the network, each with its own weights
// memory, so all layers run concurrently. The default is the network of the
// paper's ASIC: 400 input trains and layers of 800, 512, 256 and 10 neurons,
// with 2-bit differential times and 124 SRAM blocks of 64 x 1024 bits (63 +
// 40 + 20 + 1 for 5-bit weights).
//
// Interface:
//   in_*   : per input train valid/ready, 2-bit code (3 = overflow symbol,
//            time passes without a spike), eos = end of this train for the
//            current inference.
//   out_*  : token stream of the last layer: kind (spike, idle, end), dt and
//            output neuron index. Counting spikes per output neuron is left
//            to the receiver; the paper does not describe the read-out.
//   wr_*   : weight load, one 64-bit word of one SRAM block of one layer per
//            cycle (this design's own port; not to be used while the network
//            runs).
//   stall  : per layer, the layer held a token back this cycle.
module snn_accelerator
  import snn_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 4,
  parameter int unsigned LAYER_N [NUM_LAYERS+1] = '{400, 800, 512, 256, 10},
  localparam int unsigned M     = LAYER_N[0],
  localparam int unsigned OUT_W = (LAYER_N[NUM_LAYERS] > 1) ? $clog2(LAYER_N[NUM_LAYERS]) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [M-1:0]                  in_valid,
  input  logic [M-1:0][DT_W-1:0]        in_code,
  input  logic [M-1:0]                  in_eos,
  output logic [M-1:0]                  in_ready,
  output logic                          out_valid,
  output dtok_t                         out_tok,
  output logic [OUT_W-1:0]              out_idx,
  input  logic                          out_ready,
  input  logic                          wr_en,
  input  logic [7:0]                    wr_layer,
  input  logic [7:0]                    wr_bank,
  input  logic [$clog2(SRAM_DEPTH)-1:0] wr_addr,
  input  logic [SRAM_WIDTH-1:0]         wr_data,
  output logic [NUM_LAYERS-1:0]         stall
);

  // Merged input stream.
  localparam int unsigned IN_W = (M > 1) ? $clog2(M) : 1;
  logic            m_valid, m_ready;
  dtok_t           m_tok;
  logic [IN_W-1:0] m_idx;

  spike_merger_tree #(.M(M), .IDX_W(IN_W)) u_merger_tree (
    .clk, .rst_n,
    .in_valid, .in_code, .in_eos, .in_ready,
    .y_valid (m_valid),
    .y_tok   (m_tok),
    .y_idx   (m_idx),
    .y_ready (m_ready)
  );

  for (genvar i = 0; i < NUM_LAYERS; i++) begin : g_layer
    localparam int unsigned N_IN  = LAYER_N[i];
    localparam int unsigned N_OUT = LAYER_N[i+1];
    localparam int unsigned LI_W  = (N_IN > 1) ? $clog2(N_IN) : 1;
    localparam int unsigned LO_W  = (N_OUT > 1) ? $clog2(N_OUT) : 1;
    localparam int unsigned NB    = (N_OUT * W_W + SRAM_WIDTH - 1) / SRAM_WIDTH;
    localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1;

    logic            i_valid, i_ready;
    dtok_t           i_tok;
    logic [LI_W-1:0] i_idx;
    logic            o_valid, o_ready;
    dtok_t           o_tok;
    logic [LO_W-1:0] o_idx;

    if (i == 0) begin : g_from_tree
      assign i_valid = m_valid;
      assign i_tok   = m_tok;
      assign i_idx   = m_idx;
      assign m_ready = i_ready;
    end else begin : g_from_layer
      assign i_valid = g_layer[i-1].o_valid;
      assign i_tok   = g_layer[i-1].o_tok;
      assign i_idx   = g_layer[i-1].o_idx;
    end

    if (i == NUM_LAYERS - 1) begin : g_to_out
      assign o_ready = out_ready;
    end else begin : g_to_layer
      assign o_ready = g_layer[i+1].i_ready;
    end

    snn_layer #(.N_IN(N_IN), .N_OUT(N_OUT)) u_layer (
      .clk, .rst_n,
      .in_valid  (i_valid),
      .in_tok    (i_tok),
      .in_idx    (i_idx),
      .in_ready  (i_ready),
      .out_valid (o_valid),
      .out_tok   (o_tok),
      .out_idx   (o_idx),
      .out_ready (o_ready),
      .wr_en     (wr_en && (wr_layer == 8'(i))),
      .wr_bank   (wr_bank[BW-1:0]),
      .wr_addr   (wr_addr),
      .wr_data   (wr_data),
      .stall     (stall[i])
    );
  end

  assign out_valid = g_layer[NUM_LAYERS-1].o_valid;
  assign out_tok   = g_layer[NUM_LAYERS-1].o_tok;
  assign out_idx   = g_layer[NUM_LAYERS-1].o_idx;

endmodule
