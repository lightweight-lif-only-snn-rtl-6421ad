// snn_pkg: types and constants shared by the LIF-only SNN accelerator.
//
// Spikes travel through the design as tokens in differential time: each token
// carries the time that has passed since the previous token of the same stream
// (dt, DT_W bits). A token is one of three kinds:
//   TK_SPIKE : a spike dt time steps after the previous token,
//   TK_IDLE  : dt time steps pass without a spike (the overflow symbol of the
//              code; at the chip inputs the code value 2^DT_W-1 means this),
//   TK_END   : the spike train is finished (end of one inference).
// The 2-bit differential time is the bit width the encoding study finds best.
// The explicit kind field is this design's own choice: after the merger
// subtracts a minimum from an overflow symbol, the remainder is still "no spike"
// but no longer equals 2^DT_W-1, so the value alone cannot carry the meaning.
package snn_pkg;

  // Bit width b of a differential time symbol (b = 2 minimises the code size).
  parameter int unsigned DT_W = 2;
  // Overflow symbol 2^b - 1 used on the chip's input spike trains.
  parameter logic [DT_W-1:0] DT_OVF = {DT_W{1'b1}};

  // Synaptic weight: signed, W_FRAC fraction bits, so theta = 1.0 = 2^W_FRAC.
  parameter int unsigned W_W    = 5;
  parameter int unsigned W_FRAC = 3;
  // Neuron potential: signed, same scaling as the weights, saturating.
  parameter int unsigned P_W    = 12;

  // SRAM block geometry (64 x 1024 bits per block).
  parameter int unsigned SRAM_WIDTH = 64;
  parameter int unsigned SRAM_DEPTH = 1024;

  typedef enum logic [1:0] {
    TK_SPIKE = 2'd0,
    TK_IDLE  = 2'd1,
    TK_END   = 2'd2
  } tok_kind_e;

  typedef struct packed {
    tok_kind_e         kind;
    logic [DT_W-1:0]   dt;
  } dtok_t;

endpackage
