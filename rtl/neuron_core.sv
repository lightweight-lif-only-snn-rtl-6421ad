// neuron_core: one leaky integrate-and-fire neuron of a layer.
//
// The core holds the neuron potential P and its output spike bit. With the
// paper's decay rate beta = 0.5, decaying by beta^dt is an arithmetic right
// shift by dt, so the neuron needs no multiplier. In one enabled cycle the core
//   1. thresholds (when close is set): if P >= theta the spike bit is set and
//      theta is subtracted from P (reset by subtraction, theta = 1.0),
//   2. decays the result by 2^-shift (arithmetic shift right, rounding toward
//      minus infinity),
//   3. adds the synapse weight (when add_en is set), saturating at the limits
//      of the P_W-bit potential,
//   4. or, when clear is set, sets P to zero instead (end of an inference).
// This order is the LIF equation with the spikes of one time step summed
// before the threshold: the layer controller closes a step only when time
// moves on. spk_clr clears the spike bit once the LOPD has sent it.
//
// Fixed point (this design's choice): weights and potential share W_FRAC
// fraction bits, so theta = 2^W_FRAC. The saturation is also this design's.
//
// Timing: all updates take effect at the next clock edge; fire is
// combinational from the potential register.
module neuron_core
  import snn_pkg::*;
#(
  parameter int unsigned PW = P_W,     // potential width
  parameter int unsigned WW = W_W,     // weight width
  parameter int unsigned WF = W_FRAC   // fraction bits, theta = 2^WF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,      // apply close/shift/add/clear this cycle
  input  logic                 close,   // threshold the finished time step
  input  logic [DT_W-1:0]      shift,   // decay: P >>>= shift
  input  logic                 add_en,  // add the weight
  input  logic signed [WW-1:0] weight,
  input  logic                 clear,   // P <= 0
  input  logic                 spk_clr, // the LOPD has sent this neuron's spike
  output logic                 fire,    // P >= theta
  output logic                 spike,   // spike bit waiting for the LOPD
  output logic signed [PW-1:0] potential
);

  localparam logic signed [PW-1:0] THETA = PW'(1) << WF;
  localparam logic signed [PW:0]   P_MAX = (PW+1)'((1 << (PW - 1)) - 1);
  localparam logic signed [PW:0]   P_MIN = -(PW+1)'(1 << (PW - 1));

  logic signed [PW-1:0] p_thr, p_dec;
  logic signed [PW:0]   p_sum;
  logic signed [PW-1:0] p_next;

  always_comb begin
    fire   = (potential >= THETA);
    p_thr  = (close && fire) ? potential - THETA : potential;
    p_dec  = p_thr >>> shift;
    p_sum  = (PW+1)'(p_dec) + (add_en ? (PW+1)'(weight) : (PW+1)'(0));
    if (p_sum > P_MAX)      p_next = P_MAX[PW-1:0];
    else if (p_sum < P_MIN) p_next = P_MIN[PW-1:0];
    else                    p_next = p_sum[PW-1:0];
    if (clear) p_next = '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      potential <= '0;
      spike     <= 1'b0;
    end else begin
      if (en) potential <= p_next;
      if (en && close && fire) spike <= 1'b1;
      else if (spk_clr)        spike <= 1'b0;
    end
  end

  // A new spike may only be set once the previous one has been sent.
  assert property (@(posedge clk) disable iff (!rst_n)
                   en && close && fire |-> !spike || spk_clr);

endmodule
