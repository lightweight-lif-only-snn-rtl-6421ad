// layer_controller: control of one neuron layer, including its Delay register.
//
// Input: the token stream of the previous layer (or of the spike merger tree):
// differential time, kind and synapse index. Output: the layer's own token
// stream, whose synapse index the LOPD supplies.
//
// Two stages. In the accept stage a spike token starts the read of its weight
// row. In the execute stage (one cycle later, weights ready) the controller
// drives all neuron cores at once:
//   * a token whose dt is 0 and is a spike adds its weights (the same time
//     step as the previous spike: no decay, no threshold);
//   * a token that moves time on (dt > 0, or the end of the train) first
//     closes the open time step: the cores threshold, fired neurons set their
//     spike bits. In the same cycle the potentials decay by 2^-dt and, for a
//     spike, the new weights are added;
//   * TK_END also clears all potentials for the next inference.
// Output spikes can only occur at the time of an input spike, so only a step
// that saw an input spike is thresholded.
//
// Delay: pending holds the time between the layer's last output token and
// the open time step. When a step is closed, the first spike sent for it
// carries pending as its dt, the rest carry 0; if nothing fired, pending is
// sent as a TK_IDLE token (time passes, no spike) so that the layer's output
// keeps the input's timing; then pending takes the dt of the new token. This
// is the paper's delay of the differential time until all of the layer's
// spikes are out; the register-level scheme is this design's.
//
// Stall: a token that closes a step waits in the execute stage while spikes
// or tokens of the previous step are still being sent (emit_busy); tokens
// within one time step keep flowing while the LOPD drains. in_ready falls
// when the execute stage is held.
module layer_controller
  import snn_pkg::*;
#(
  parameter int unsigned IN_IDX_W = 9    // synapse index width of the input
) (
  input  logic                clk,
  input  logic                rst_n,
  // input token stream
  input  logic                in_valid,
  input  dtok_t               in_tok,
  input  logic [IN_IDX_W-1:0] in_idx,
  output logic                in_ready,
  // weights memory read
  output logic                mem_rd_en,
  output logic [IN_IDX_W-1:0] mem_rd_addr,
  // neuron core controls
  output logic                core_en,
  output logic                core_close,
  output logic [DT_W-1:0]     core_shift,
  output logic                core_add_en,
  output logic                core_clear,
  input  logic                any_fire,     // some core has P >= theta
  // LOPD
  input  logic                spk_any,      // some spike bit still set
  output logic                spk_ack,      // the LOPD's spike is sent
  // output token stream (index from the LOPD)
  output logic                out_valid,
  output dtok_t               out_tok,
  input  logic                out_ready,
  // event counters for observation
  output logic                stall         // execute stage held this cycle
);

  // Execute stage.
  logic            x_valid;
  dtok_t           x_tok;
  // Time step and Delay state.
  logic            step_open;   // an input spike is at the current time
  logic [DT_W-1:0] pending;     // Delay: time since the last output token
  // Emission state.
  logic            first_pend;  // next spike is the first of its step
  logic [DT_W-1:0] first_dt;
  logic            idle_pend;   // a TK_IDLE token is to be sent
  logic [DT_W-1:0] idle_dt;
  logic            end_pend;    // TK_END is to be sent after the spikes

  logic advance, emit_busy, x_go, fired, out_fire;

  always_comb begin
    advance   = (x_tok.kind == TK_END) || (x_tok.dt != '0);
    emit_busy = spk_any || idle_pend || end_pend;
    x_go      = x_valid && !(advance && emit_busy);
    stall     = x_valid && !x_go;
    in_ready  = !x_valid || x_go;

    mem_rd_en   = in_valid && in_ready && (in_tok.kind == TK_SPIKE);
    mem_rd_addr = in_idx;

    core_en     = x_go;
    core_close  = advance && step_open;
    core_shift  = (x_tok.kind == TK_END) ? '0 : x_tok.dt;
    core_add_en = (x_tok.kind == TK_SPIKE);
    core_clear  = (x_tok.kind == TK_END);
    fired       = core_close && any_fire;

    // Output: spikes first (lowest neuron first), then TK_IDLE or TK_END.
    out_valid = spk_any || idle_pend || end_pend;
    if (spk_any) begin
      out_tok = '{kind: TK_SPIKE, dt: first_pend ? first_dt : '0};
    end else if (idle_pend) begin
      out_tok = '{kind: TK_IDLE, dt: idle_dt};
    end else begin
      out_tok = '{kind: TK_END, dt: '0};
    end
    out_fire = out_valid && out_ready;
    spk_ack  = out_fire && spk_any;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_valid    <= 1'b0;
      x_tok      <= '{kind: TK_IDLE, dt: '0};
      step_open  <= 1'b0;
      pending    <= '0;
      first_pend <= 1'b0;
      first_dt   <= '0;
      idle_pend  <= 1'b0;
      idle_dt    <= '0;
      end_pend   <= 1'b0;
    end else begin
      // Output side.
      if (out_fire) begin
        if (spk_any)        first_pend <= 1'b0;
        else if (idle_pend) idle_pend  <= 1'b0;
        else                end_pend   <= 1'b0;
      end
      // Execute stage.
      if (x_go) begin
        if (advance) begin
          if (fired) begin
            first_pend <= 1'b1;
            first_dt   <= pending;
          end else if (pending != '0 && x_tok.kind != TK_END) begin
            idle_pend <= 1'b1;
            idle_dt   <= pending;
          end
          if (x_tok.kind == TK_END) begin
            end_pend  <= 1'b1;
            pending   <= '0;
            step_open <= 1'b0;
          end else begin
            pending   <= x_tok.dt;
            step_open <= (x_tok.kind == TK_SPIKE);
          end
        end else if (x_tok.kind == TK_SPIKE) begin
          step_open <= 1'b1;
        end
      end
      // Accept stage.
      if (in_ready) begin
        x_valid <= in_valid;
        if (in_valid) x_tok <= in_tok;
      end
    end
  end

  // A step is only closed once the previous step's output has been sent.
  assert property (@(posedge clk) disable iff (!rst_n) core_en && core_close |-> !emit_busy);

endmodule
