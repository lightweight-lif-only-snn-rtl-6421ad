// spike_merger: merges two spike trains given in differential time.
//
// Each input has a head register (a_hat, b_hat) holding the still unconsumed
// part of its current token. The output is the head with the smaller dt; in
// the same cycle that head is replaced by the next token of its input (or
// emptied) and the other head is reduced by the output dt. This is the merge
// procedure of the paper's proposition and the structure of its merger element
// figure: two head registers, each loaded through a mux either with the next
// input value or with its own value minus the minimum, and one min unit.
//
// The synapse index: the output carries the index of the head it took, with
// bit LEVEL set when the lower input (b) produced the minimum and clear when
// the upper input (a) did, so the index of a tree of these elements counts
// the input trains from the top. Which input sets the bit is this design's
// choice. Ties go to input a. A finished train (TK_END) counts as infinitely
// late; when both heads are TK_END one TK_END is sent and both are consumed,
// which ends the inference on the output.
//
// Interface: synchronous active-low reset; valid/ready on both inputs and on the output. The output is
// driven from the head registers only (one register stage per element); the
// element accepts one token per input and sends one per cycle when both heads
// are full and the output is ready.
module spike_merger
  import snn_pkg::*;
#(
  parameter int unsigned IDX_W = 9,  // width of the synapse index of the tree
  parameter int unsigned LEVEL = 0   // bit of the index this element writes
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             a_valid,
  input  dtok_t            a_tok,
  input  logic [IDX_W-1:0] a_idx,
  output logic             a_ready,
  input  logic             b_valid,
  input  dtok_t            b_tok,
  input  logic [IDX_W-1:0] b_idx,
  output logic             b_ready,
  output logic             y_valid,
  output dtok_t            y_tok,
  output logic [IDX_W-1:0] y_idx,
  input  logic             y_ready
);

  logic             ha_v, hb_v;
  dtok_t            ha, hb;
  logic [IDX_W-1:0] ha_idx, hb_idx;

  logic a_end, b_end, take_a, take_b, fire;
  logic [DT_W-1:0] dt_min;

  always_comb begin
    a_end  = (ha.kind == TK_END);
    b_end  = (hb.kind == TK_END);
    // Minimum search; TK_END loses against everything, both TK_END: take both.
    if (a_end && b_end) begin
      take_a = 1'b1;
      take_b = 1'b1;
    end else if (a_end) begin
      take_a = 1'b0;
      take_b = 1'b1;
    end else if (b_end) begin
      take_a = 1'b1;
      take_b = 1'b0;
    end else begin
      take_a = (ha.dt <= hb.dt);
      take_b = !take_a;
    end
    dt_min  = take_a ? ha.dt : hb.dt;
    y_valid = ha_v && hb_v;
    y_tok   = take_a ? ha : hb;
    y_idx   = take_a ? ha_idx : (hb_idx | IDX_W'(1) << LEVEL);
    if (a_end && b_end) begin
      y_tok.dt = '0;
      y_idx    = '0;
    end
    fire    = y_valid && y_ready;
    a_ready = !ha_v || (fire && take_a);
    b_ready = !hb_v || (fire && take_b);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ha_v   <= 1'b0;
      hb_v   <= 1'b0;
      ha     <= '{kind: TK_END, dt: '0};
      hb     <= '{kind: TK_END, dt: '0};
      ha_idx <= '0;
      hb_idx <= '0;
    end else begin
      // Head a: reload from the input, or subtract the minimum.
      if (a_ready) begin
        ha_v <= a_valid;
        if (a_valid) begin
          ha     <= a_tok;
          ha_idx <= a_idx;
        end
      end else if (fire && !a_end) begin
        ha.dt <= ha.dt - dt_min;
      end
      // Head b: the same.
      if (b_ready) begin
        hb_v <= b_valid;
        if (b_valid) begin
          hb     <= b_tok;
          hb_idx <= b_idx;
        end
      end else if (fire && !b_end) begin
        hb.dt <= hb.dt - dt_min;
      end
    end
  end

  // A head is only reduced by a minimum that is not larger than it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   fire && !take_a && !a_end |-> ha.dt >= dt_min);
  assert property (@(posedge clk) disable iff (!rst_n)
                   fire && !take_b && !b_end |-> hb.dt >= dt_min);

endmodule
