// spike_merger_tree: merges the M input spike trains of the network into one
// stream of (differential time, synapse index) tokens.
//
// The paper cascades its two-input merger elements into a binary tree of depth
// ceil(log2 M) with M-1 elements; this module builds that tree. Level l of the
// tree writes bit l-1 of the synapse index, so the index of every output spike
// is the number of the input train it came from (train 0 at the top). When M
// is not a power of two, a tree node whose lower half holds no train passes
// its upper child through unchanged; exactly M-1 spike_merger elements are
// built.
//
// Input trains use the b-bit code of the paper: each symbol is the time since
// the previous spike of the train, and the value 2^b-1 is the overflow symbol
// (time passes, no spike). in_eos marks the end of a train for this inference;
// it is this design's own framing, the paper does not say how a train ends.
//
// Interface: per train valid/ready with code and eos; one output stream with
// valid/ready. Timing: one register stage per tree level, so a token needs
// ceil(log2 M) cycles to the output; the tree sends one token per cycle.
module spike_merger_tree
  import snn_pkg::*;
#(
  parameter int unsigned M     = 400,                       // input spike trains
  parameter int unsigned IDX_W = (M > 1) ? $clog2(M) : 1    // synapse index width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [M-1:0]          in_valid,
  input  logic [M-1:0][DT_W-1:0] in_code,
  input  logic [M-1:0]          in_eos,
  output logic [M-1:0]          in_ready,
  output logic                  y_valid,
  output dtok_t                 y_tok,
  output logic [IDX_W-1:0]      y_idx,
  input  logic                  y_ready
);

  localparam int unsigned LEVELS = (M > 1) ? $clog2(M) : 0;
  localparam int unsigned NP     = 1 << LEVELS;   // leaves after padding

  // One generate scope per tree level, level 0 = the input trains. Each level
  // has its own signals, so the tree has no combinational path through a
  // single array.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NODES = NP >> l;
    logic             v  [NODES];   // node stream valid
    dtok_t            t  [NODES];   // node stream token
    logic [IDX_W-1:0] x  [NODES];   // node stream synapse index
    logic             r  [NODES];   // node stream ready (from the parent)
    logic             ra [NODES];   // ready towards the upper child
    logic             rb [NODES];   // ready towards the lower child

    for (genvar j = 0; j < NODES; j++) begin : g_node
      localparam int unsigned FIRST_A = j * (1 << l);
      localparam int unsigned FIRST_B = FIRST_A + ((1 << l) >> 1);

      // Ready of this node comes from its parent (or the tree output).
      if (l == LEVELS) begin : g_root
        assign r[j] = y_ready;
      end else if (j % 2 == 0) begin : g_upper
        assign r[j] = g_lvl[l+1].ra[j/2];
      end else begin : g_lower
        assign r[j] = g_lvl[l+1].rb[j/2];
      end

      if (l == 0) begin : g_leaf
        // Leaves: translate the b-bit code into tokens.
        assign ra[j] = 1'b0;
        assign rb[j] = 1'b0;
        if (j < M) begin : g_real
          assign v[j] = in_valid[j];
          assign t[j] = in_eos[j]              ? '{kind: TK_END,   dt: '0} :
                        (in_code[j] == DT_OVF) ? '{kind: TK_IDLE,  dt: in_code[j]} :
                                                 '{kind: TK_SPIKE, dt: in_code[j]};
          assign x[j] = '0;
          assign in_ready[j] = r[j];
        end else begin : g_pad
          assign v[j] = 1'b0;
          assign t[j] = '{kind: TK_END, dt: '0};
          assign x[j] = '0;
        end
      end else if (FIRST_B < M) begin : g_merge
        spike_merger #(.IDX_W(IDX_W), .LEVEL(l - 1)) u_merger (
          .clk     (clk),
          .rst_n   (rst_n),
          .a_valid (g_lvl[l-1].v[2*j]),
          .a_tok   (g_lvl[l-1].t[2*j]),
          .a_idx   (g_lvl[l-1].x[2*j]),
          .a_ready (ra[j]),
          .b_valid (g_lvl[l-1].v[2*j+1]),
          .b_tok   (g_lvl[l-1].t[2*j+1]),
          .b_idx   (g_lvl[l-1].x[2*j+1]),
          .b_ready (rb[j]),
          .y_valid (v[j]),
          .y_tok   (t[j]),
          .y_idx   (x[j]),
          .y_ready (r[j])
        );
      end else begin : g_pass
        // Lower half holds no train: the upper child is the node's stream.
        assign v[j]  = g_lvl[l-1].v[2*j];
        assign t[j]  = g_lvl[l-1].t[2*j];
        assign x[j]  = g_lvl[l-1].x[2*j];
        assign ra[j] = r[j];
        assign rb[j] = 1'b0;
      end
    end
  end

  assign y_valid = g_lvl[LEVELS].v[0];
  assign y_tok   = g_lvl[LEVELS].t[0];
  assign y_idx   = g_lvl[LEVELS].x[0];

endmodule
