// lopd: leading-one position detector over the spike bits of a layer.
//
// Each neuron core of a layer offers one bit (spike waiting or not); the LOPD
// turns that bit vector back into a synapse index for the next layer. The
// paper names the block and its function; it does not fix which set bit
// counts as "leading". Here the lowest set index wins, so the spikes of one
// time step leave a layer in ascending neuron order.
//
// The detector is built as a balanced tree of two-input nodes (log2 N levels
// of a mux and an OR), the usual structure of a fast leading-one detector.
//
// Interface: combinational, no clock. any = some bit set; idx = position of
// the lowest set bit (0 when none is set).
module lopd #(
  parameter int unsigned N     = 800,                       // spike bits
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]     bits,
  output logic             any,
  output logic [IDX_W-1:0] idx
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned NP     = 1 << LEVELS;

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NODES = NP >> l;
    logic             a [NODES];   // some bit set below this node
    logic [IDX_W-1:0] p [NODES];   // lowest set position below this node
    for (genvar j = 0; j < NODES; j++) begin : g_node
      if (l == 0) begin : g_leaf
        if (j < N) begin : g_bit
          assign a[j] = bits[j];
        end else begin : g_pad
          assign a[j] = 1'b0;
        end
        assign p[j] = IDX_W'(j);
      end else begin : g_pair
        // The upper (lower-numbered) half has priority.
        assign a[j] = g_lvl[l-1].a[2*j] | g_lvl[l-1].a[2*j+1];
        assign p[j] = g_lvl[l-1].a[2*j] ? g_lvl[l-1].p[2*j] : g_lvl[l-1].p[2*j+1];
      end
    end
  end

  assign any = g_lvl[LEVELS].a[0];
  assign idx = g_lvl[LEVELS].a[0] ? g_lvl[LEVELS].p[0] : '0;

endmodule
