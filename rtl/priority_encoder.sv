// priority_encoder -- index of the lowest set bit of a W-bit vector.
//
// A binary tree: the input is padded to a power of two, and each level
// halves the number of nodes. A node is set when one of its two children is;
// its index takes the left (lower) child's index with a 0 above it when the
// left child is set, otherwise the right child's index with a 1 above it.
// Depth is log2(W) levels of 2:1 multiplexers, so a few thousand inputs stay
// shallow. Combinational; `found` is the OR of all inputs and idx is 0 when
// none is set. Used by the decoder core as the priority encoder that follows
// the NOR-reduced test syndromes.
module priority_encoder #(
  parameter int unsigned W   = 16,
  localparam int unsigned XW = (W > 1) ? $clog2(W) : 1
) (
  input  logic [W-1:0]  in,
  output logic          found,
  output logic [XW-1:0] idx
);

  localparam int unsigned LEV = XW;         // tree levels
  localparam int unsigned WP  = 1 << LEV;   // padded width

  for (genvar l = 0; l <= LEV; l++) begin : g_lev
    localparam int unsigned NW = WP >> l;
    localparam int unsigned IX = (l > 0) ? l : 1;
    logic [NW-1:0]         v;
    logic [NW-1:0][IX-1:0] ix;
    if (l == 0) begin : g_leaf
      always_comb begin
        v  = '0;
        v[W-1:0] = in;
        ix = '0;
      end
    end else if (l == 1) begin : g_first
      always_comb
        for (int i = 0; i < int'(NW); i++) begin
          v[i]  = g_lev[0].v[2*i] | g_lev[0].v[2*i+1];
          ix[i] = ~g_lev[0].v[2*i];
        end
    end else begin : g_node
      always_comb
        for (int i = 0; i < int'(NW); i++) begin
          v[i]  = g_lev[l-1].v[2*i] | g_lev[l-1].v[2*i+1];
          ix[i] = g_lev[l-1].v[2*i] ? {1'b0, g_lev[l-1].ix[2*i]}
                                    : {1'b1, g_lev[l-1].ix[2*i+1]};
        end
    end
  end

  assign found = g_lev[LEV].v[0];
  assign idx   = found ? g_lev[LEV].ix[0] : '0;

endmodule
