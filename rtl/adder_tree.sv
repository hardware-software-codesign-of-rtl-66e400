// adder_tree: sums the N products of one neuron.
//
// A balanced binary tree of adders. Each level is one bit wider than the
// level before, so for N = 16 inputs of 16 bits the levels are 17, 18, 19
// and 20 bits wide and no partial sum can overflow. Combinational; the
// neuron registers the products in front of it and the accumulator after.
//
// Interface: in[N] (signed IN_WIDTH-bit), sum (signed IN_WIDTH+log2(N)).
// The level widths follow the paper's neuron figure; N must be a power of 2.
module adder_tree #(
  parameter int unsigned N        = 16,
  parameter int unsigned IN_WIDTH = 16,
  localparam int unsigned LEVELS  = $clog2(N),
  localparam int unsigned OUT_WIDTH = IN_WIDTH + LEVELS
) (
  input  logic signed [IN_WIDTH-1:0]  in  [N],
  output logic signed [OUT_WIDTH-1:0] sum
);
  // Level l holds N>>l partial sums of IN_WIDTH+l bits.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    logic signed [IN_WIDTH+l-1:0] s [N>>l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_in
        assign s[i] = in[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < (N>>l); i++) begin : g_node
        assign s[i] = (IN_WIDTH+l)'(g_lvl[l-1].s[2*i]) + (IN_WIDTH+l)'(g_lvl[l-1].s[2*i+1]);
      end
    end
  end
  assign sum = g_lvl[LEVELS].s[0];
endmodule
