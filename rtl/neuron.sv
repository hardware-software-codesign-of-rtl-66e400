// neuron: one multiplier-free dynamic fixed-point neuron with 16 synapses.
//
// Pipeline (one input tile per cycle):
//   stage 1: 16 weight shifters turn x[i]*w[i] into shifts; the 16-bit
//            products are registered.
//   stage 2: a 16-input adder tree (17..20 bits) feeds the accumulator and
//            routing stage, whose 8-bit result is registered on the last
//            tile.
//   output : the NL stage (ReLU or pass-through) after that register.
// A neuron with K input tiles is fed K consecutive valid tiles, the first
// flagged `first` and the last flagged `last`; y_valid rises 2 clock edges
// after the last tile is presented.
//
// Interface: x[16] activations (m fractional bits), w[16] 4-bit weight
// codes, m/n radix indices and nl mode (held for the whole neuron), y the
// 8-bit output with n fractional bits. The stage order and widths follow the
// paper's neuron figure; the valid/first/last strobes are this design's.
module neuron
  import mfdfp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     valid,
  input  logic     first,
  input  logic     last,
  input  act_t     x [N_SYN],
  input  wcode_t   w [N_SYN],
  input  radix_t   m,
  input  radix_t   n,
  input  nl_mode_e nl,
  output act_t     y,
  output logic     y_valid,
  output logic     sat
);
  prod_t p_d [N_SYN];
  prod_t p_q [N_SYN];
  logic  v_q, first_q, last_q;
  sum_t  tree_sum;
  act_t  routed;

  for (genvar i = 0; i < N_SYN; i++) begin : g_syn
    weight_shifter u_shift (.x(x[i]), .w(w[i]), .p(p_d[i]));
  end

  // Pipeline register after the shifters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q     <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
      for (int i = 0; i < N_SYN; i++) p_q[i] <= '0;
    end else begin
      v_q     <= valid;
      first_q <= first;
      last_q  <= last;
      if (valid) p_q <= p_d;
    end
  end

  adder_tree #(.N(N_SYN), .IN_WIDTH(PROD_W)) u_tree (.in(p_q), .sum(tree_sum));

  accum_route u_acc (
    .clk, .rst_n, .valid(v_q), .first(first_q), .last(last_q),
    .sum(tree_sum), .m, .n, .y(routed), .y_valid, .sat
  );

  nl_unit u_nl (.x(routed), .mode(nl), .y);
endmodule
