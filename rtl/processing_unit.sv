// processing_unit: 16 neurons with 16 synapses each.
//
// All neurons see the same 16-activation input tile in the same cycle and
// each applies its own 16 weights, so one cycle performs 256 shift-adds.
// The neurons run in lock step: they share valid/first/last, m, n and the
// NL mode, and their outputs are valid together.
//
// Interface: x[16] input tile, w[16][16] weight codes (w[j][i] is synapse i
// of neuron j), y[16] outputs; sat[j] flags a saturated output. Timing as
// in `neuron`. The 16 x 16 organisation is the paper's; broadcasting one
// input tile to all neurons is this design's choice, after DianNao.
module processing_unit
  import mfdfp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     valid,
  input  logic     first,
  input  logic     last,
  input  act_t     x [N_SYN],
  input  wcode_t   w [N_NEURON][N_SYN],
  input  radix_t   m,
  input  radix_t   n,
  input  nl_mode_e nl,
  output act_t     y [N_NEURON],
  output logic     y_valid,
  output logic [N_NEURON-1:0] sat
);
  logic [N_NEURON-1:0] yv;

  for (genvar j = 0; j < N_NEURON; j++) begin : g_neuron
    neuron u_neuron (
      .clk, .rst_n, .valid, .first, .last, .x, .w(w[j]), .m, .n, .nl,
      .y(y[j]), .y_valid(yv[j]), .sat(sat[j])
    );
  end

  assign y_valid = yv[0];
endmodule
