// npu: the neural processing unit, NUM_PU processing units side by side.
//
// With NUM_PU = 1 it evaluates one network; with NUM_PU = 2 it evaluates an
// ensemble of two networks of the same architecture at once: both units
// take the same input tile and each applies the weights of its own network.
// Combining the ensemble's logits (mean, then maximum) is left to the host.
//
// Interface: x[16] input tile, w[NUM_PU][16][16] weight codes, y[NUM_PU][16]
// outputs. Timing as in `neuron` (y_valid 2 edges after the last tile).
// One unit in the default configuration follows the paper's main result;
// NUM_PU = 2 is its ensemble configuration.
module npu
  import mfdfp_pkg::*;
#(
  parameter int unsigned NUM_PU = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     valid,
  input  logic     first,
  input  logic     last,
  input  act_t     x [N_SYN],
  input  wcode_t   w [NUM_PU][N_NEURON][N_SYN],
  input  radix_t   m,
  input  radix_t   n,
  input  nl_mode_e nl,
  output act_t     y [NUM_PU][N_NEURON],
  output logic     y_valid,
  output logic [NUM_PU*N_NEURON-1:0] sat
);
  logic [NUM_PU-1:0] yv;

  for (genvar u = 0; u < NUM_PU; u++) begin : g_pu
    processing_unit u_pu (
      .clk, .rst_n, .valid, .first, .last, .x, .w(w[u]), .m, .n, .nl,
      .y(y[u]), .y_valid(yv[u]), .sat(sat[u*N_NEURON +: N_NEURON])
    );
  end

  assign y_valid = yv[0];
endmodule
