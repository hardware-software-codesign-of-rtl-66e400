// nl_unit: the non-linearity stage (NL) at the end of each neuron.
//
// Two modes: NL_RELU returns max(x, 0); NL_NONE passes x unchanged, for
// layers whose outputs are logits. Combinational, 8 bits in and out.
//
// From the paper: an NL stage on the 8-bit output of every neuron. This
// design's choice: the set of functions (both evaluated networks use ReLU).
module nl_unit
  import mfdfp_pkg::*;
#(
  parameter int unsigned W = OUT_W
) (
  input  logic signed [W-1:0] x,
  input  nl_mode_e            mode,
  output logic signed [W-1:0] y
);
  always_comb begin
    unique case (mode)
      NL_RELU: y = x[W-1] ? '0 : x;
      default: y = x;
    endcase
  end
endmodule
