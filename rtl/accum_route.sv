// accum_route: the "Accumulator & Routing" stage of a neuron.
//
// A neuron with more than 16 inputs is fed one 16-input tile per cycle.
// The 20-bit tree sums of its tiles are added into an ACC_W-bit
// accumulator: the tile flagged `first` restarts it, the tile flagged
// `last` completes it. On the last tile the complete sum is re-aligned from
// the input radix point to the output radix point and reduced to 8 bits.
//
// Radix bookkeeping: the input activations carry m fractional bits and the
// synapse shifters add 7 more, so the sum has m+7 fractional bits. The
// output must carry n fractional bits, hence an arithmetic shift right by
// m+7-n (a shift left when that is negative). The shift truncates toward
// minus infinity and the result saturates to the signed 8-bit range.
//
// Interface: valid/first/last qualify `sum`; m and n are signed radix
// indices. Timing: acc updates on the clock edge that takes the tile;
// y/y_valid are registered and appear on that same edge for the last tile
// (this register is the second pipeline register of the neuron).
//
// From the paper: the block, its m and n inputs, the 20-bit input and the
// 8-bit output. This design's choices: the accumulator width, truncation,
// saturation and the radix index width.
module accum_route
  import mfdfp_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   valid,
  input  logic   first,
  input  logic   last,
  input  sum_t   sum,
  input  radix_t m,
  input  radix_t n,
  output act_t   y,
  output logic   y_valid,
  output logic   sat        // the registered y was saturated
);
  localparam int unsigned WIDE = 64;

  acc_t acc, acc_next;
  logic signed [WIDE-1:0] wide, shifted;
  logic signed [7:0]      sh;     // m + 7 - n, range -24..38
  act_t                   y_d;
  logic                   sat_d;

  always_comb begin
    acc_next = (first ? acc_t'(0) : acc) + acc_t'(sum);
    sh       = 8'(m) + 8'(signed'(PROD_FRAC)) - 8'(n);
    wide     = WIDE'(acc_next);
    if (sh >= 0) shifted = wide >>> sh;
    else         shifted = wide <<< (-sh);
    if (shifted > WIDE'(127)) begin
      y_d = 8'sd127;  sat_d = 1'b1;
    end else if (shifted < -WIDE'(128)) begin
      y_d = -8'sd128; sat_d = 1'b1;
    end else begin
      y_d = act_t'(shifted); sat_d = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      y       <= '0;
      y_valid <= 1'b0;
      sat     <= 1'b0;
    end else begin
      y_valid <= valid && last;
      if (valid) acc <= acc_next;
      if (valid && last) begin
        y   <= y_d;
        sat <= sat_d;
      end
    end
  end
endmodule
