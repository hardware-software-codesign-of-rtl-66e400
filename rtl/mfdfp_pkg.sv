// mfdfp_pkg: sizes, types and constants shared by the multiplier-free
// dynamic fixed-point (MF-DFP) accelerator.
//
// Numbers that follow the paper: 8-bit activations, 4-bit power-of-two
// weights (one sign bit and a 3-bit exponent magnitude, exponents 0..-7),
// a 16-bit shifter output, an adder tree that widens 17/18/19/20 bits over
// 16 synapses, 16 neurons per processing unit and one processing unit in the
// main configuration (two for the ensemble of two networks).
// Design choices of this implementation: the accumulator width, the radix
// index width, the external memory word, address and buffer depths, and
// the layer descriptor that the host writes before a start pulse.
package mfdfp_pkg;

  // ---- neuron datapath (paper) ----
  localparam int unsigned IN_W     = 8;   // activation width
  localparam int unsigned W_W      = 4;   // encoded weight width {sign, -exponent}
  localparam int unsigned EXP_W    = 3;   // exponent magnitude field (0..7)
  localparam int unsigned PROD_W   = 16;  // shifter output width
  localparam int unsigned N_SYN    = 16;  // synapses per neuron
  localparam int unsigned SUM_W    = PROD_W + $clog2(N_SYN); // 20-bit tree output
  localparam int unsigned OUT_W    = 8;   // output activation width
  localparam int unsigned N_NEURON = 16;  // neurons per processing unit

  // ---- design choices (paper silent) ----
  localparam int unsigned ACC_W    = 32;  // accumulator width
  localparam int unsigned RADIX_W  = 5;   // signed fractional-length index (m, n)
  localparam int unsigned MEM_W    = 64;  // external memory word
  localparam int unsigned ADDR_W   = 32;  // external memory word address

  // Fixed left shift applied by every synapse shifter, so that weight
  // exponents 0..-7 become left shifts of 7..0 and no bit is lost.
  localparam int unsigned PROD_FRAC = 7;

  typedef logic signed [IN_W-1:0]    act_t;
  typedef logic        [W_W-1:0]     wcode_t;
  typedef logic signed [PROD_W-1:0]  prod_t;
  typedef logic signed [SUM_W-1:0]   sum_t;
  typedef logic signed [ACC_W-1:0]   acc_t;
  typedef logic signed [RADIX_W-1:0] radix_t;
  typedef logic        [ADDR_W-1:0]  maddr_t;
  typedef logic        [MEM_W-1:0]   mword_t;

  // Non-linearity applied by the NL stage of each neuron.
  typedef enum logic [0:0] {
    NL_NONE = 1'b0,   // pass-through (logit layers)
    NL_RELU = 1'b1    // rectified linear unit
  } nl_mode_e;

  // One request on the external memory interface (valid/ready handshake).
  typedef struct packed {
    logic   we;      // 1: write wdata to addr, 0: read addr
    maddr_t addr;    // word address
    mword_t wdata;
  } mem_req_t;

  // Layer descriptor, written by the host before start.
  //   out[ot][p][j] = NL(route(sum_i x[p][i] * w[ot*16+j][i]))
  // x[p] is n_in_tiles rows of 16 activations, the weights of one output
  // tile are n_in_tiles weight rows; outputs are stored tile-major.
  typedef struct packed {
    maddr_t   in_addr;      // word address of input vector 0
    maddr_t   w_addr;       // word address of the weights of output tile 0
    maddr_t   out_addr;     // word address of the first output row
    logic [15:0] n_vec;     // input vectors (1 for a fully connected layer,
                            // output positions for a convolution)
    logic [15:0] n_in_tiles;  // input tiles of 16 per vector (>=1)
    logic [15:0] n_out_tiles; // output tiles of 16 neurons (>=1)
    radix_t   m;            // fractional length of the input activations
    radix_t   n;            // fractional length of the output activations
    nl_mode_e nl;           // non-linearity
  } layer_cfg_t;

endpackage
