// weight_buffer: on-chip weights buffer.
//
// Holds the weights of the output tile being computed. Row t holds, for
// every processing unit u and neuron j, the 16 weight codes that neuron
// applies to input tile t: code w[u][j][i] in bits [4(256u+16j+i)+3 : ...].
// With one processing unit a row is 1024 bits, i.e. 16 external memory
// words, and word k of a row is exactly the 16 weights of neuron k.
// The weight DMA writes one word at a time (word address row*WPR + k); the
// NPU reads one row per clock, valid on rd_w one clock after rd_en.
//
// The buffer is the paper's; its size (1024 rows, enough for the 576 input
// tiles of a 9216-input layer), ports and layout are this design's.
module weight_buffer
  import mfdfp_pkg::*;
#(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned NUM_PU = 1,
  localparam int unsigned ROW_W = NUM_PU * N_NEURON * N_SYN * W_W,
  localparam int unsigned WPR   = ROW_W / MEM_W,
  localparam int unsigned RA_W  = $clog2(DEPTH),
  localparam int unsigned SEL_W = $clog2(WPR),               // WPR is a power of 2
  localparam int unsigned WA_W  = $clog2(DEPTH * WPR)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [WA_W-1:0] wr_addr,
  input  mword_t          wr_data,
  input  logic            rd_en,
  input  logic [RA_W-1:0] rd_addr,
  output wcode_t          rd_w [NUM_PU][N_NEURON][N_SYN]
);
  logic [ROW_W-1:0] mem [DEPTH];
  logic [ROW_W-1:0] q;

  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_addr[WA_W-1:SEL_W]][wr_addr[SEL_W-1:0] * MEM_W +: MEM_W] <= wr_data;
    if (rd_en)
      q <= mem[rd_addr];
  end

  for (genvar u = 0; u < NUM_PU; u++) begin : g_u
    for (genvar j = 0; j < N_NEURON; j++) begin : g_j
      for (genvar i = 0; i < N_SYN; i++) begin : g_i
        assign rd_w[u][j][i] = q[((u*N_NEURON + j)*N_SYN + i)*W_W +: W_W];
      end
    end
  end
endmodule
