// out_buffer: on-chip output buffer.
//
// Collects output rows of the NPU until the output DMA stores them. A row
// holds the 16 outputs of every processing unit, y[u][j] in bits
// [8(16u+j)+7 : 8(16u+j)]. The NPU writes a whole row per clock at a row
// address; the output DMA reads one 64-bit word per clock at word address
// row*WPR + k, valid on rd_data one clock after rd_en.
//
// The controller uses it as two banks of DEPTH/2 rows (the upper row
// address bit picks the bank): the output DMA stores one bank while the NPU
// fills the other. The buffer is the paper's; its depth (2 x 16 rows), the
// two banks, ports and layout are this design's.
module out_buffer
  import mfdfp_pkg::*;
#(
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned NUM_PU = 1,
  localparam int unsigned ROW_W = NUM_PU * N_NEURON * OUT_W,
  localparam int unsigned WPR   = ROW_W / MEM_W,
  localparam int unsigned RA_W  = $clog2(DEPTH),
  localparam int unsigned SEL_W = $clog2(WPR),               // WPR is a power of 2
  localparam int unsigned WA_W  = $clog2(DEPTH * WPR)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [RA_W-1:0] wr_addr,
  input  act_t            wr_y [NUM_PU][N_NEURON],
  input  logic            rd_en,
  input  logic [WA_W-1:0] rd_addr,
  output mword_t          rd_data
);
  logic [ROW_W-1:0] mem [DEPTH];
  logic [ROW_W-1:0] row;

  always_comb begin
    for (int u = 0; u < int'(NUM_PU); u++)
      for (int j = 0; j < int'(N_NEURON); j++)
        row[(u*N_NEURON + j)*OUT_W +: OUT_W] = wr_y[u][j];
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_addr] <= row;
    if (rd_en)
      rd_data <= mem[rd_addr[WA_W-1:SEL_W]][rd_addr[SEL_W-1:0] * MEM_W +: MEM_W];
  end
endmodule
