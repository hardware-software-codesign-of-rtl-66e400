// in_buffer: on-chip input buffer.
//
// Holds the input tiles of input vectors: row r holds the 16
// activations x[16r .. 16r+15], activation i of the row in bits [8i+7:8i].
// The input DMA writes it one external memory word (64 bits, 8 activations)
// at a time, at word address 2r + k. The NPU reads one whole row per clock;
// the row appears on rd_x one clock after rd_en (synchronous SRAM).
//
// The controller uses it as two banks of DEPTH/2 rows (the upper address
// bit picks the bank): one vector is computed on while the next is loaded.
// The buffer itself is the paper's; its size (2 x 1024 rows, 2 x 16 KiB,
// each bank enough for a 9216-input fully connected layer), the two banks,
// ports and latency are this design's.
module in_buffer
  import mfdfp_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned ROW_W = N_SYN * IN_W,
  localparam int unsigned WPR   = ROW_W / MEM_W,         // words per row
  localparam int unsigned RA_W  = $clog2(DEPTH),
  localparam int unsigned SEL_W = $clog2(WPR),               // WPR is a power of 2
  localparam int unsigned WA_W  = $clog2(DEPTH * WPR)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [WA_W-1:0] wr_addr,   // word address
  input  mword_t          wr_data,
  input  logic            rd_en,
  input  logic [RA_W-1:0] rd_addr,   // row address
  output act_t            rd_x [N_SYN]
);
  logic [ROW_W-1:0] mem [DEPTH];
  logic [ROW_W-1:0] q;

  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_addr[WA_W-1:SEL_W]][wr_addr[SEL_W-1:0] * MEM_W +: MEM_W] <= wr_data;
    if (rd_en)
      q <= mem[rd_addr];
  end

  for (genvar i = 0; i < N_SYN; i++) begin : g_unpack
    assign rd_x[i] = act_t'(q[i*IN_W +: IN_W]);
  end
endmodule
