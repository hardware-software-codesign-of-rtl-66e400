// tb_weight_buffer: fills the weights buffer (ensemble configuration, two
// processing units, 32 words per row) word by word, reads random rows and
// checks every 4-bit weight code against the documented row layout: code
// w[u][j][i] at bit 4*(256u + 16j + i).
module tb_weight_buffer;
  import mfdfp_pkg::*;
  localparam int DEPTH = 256, NP = 2, ROW_W = NP * 1024, WPR = ROW_W / 64;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [12:0] wr_addr = '0;
  logic [7:0]  rd_addr = '0;
  mword_t wr_data = '0;
  wcode_t rd_w [NP][N_NEURON][N_SYN];
  logic [ROW_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.DEPTH(DEPTH), .NUM_PU(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < DEPTH * WPR; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 13'(a); wr_data = {$urandom, $urandom};
      model[a / WPR][(a % WPR) * 64 +: 64] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 500; r++) begin
      automatic int row = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = 8'(row);
      @(negedge clk);
      rd_en = 0;
      for (int u = 0; u < NP; u++)
        for (int j = 0; j < N_NEURON; j++)
          for (int i = 0; i < N_SYN; i++) begin
            checks++;
            if (rd_w[u][j][i] != model[row][4*(256*u + 16*j + i) +: 4]) begin
              failures++;
              if (failures < 10) $display("FAIL row %0d w[%0d][%0d][%0d]", row, u, j, i);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
