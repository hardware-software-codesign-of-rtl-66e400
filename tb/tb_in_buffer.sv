// tb_in_buffer: fills the input buffer word by word with random data, then
// reads rows in random order and checks every activation and the one-clock
// read latency (rd_x holds the old row until the clock after rd_en).
module tb_in_buffer;
  import mfdfp_pkg::*;
  localparam int DEPTH = 1024, WPR = 2;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [10:0] wr_addr = '0;
  logic [9:0]  rd_addr = '0;
  mword_t wr_data = '0;
  act_t rd_x [N_SYN];
  logic [127:0] model [DEPTH];
  int checks = 0, failures = 0;

  in_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < DEPTH * WPR; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 11'(a); wr_data = {$urandom, $urandom};
      model[a / WPR][(a % WPR) * 64 +: 64] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 3000; r++) begin
      automatic int row = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = 10'(row);
      @(negedge clk);
      rd_en = 0;
      for (int i = 0; i < N_SYN; i++) begin
        checks++;
        if (rd_x[i] != act_t'(model[row][i*8 +: 8])) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d act %0d: %0h exp %0h", row, i, rd_x[i], model[row][i*8 +: 8]);
        end
      end
      // output holds while rd_en is low
      rd_addr = 10'(row ^ 1);
      @(negedge clk);
      checks++;
      if (rd_x[0] != act_t'(model[row][7:0])) begin failures++; $display("FAIL output not held"); end
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
