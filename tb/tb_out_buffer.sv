// tb_out_buffer: writes random output rows (16 activations) and reads them
// back one 64-bit word at a time, checking the layout y[j] at bits 8j and
// the one-clock read latency.
module tb_out_buffer;
  import mfdfp_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_addr = '0;
  logic [4:0] rd_addr = '0;
  act_t wr_y [1][N_NEURON];
  mword_t rd_data;
  logic [127:0] model [DEPTH];
  int checks = 0, failures = 0;

  out_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 4'(a);
        for (int j = 0; j < N_NEURON; j++) begin
          wr_y[0][j] = act_t'($urandom);
          model[a][8*j +: 8] = wr_y[0][j];
        end
      end
      @(negedge clk); wr_en = 0;
      for (int r = 0; r < 2 * DEPTH; r++) begin
        automatic int wa = $urandom_range(0, 2 * DEPTH - 1);
        rd_en = 1; rd_addr = 5'(wa);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (rd_data != model[wa / 2][(wa % 2) * 64 +: 64]) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d: %h", wa, rd_data);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
