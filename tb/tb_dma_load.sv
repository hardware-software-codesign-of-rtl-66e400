// tb_dma_load: random block transfers from the external memory model (with
// random back-pressure and a 3-clock read latency) into a buffer model.
// Checks every written word and its buffer address, that nothing is written
// outside the block, that `done` pulses once per transfer, and that the
// transfer runs at the memory's pace (no more clocks than requests plus
// stalls plus latency plus a small constant).
module tb_dma_load;
  import mfdfp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  maddr_t src = '0;
  logic [15:0] dst = '0;
  logic [19:0] len = '0;
  logic busy, done, req_valid, req_ready, rsp_valid, wr_en;
  mem_req_t req;
  mword_t rsp_data, wr_data;
  logic [15:0] wr_addr;
  mword_t buf_model [65536];
  bit     written [65536];
  int checks = 0, failures = 0, n_done = 0;

  dma_load dut (.*);
  ext_mem_model #(.WORDS(4096)) u_mem (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_data);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (wr_en) begin buf_model[wr_addr] <= wr_data; written[wr_addr] <= 1'b1; end
    if (done) n_done++;
  end

  initial begin
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      automatic int s = $urandom_range(0, 3000);
      automatic int d = $urandom_range(0, 60000);
      automatic int l = 1 + $urandom_range(0, 90);
      automatic int t0, stalls0, cyc = 0;
      foreach (written[i]) written[i] = 0;
      stalls0 = u_mem.n_stalls;
      n_done = 0;
      @(negedge clk);
      start = 1; src = maddr_t'(s); dst = 16'(d); len = 20'(l);
      @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++;
      if (n_done != 1) begin failures++; $display("FAIL done pulses %0d", n_done); end
      checks++;
      if (cyc > l + (u_mem.n_stalls - stalls0) + 8) begin failures++; $display("FAIL slow: %0d clocks for %0d words", cyc, l); end
      for (int i = 0; i < 65536; i++) begin
        if (i >= d && i < d + l) begin
          checks++;
          if (!written[i] || buf_model[i] != u_mem.mem[s + i - d]) begin
            failures++;
            if (failures < 10) $display("FAIL word %0d of transfer %0d", i - d, r);
          end
        end else if (written[i]) begin
          checks++; failures++; $display("FAIL write outside block at %0d", i);
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
