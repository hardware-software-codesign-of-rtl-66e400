// tb_dma_store: random block transfers from a buffer model (one-clock read
// latency) to the external memory model, with random back-pressure. Checks
// every stored word, that memory outside the block is untouched and that
// `done` pulses once per transfer.
module tb_dma_store;
  import mfdfp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [7:0] src = '0;
  maddr_t dst = '0;
  logic [15:0] len = '0;
  logic busy, done, rd_en, req_valid, req_ready, rsp_valid;
  logic [7:0] rd_addr;
  mword_t rd_data, rsp_data;
  mem_req_t req;
  mword_t bufm [256];
  mword_t golden [4096];
  int checks = 0, failures = 0, n_done = 0;

  dma_store dut (.*);
  ext_mem_model #(.WORDS(4096)) u_mem (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_data);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rd_en) rd_data <= bufm[rd_addr];
    if (done) n_done++;
  end

  initial begin
    rd_data = '0;
    for (int a = 0; a < 4096; a++) begin u_mem.mem[a] = {$urandom, $urandom}; golden[a] = u_mem.mem[a]; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 100; r++) begin
      automatic int s = $urandom_range(0, 200);
      automatic int l = 1 + $urandom_range(0, 255 - s);
      automatic int d = $urandom_range(0, 3800);
      foreach (bufm[i]) bufm[i] = {$urandom, $urandom};
      for (int i = 0; i < l; i++) golden[d + i] = bufm[s + i];
      n_done = 0;
      @(negedge clk);
      start = 1; src = 8'(s); dst = maddr_t'(d); len = 16'(l);
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      checks++;
      if (n_done != 1) begin failures++; $display("FAIL done pulses %0d", n_done); end
      for (int a = 0; a < 4096; a++) begin
        checks++;
        if (u_mem.mem[a] != golden[a]) begin
          failures++;
          if (failures < 10) $display("FAIL mem[%0d] transfer %0d", a, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
