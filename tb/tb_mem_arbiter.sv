// tb_mem_arbiter: three DMAs (two loads, one store) share the external
// memory model through the arbiter, with transfers started at random times
// so that they overlap. Checks that every loaded word reaches the right
// DMA, every stored word lands in memory, that contention happened, and that
// the memory port never carries a request from a DMA that is not granted.
module tb_mem_arbiter;
  import mfdfp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic     busy [3], req_valid [3], req_ready [3], rsp_valid [3];
  mem_req_t req [3];
  mword_t   rsp_data;
  logic     mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mword_t   mem_rsp_data;
  logic     start [3], done [3];
  maddr_t   src [2], dst2;
  logic [19:0] len [2];
  logic [15:0] len2;
  logic     wr_en [2];
  logic [15:0] wr_addr [2];
  mword_t   wr_data [2];
  logic     rd_en;
  logic [7:0] rd_addr;
  mword_t   rd_data;
  mword_t   bufm [2][1024];
  mword_t   sbuf [256];
  int checks = 0, failures = 0, contention = 0;

  for (genvar i = 0; i < 2; i++) begin : g_ld
    dma_load u_ld (.clk, .rst_n, .start(start[i]), .src(src[i]), .dst('0), .len(len[i]),
      .busy(busy[i]), .done(done[i]), .req_valid(req_valid[i]), .req_ready(req_ready[i]),
      .req(req[i]), .rsp_valid(rsp_valid[i]), .rsp_data, .wr_en(wr_en[i]),
      .wr_addr(wr_addr[i]), .wr_data(wr_data[i]));
    always @(posedge clk) if (wr_en[i]) bufm[i][wr_addr[i] % 1024] <= wr_data[i];
  end
  dma_store u_st (.clk, .rst_n, .start(start[2]), .src('0), .dst(dst2), .len(len2),
    .busy(busy[2]), .done(done[2]), .rd_en, .rd_addr, .rd_data,
    .req_valid(req_valid[2]), .req_ready(req_ready[2]), .req(req[2]));
  always @(posedge clk) if (rd_en) rd_data <= sbuf[rd_addr];

  mem_arbiter dut (.clk, .rst_n, .busy, .req_valid, .req_ready, .req, .rsp_valid, .rsp_data,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data);
  ext_mem_model #(.WORDS(8192)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;

  // the port only ever carries the granted DMA's request
  always @(negedge clk) if (rst_n) begin
    int nb = 0;
    for (int i = 0; i < 3; i++) nb += busy[i];
    if (nb > 1) contention++;
    if (mem_req_valid) begin
      int owners = 0;
      for (int i = 0; i < 3; i++) if (req_valid[i] && mem_req == req[i]) owners++;
      checks++;
      if (owners == 0) begin failures++; $display("FAIL request without owner"); end
    end
  end

  initial begin
    for (int i = 0; i < 3; i++) start[i] = 0;
    src[0] = '0; src[1] = '0; len[0] = '0; len[1] = '0; dst2 = '0; len2 = '0; rd_data = '0;
    for (int a = 0; a < 8192; a++) u_mem.mem[a] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic int s0 = $urandom_range(0, 3000), s1 = $urandom_range(0, 3000);
      automatic int l0 = 1 + $urandom_range(0, 200), l1 = 1 + $urandom_range(0, 200);
      automatic int l2 = 1 + $urandom_range(0, 255);
      automatic int d2 = 4096 + $urandom_range(0, 3000);
      bit fin [3];
      foreach (sbuf[i]) sbuf[i] = {$urandom, $urandom};
      fork
        begin
          repeat ($urandom_range(0, 20)) @(negedge clk);
          src[0] = maddr_t'(s0); len[0] = 20'(l0); start[0] = 1; @(negedge clk); start[0] = 0;
          while (!done[0]) @(negedge clk);
        end
        begin
          repeat ($urandom_range(0, 20)) @(negedge clk);
          src[1] = maddr_t'(s1); len[1] = 20'(l1); start[1] = 1; @(negedge clk); start[1] = 0;
          while (!done[1]) @(negedge clk);
        end
        begin
          repeat ($urandom_range(0, 20)) @(negedge clk);
          dst2 = maddr_t'(d2); len2 = 16'(l2); start[2] = 1; @(negedge clk); start[2] = 0;
          while (!done[2]) @(negedge clk);
        end
      join
      repeat (2) @(negedge clk);
      for (int i = 0; i < l0; i++) begin checks++; if (bufm[0][i] != u_mem.mem[s0 + i]) failures++; end
      for (int i = 0; i < l1; i++) begin checks++; if (bufm[1][i] != u_mem.mem[s1 + i]) failures++; end
      for (int i = 0; i < l2; i++) begin checks++; if (u_mem.mem[d2 + i] != sbuf[i]) failures++; end
    end
    checks++;
    if (contention == 0) begin failures++; $display("FAIL no contention exercised"); end
    $display("clocks with several DMAs busy: %0d", contention);
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
