// tb_accum_route: checks accumulation over several tiles, radix re-alignment
// for random m and n, truncation, saturation and the output timing.
// Tiles are driven back to back or with idle gaps; a monitor compares every
// y_valid with a queue of expected results, including the clock at which
// it must appear (the edge that takes the last tile).
module tb_accum_route;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, last = 0;
  sum_t sum = '0;
  radix_t m = '0, n = '0;
  act_t y; logic y_valid, sat;
  int checks = 0, failures = 0, cycle = 0, n_sat = 0;

  typedef struct { int y; bit sat; int at; } exp_t;
  exp_t q[$];

  accum_route dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // monitor
  always @(posedge clk) if (rst_n) begin : mon
    #2;
    if (y_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++; $display("FAIL unexpected y_valid at %0d", cycle);
      end else begin
        e = q.pop_front();
        if (int'(y) != e.y || sat != e.sat || cycle != e.at) begin
          failures++;
          if (failures < 10) $display("FAIL y=%0d sat=%0d at %0d, exp %0d sat=%0d at %0d", y, sat, cycle, e.y, e.sat, e.at);
        end
        if (e.sat) n_sat++;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3000; r++) begin
      automatic int k = 1 + $urandom_range(0, 6);
      int mm, nn;
      automatic longint acc = 0;
      bit s;
      exp_t e;
      mm = rnd_radix(-8, 8);
      nn = ($urandom_range(0, 9) == 0) ? rnd_radix(-16, 15) : rnd_radix(-4, 8);
      for (int t = 0; t < k; t++) begin
        int v;
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin valid = 0; @(negedge clk); end
        case ($urandom_range(0, 5))
          0: v = 524287;            // largest 20-bit sum
          1: v = -524288;
          default: v = int'($urandom_range(0, 4095)) - 2048;
        endcase
        valid = 1; first = (t == 0); last = (t == k - 1);
        sum = sum_t'(v); m = radix_t'(mm); n = radix_t'(nn);
        acc += v;
      end
      e.y = ref_route(acc, mm, nn, s); e.sat = s; e.at = cycle + 1;
      q.push_back(e);
      @(negedge clk); valid = 0; first = 0; last = 0;
    end
    repeat (4) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("saturated results: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
