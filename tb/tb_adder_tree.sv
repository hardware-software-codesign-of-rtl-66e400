// tb_adder_tree: checks the 16-input tree against a plain sum, for random
// inputs and for all-maximum and all-minimum inputs (the cases that need
// the full 20-bit output).
module tb_adder_tree;
  localparam int N = 16, IW = 16;
  logic signed [IW-1:0]   in [N];
  logic signed [IW+3:0]   sum;
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .IN_WIDTH(IW)) dut (.in, .sum);

  task automatic check();
    longint exp = 0;
    #1;
    foreach (in[i]) exp += longint'(in[i]);
    checks++;
    if (longint'(sum) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%0d exp=%0d", sum, exp);
    end
  endtask

  initial begin
    foreach (in[i]) in[i] = 16'sh7fff;
    check();
    foreach (in[i]) in[i] = -16'sh8000;
    check();
    for (int k = 0; k < 2000; k++) begin
      foreach (in[i]) in[i] = IW'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
