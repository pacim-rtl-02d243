// tb_adder_tree: checks the 256-input adder tree against a bit count of
// random and corner-case vectors (all zeros, all ones, single ones).
module tb_adder_tree;
  localparam int N = 256;
  logic [N-1:0]       dp;
  logic [$clog2(N):0] sum;
  int checks = 0, failures = 0;

  adder_tree #(.N(N)) dut (.dp(dp), .sum(sum));

  task automatic check(input logic [N-1:0] v);
    int exp;
    dp = v;
    #1;
    exp = 0;
    for (int i = 0; i < N; i++) exp += int'(v[i]);
    checks++;
    if (int'(sum) != exp) begin
      failures++;
      $display("FAIL: sum=%0d expected %0d", sum, exp);
    end
  endtask

  initial begin
    check('0);
    check('1);
    for (int i = 0; i < N; i += 17) check(N'(1) << i);
    for (int t = 0; t < 200; t++) begin
      logic [N-1:0] v;
      for (int w = 0; w < N / 32; w++) v[w*32 +: 32] = $urandom;
      if (t % 3 == 0) v = v & {N/32{$urandom}};
      check(v);
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
