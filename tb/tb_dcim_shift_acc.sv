// tb_dcim_shift_acc: feeds random binary MACs with random shifts into the
// 64 lanes and compares every lane with a reference sum of psum << shift;
// also checks that clear zeroes the lanes and wins over en.
module tb_dcim_shift_acc;
  localparam int N = 64, IN_W = 9, ACC_W = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, en = 0;
  logic [3:0] shift = 0;
  logic [IN_W-1:0] psum [N];
  logic signed [ACC_W-1:0] acc [N];
  longint ref_acc [N];
  int checks = 0, failures = 0;

  dcim_shift_acc #(.N_LANES(N), .IN_W(IN_W), .ACC_W(ACC_W)) dut (.*);

  task automatic compare(input string what);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (longint'(acc[k]) != ref_acc[k]) begin
        failures++;
        if (failures < 10) $display("FAIL %s: lane %0d acc=%0d expected %0d", what, k, acc[k], ref_acc[k]);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < N; k++) begin psum[k] = '0; ref_acc[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int t = 0; t < 16; t++) begin
        @(negedge clk);
        en = ($urandom % 4) != 0;
        shift = 4'(8 + $urandom % 7);
        for (int k = 0; k < N; k++) psum[k] = IN_W'($urandom % 257);
        if (en) for (int k = 0; k < N; k++) ref_acc[k] += longint'(psum[k]) << shift;
      end
      @(negedge clk);
      en = 0;
      #1 compare("accumulate");
      @(negedge clk);
      clear = 1; en = 1;
      @(negedge clk);
      clear = 0; en = 0;
      for (int k = 0; k < N; k++) ref_acc[k] = 0;
      #1 compare("clear");
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
