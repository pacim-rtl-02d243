// tb_pce_shift_acc: accumulates random shifted PAC terms in the six lanes,
// then unloads them and checks that lanes 0..5 appear in order, one per
// clock starting the clock after unload, with the reference totals, and
// that clear zeroes the lanes.
module tb_pce_shift_acc;
  localparam int N = 6, IN_W = 13, ACC_W = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, en = 0, unload = 0;
  logic [3:0] shift = 0;
  logic [IN_W-1:0] term [N];
  logic out_valid, busy;
  logic [2:0] out_lane;
  logic signed [ACC_W-1:0] out_value;
  longint ref_acc [N];
  int checks = 0, failures = 0;

  pce_shift_acc #(.N_LANES(N), .IN_W(IN_W), .ACC_W(ACC_W)) dut (.*);

  initial begin
    for (int k = 0; k < N; k++) begin term[k] = '0; ref_acc[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      for (int t = 0; t < 54; t++) begin
        @(negedge clk);
        en = 1;
        shift = 4'($urandom % 15);
        for (int k = 0; k < N; k++) term[k] = IN_W'($urandom % 4097);
        for (int k = 0; k < N; k++) ref_acc[k] += longint'(term[k]) << shift;
      end
      @(negedge clk);
      en = 0; unload = 1;
      @(negedge clk);
      unload = 0;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (!out_valid || int'(out_lane) != k || longint'(out_value) != ref_acc[k]) begin
          failures++;
          $display("FAIL: slot %0d valid=%0d lane=%0d value=%0d expected %0d",
                   k, out_valid, out_lane, out_value, ref_acc[k]);
        end
        @(negedge clk);
      end
      checks++;
      if (out_valid || busy) begin failures++; $display("FAIL: transfer too long"); end
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int k = 0; k < N; k++) ref_acc[k] = 0;
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
