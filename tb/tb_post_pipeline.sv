// tb_post_pipeline: writes random BN parameters, streams random MAC values
// (negative, small and saturating ones) through BN, ReLU and quantisation
// and checks each output activation, its channel and the three-clock
// latency against a reference computed in the testbench.
module tb_post_pipeline;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, par_we = 0, in_valid = 0;
  logic [5:0] par_ch = 0, in_ch = 0, out_ch;
  logic signed [15:0] par_gamma = 0;
  logic signed [31:0] par_beta = 0;
  logic [5:0] qshift = 0;
  acc_t in_val = 0;
  logic out_valid;
  logic [7:0] out_act;
  int gam [N_MWC];
  int bet [N_MWC];
  int exp_act [$];
  int exp_ch [$];
  int checks = 0, failures = 0, sent = 0, recv = 0;
  logic v_d1, v_d2, v_d3;

  post_pipeline dut (.*);

  function automatic int model(longint acc, int g, int b, int sh);
    longint y = acc * g + b;
    if (y < 0) y = 0;
    if (sh > 0) y = (y + (longint'(1) << (sh - 1))) >>> sh;
    return (y > 255) ? 255 : int'(y);
  endfunction

  // latency check: out_valid must equal in_valid three clocks earlier
  always_ff @(posedge clk) begin
    v_d1 <= in_valid; v_d2 <= v_d1; v_d3 <= v_d2;
  end

  always @(negedge clk) if (rst_n) begin
    if (out_valid !== v_d3) begin
      failures++;
      $display("FAIL: latency");
    end
    if (out_valid) begin
      int e, ch;
      e = exp_act.pop_front();
      ch = exp_ch.pop_front();
      recv++;
      checks++;
      if (int'(out_act) != e || int'(out_ch) != ch) begin
        failures++;
        if (failures < 10) $display("FAIL: ch %0d act=%0d expected ch %0d act %0d", out_ch, out_act, ch, e);
      end
    end
  end

  initial begin
    v_d1 = 0; v_d2 = 0; v_d3 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N_MWC; c++) begin
      gam[c] = int'($urandom % 512) - 128;
      bet[c] = int'($urandom % 200000) - 100000;
      @(negedge clk);
      par_we = 1; par_ch = 6'(c);
      par_gamma = 16'(gam[c]); par_beta = 32'(bet[c]);
    end
    @(negedge clk);
    par_we = 0;
    // qshift is a configuration input: change it only while the pipeline is empty
    for (int seg = 0; seg < 8; seg++) begin
      int sh;
      sh = (seg == 0) ? 0 : 8 + int'($urandom % 12);
      in_valid = 0;
      repeat (4) @(negedge clk);
      qshift = 6'(sh);
      for (int t = 0; t < 50; t++) begin
        longint a;
        a = longint'($urandom % 2000000) - 1000;
        in_valid = ($urandom % 4) != 0;
        in_ch = 6'($urandom);
        in_val = acc_t'(a);
        if (in_valid) begin
          exp_act.push_back(model(a, gam[in_ch], bet[in_ch], sh));
          exp_ch.push_back(int'(in_ch));
          sent++;
        end
        @(negedge clk);
      end
      in_valid = 0;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (recv != sent) begin failures++; $display("FAIL: %0d sent, %0d received", sent, recv); end
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
