// tb_dcim_array: loads random MSB weights into the full 256 x 256-cell
// array, then runs random bit-serial cycles. It checks that sum_valid rises
// exactly one clock after in_en and that every column's sum equals the
// reference popcount of (activation bit vector AND selected weight bit).
module tb_dcim_array;
  localparam int N_ROWS = 256, N_MWC = 64, MSB_W = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic wr_en = 0;
  logic [7:0] wr_row = 0;
  logic [N_MWC*MSB_W-1:0] wr_data = 0;
  logic in_en = 0;
  logic [N_ROWS-1:0] xin = 0;
  logic [1:0] bs = 0;
  logic sum_valid;
  logic [8:0] sum [N_MWC];
  logic [N_MWC*MSB_W-1:0] w [N_ROWS];
  int checks = 0, failures = 0;

  dcim_array #(.N_ROWS(N_ROWS), .N_MWC(N_MWC), .MSB_W(MSB_W)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N_ROWS; r++) begin
      for (int i = 0; i < N_MWC * MSB_W / 32; i++) w[r][i*32 +: 32] = $urandom;
      @(negedge clk);
      wr_en = 1; wr_row = 8'(r); wr_data = w[r];
    end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 24; t++) begin
      logic [N_ROWS-1:0] x;
      logic [1:0] b;
      for (int i = 0; i < N_ROWS / 32; i++) x[i*32 +: 32] = $urandom;
      b = 2'(t % 4);
      @(negedge clk);
      in_en = 1; xin = x; bs = b;
      @(negedge clk);
      in_en = 0; xin = ~x; bs = ~b;      // must not disturb the latched cycle
      #1;
      checks++;
      if (!sum_valid) begin failures++; $display("FAIL: sum_valid missing"); end
      for (int k = 0; k < N_MWC; k++) begin
        automatic int exp = 0;
        for (int r = 0; r < N_ROWS; r++) exp += int'(x[r] & w[r][k*MSB_W + int'(b)]);
        checks++;
        if (int'(sum[k]) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL: col %0d sum=%0d expected %0d", k, sum[k], exp);
        end
      end
      @(negedge clk);
      checks++;
      if (sum_valid) begin failures++; $display("FAIL: sum_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
