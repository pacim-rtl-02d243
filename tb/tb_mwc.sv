// tb_mwc: writes random 4-bit MSB weights into a multi-bit weight column and
// checks, for every bit select and random activation bit vectors, that the
// column returns sum_r x_r AND w_r[4+bs].
module tb_mwc;
  localparam int N_ROWS = 256, MSB_W = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                      wr_en = 0;
  logic [7:0]                wr_row = 0;
  logic [MSB_W-1:0]          wr_data = 0;
  logic [1:0]                bs = 0;
  logic [N_ROWS-1:0]         xin = 0;
  logic [$clog2(N_ROWS):0]   sum;
  logic [MSB_W-1:0]          w [N_ROWS];
  int checks = 0, failures = 0;

  mwc #(.N_ROWS(N_ROWS), .MSB_W(MSB_W)) dut (.*);

  initial begin
    for (int r = 0; r < N_ROWS; r++) begin
      w[r] = MSB_W'($urandom);
      @(negedge clk);
      wr_en = 1; wr_row = 8'(r); wr_data = w[r];
    end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < N_ROWS / 32; i++) xin[i*32 +: 32] = $urandom;
      if (t == 0) xin = '1;
      for (int b = 0; b < MSB_W; b++) begin
        int exp;
        bs = 2'(b);
        #1;
        exp = 0;
        for (int r = 0; r < N_ROWS; r++) exp += int'(xin[r] & w[r][b]);
        checks++;
        if (int'(sum) != exp) begin
          failures++;
          $display("FAIL: bs=%0d sum=%0d expected %0d", b, sum, exp);
        end
      end
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
