// tb_pac_error: the PAC error study on the hardware. One weight column
// (mwc) computes the exact binary MAC of random activation and weight bit
// vectors in 256-row tiles; a PAC computing unit (pcu) computes the estimate
// Sx*Sw/n from their counts of ones. For DP lengths 256, 1024 and 4096 and
// three bit-density pairs it measures the RMS error of the estimate over
// many random trials and checks it against the statistical prediction for
// fixed counts of ones, sqrt(n*px*(1-px)*pw*(1-pw)) (within a factor of
// 0.6..1.5), and that the relative error falls as n^(-1/2): by a factor of
// 1.4..2.8 for each fourfold DP length. The estimate and its n^(-1/2)
// error trend are the paper's; the densities, trial count and tolerances
// are this testbench's choice. A watchdog ends a hung run as a failure.
module tb_pac_error;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  // weight column
  logic       wr_en = 0;
  logic [7:0] wr_row = 0;
  logic [3:0] wr_data = 0;
  logic [1:0] bs = 0;
  logic [N_ROWS-1:0] xin = 0;
  logic [8:0] col_sum;
  // PCU
  logic sx_we = 0, sw_we = 0, n_we = 0, en = 0;
  sp_t sx_in [ACT_W];
  sp_t sw_in [ACT_W];
  sp_t n_in = 0;
  logic term_valid;
  sp_t term;
  logic [3:0] term_shift;
  int checks = 0, failures = 0;

  mwc u_col (.clk(clk), .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data),
             .bs(bs), .xin(xin), .sum(col_sum));
  pcu u_pcu (.clk(clk), .rst_n(rst_n), .sx_we(sx_we), .sx_in(sx_in), .sw_we(sw_we),
             .sw_in(sw_in), .n_we(n_we), .n_in(n_in), .en(en), .p(3'd0), .q(3'd0),
             .term_valid(term_valid), .term(term), .term_shift(term_shift));

  localparam int lens [3] = '{256, 1024, 4096};
  localparam int dx [3] = '{10, 30, 20};     // activation bit density, percent
  localparam int dw [3] = '{30, 50, 70};     // weight bit density, percent
  real rel_err [3];

  initial begin
    for (int b = 0; b < ACT_W; b++) begin sx_in[b] = '0; sw_in[b] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int li = 0; li < 3; li++) begin
      real sum_rel;
      sum_rel = 0;
      for (int di = 0; di < 3; di++) begin
        int n, trials;
        real se, pr, pred, rmse, fx, fw;
        n = lens[li];
        trials = 60;
        se = 0;
        for (int t = 0; t < trials; t++) begin
          int exact, cx, cw;
          exact = 0; cx = 0; cw = 0;
          for (int tile = 0; tile < n / N_ROWS; tile++) begin
            logic [N_ROWS-1:0] xb;
            for (int r = 0; r < N_ROWS; r++) begin
              logic wb;
              wb = ($urandom % 100) < dw[di];
              xb[r] = ($urandom % 100) < dx[di];
              cw += int'(wb); cx += int'(xb[r]);
              @(negedge clk);
              wr_en = 1; wr_row = 8'(r); wr_data = {3'b0, wb};
            end
            @(negedge clk);
            wr_en = 0; bs = 2'd0; xin = xb;
            #1 exact += int'(col_sum);
          end
          @(negedge clk);
          sx_in[0] = SP_W'(cx); sw_in[0] = SP_W'(cw); n_in = SP_W'(n);
          sx_we = 1; sw_we = 1; n_we = 1;
          @(negedge clk);
          sx_we = 0; sw_we = 0; n_we = 0; en = 1;
          @(negedge clk);
          en = 0;
          se += real'(int'(term) - exact) ** 2;
        end
        rmse = $sqrt(se / trials);
        pr = real'(dx[di]) * real'(dw[di]) / 10000.0;
        fx = real'(dx[di]) / 100.0;
        fw = real'(dw[di]) / 100.0;
        pred = $sqrt(real'(n) * fx * (1.0 - fx) * fw * (1.0 - fw));
        sum_rel += rmse / (real'(n) * pr);
        $display("DP %0d, densities %0d%%/%0d%%: RMSE %0.2f LSB (predicted %0.2f)",
                 n, dx[di], dw[di], rmse, pred);
        checks++;
        if (rmse < 0.6 * pred || rmse > 1.5 * pred) begin
          failures++;
          $display("FAIL: RMSE outside 0.6..1.5 x prediction");
        end
      end
      rel_err[li] = sum_rel / 3.0;
      $display("DP %0d: mean relative RMSE %0.2f %%", lens[li], 100.0 * rel_err[li]);
    end
    for (int li = 0; li < 2; li++) begin
      checks++;
      if (rel_err[li] / rel_err[li+1] < 1.4 || rel_err[li] / rel_err[li+1] > 2.8) begin
        failures++;
        $display("FAIL: relative error does not fall as n^(-1/2)");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
