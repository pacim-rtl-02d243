// tb_pce: runs the PAC computation engine for all 64 channels at every
// boundary level with random sparsities, answering its weight-sparsity reads
// like a cache with one clock of latency. Checks that every channel's result
// arrives exactly once and equals
//   sum_{(p,q) approximate} 2^(p+q) * round(Sx[p]*Sw_c[q]/n),
// and that done follows start after the documented number of clocks.
module tb_pce;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0;
  level_t level = 0;
  sp_t sx [ACT_W];
  sp_t n_len = 0;
  logic sw_req;
  logic [5:0] sw_ch;
  sp_t sw_data [ACT_W];
  logic res_valid, busy, done;
  logic [5:0] res_ch;
  acc_t res_val;
  sp_t tbl [N_MWC][ACT_W];
  int checks = 0, failures = 0;
  longint got [N_MWC];
  int     hits [N_MWC];

  pce dut (.*);

  always_ff @(posedge clk) if (sw_req) sw_data <= tbl[sw_ch];

  always_ff @(posedge clk) if (res_valid) begin
    got[res_ch]  <= longint'(res_val);
    hits[res_ch] <= hits[res_ch] + 1;
  end

  function automatic bit digital(int p, int q, int lv);
    return p >= 4 && q >= 4 && p + q >= 8 + lv;
  endfunction

  initial begin
    for (int b = 0; b < ACT_W; b++) begin sx[b] = '0; sw_data[b] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 5; run++) begin
      int n, lv, cyc, ndig, exp_cyc;
      lv = run % 4;
      n = (run == 4) ? 4096 : 256 * (1 + run);
      n_len = SP_W'(n);
      for (int b = 0; b < ACT_W; b++) sx[b] = SP_W'($urandom % (n + 1));
      for (int c = 0; c < N_MWC; c++)
        for (int b = 0; b < ACT_W; b++) tbl[c][b] = SP_W'($urandom % (n + 1));
      for (int c = 0; c < N_MWC; c++) hits[c] = 0;
      @(negedge clk);
      level = level_t'(lv); start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
      ndig = 0;
      for (int p = 0; p < 8; p++) for (int q = 0; q < 8; q++) if (digital(p, q, lv)) ndig++;
      exp_cyc = 2 + 11 * (2 * N_PCU + (64 - ndig) + 7);
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        $display("FAIL: level %0d took %0d clocks, expected %0d", lv, cyc, exp_cyc);
      end
      @(negedge clk);
      for (int c = 0; c < N_MWC; c++) begin
        automatic longint e = 0;
        for (int p = 0; p < 8; p++)
          for (int q = 0; q < 8; q++)
            if (!digital(p, q, lv))
              e += longint'((int'(sx[p]) * int'(tbl[c][q]) + n / 2) / n) << (p + q);
        checks++;
        if (hits[c] != 1 || got[c] != e) begin
          failures++;
          if (failures < 10) $display("FAIL: level %0d ch %0d hits=%0d got=%0d expected %0d", lv, c, hits[c], got[c], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
