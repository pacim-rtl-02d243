// tb_speculation: builds activation vectors with a known mean, derives
// their bit-level sparsity, and checks that the speculation unit selects
// boundary level 0..3 according to where the mean lies relative to TH0,
// TH1 and TH2 (also exactly on a threshold), and level 0 when disabled.
module tb_speculation;
  import pacim_pkg::*;
  logic dyn_en = 1;
  sp_t sx [ACT_W];
  sp_t n_len = 0;
  logic [7:0] th0 = 0, th1 = 0, th2 = 0;
  level_t level;
  int checks = 0, failures = 0;
  int seen [4];

  speculation dut (.*);

  initial begin
    seen = '{0, 0, 0, 0};
    for (int t = 0; t < 400; t++) begin
      int n, sum, exp, t0, t1, t2;
      n = 64 + int'($urandom % 4000);
      t0 = int'($urandom % 40);
      t1 = t0 + int'($urandom % 40);
      t2 = t1 + int'($urandom % 40);
      for (int b = 0; b < ACT_W; b++) sx[b] = '0;
      sum = 0;
      for (int i = 0; i < n; i++) begin
        int a;
        a = int'($urandom % 256) >> ($urandom % 8);
        if (t % 10 == 0 && i == 0) a = 0;
        sum += a;
        for (int b = 0; b < ACT_W; b++) sx[b] += SP_W'((a >> b) & 1);
      end
      // sometimes put the mean exactly on a threshold
      if (t % 7 == 0) begin
        int m;
        m = sum / n;
        case ((t / 7) % 3)
          0: begin t0 = m;     t1 = m + 1; t2 = m + 2; end
          1: begin t0 = m / 2; t1 = m;     t2 = m + 3; end
          default: begin t0 = m / 3; t1 = m / 2; t2 = m; end
        endcase
        if (t2 > 255) t2 = 255;
        if (t1 > 255) t1 = 255;
        // rebuild a vector of n activations all equal to m
        for (int b = 0; b < ACT_W; b++) sx[b] = SP_W'(((m >> b) & 1) * n);
        sum = m * n;
      end
      n_len = SP_W'(n);
      th0 = 8'(t0); th1 = 8'(t1); th2 = 8'(t2);
      dyn_en = (t % 13) != 5;
      #1;
      if (!dyn_en || sum > t2 * n) exp = 0;
      else if (sum > t1 * n) exp = 1;
      else if (sum > t0 * n) exp = 2;
      else exp = 3;
      seen[exp]++;
      checks++;
      if (int'(level) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL: mean %0d/%0d th %0d %0d %0d level %0d expected %0d",
                                    sum, n, t0, t1, t2, level, exp);
      end
    end
    for (int l = 0; l < 4; l++) begin
      checks++;
      if (seen[l] == 0) begin failures++; $display("FAIL: level %0d never reached", l); end
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
