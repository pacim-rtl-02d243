// tb_pcu: loads random activation and weight sparsities and DP lengths into
// a PAC computing unit and checks, for random (p,q), that one clock after en
// the unit returns round(Sx[p]*Sw[q]/n) and the shift p+q. Also checks n = 0.
module tb_pcu;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic sx_we = 0, sw_we = 0, n_we = 0, en = 0;
  sp_t sx_in [ACT_W];
  sp_t sw_in [ACT_W];
  sp_t n_in = 0;
  logic [2:0] p = 0, q = 0;
  logic term_valid;
  sp_t term;
  logic [3:0] term_shift;
  int checks = 0, failures = 0;

  pcu dut (.*);

  initial begin
    for (int i = 0; i < ACT_W; i++) begin sx_in[i] = '0; sw_in[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      int n;
      n = (round == 0) ? 0 : (round % 5 == 0) ? 4096 : 1 + int'($urandom % 4096);
      @(negedge clk);
      for (int i = 0; i < ACT_W; i++) begin
        sx_in[i] = SP_W'((n == 0) ? 0 : $urandom % (n + 1));
        sw_in[i] = SP_W'((n == 0) ? 0 : $urandom % (n + 1));
      end
      if (round == 5) begin sx_in[7] = SP_W'(n); sw_in[7] = SP_W'(n); end
      n_in = SP_W'(n);
      sx_we = 1; sw_we = 1; n_we = 1;
      @(negedge clk);
      sx_we = 0; sw_we = 0; n_we = 0;
      for (int t = 0; t < 12; t++) begin
        int pp, qq, exp;
        pp = (t == 0) ? 7 : int'($urandom % 8);
        qq = (t == 0) ? 7 : int'($urandom % 8);
        p = 3'(pp); q = 3'(qq); en = 1;
        exp = (n == 0) ? 0 : (int'(sx_in[pp]) * int'(sw_in[qq]) + n / 2) / n;
        @(negedge clk);
        en = 0;
        checks++;
        if (!term_valid || int'(term) != exp || int'(term_shift) != pp + qq) begin
          failures++;
          $display("FAIL: n=%0d p=%0d q=%0d term=%0d (valid %0d) expected %0d shift %0d",
                   n, pp, qq, term, term_valid, exp, term_shift);
        end
        @(negedge clk);
        checks++;
        if (term_valid) begin failures++; $display("FAIL: term_valid stuck"); end
      end
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
