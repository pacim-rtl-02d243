// tb_sparsity_encoder: streams random 8-bit activations into the eight
// counters and checks the per-bit counts of ones against a reference, then
// checks clear, load of a stored state (also combined with a count in the
// same clock) and saturation at the counter maximum.
module tb_sparsity_encoder;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, load = 0, in_valid = 0;
  sp_t load_val [ACT_W];
  logic [7:0] act = 0;
  sp_t cnt [ACT_W];
  int r [ACT_W];
  int checks = 0, failures = 0;

  sparsity_encoder dut (.*);

  task automatic compare(input string what);
    for (int b = 0; b < ACT_W; b++) begin
      checks++;
      if (int'(cnt[b]) != r[b]) begin
        failures++;
        $display("FAIL %s: bit %0d cnt=%0d expected %0d", what, b, cnt[b], r[b]);
      end
    end
  endtask

  initial begin
    for (int b = 0; b < ACT_W; b++) begin load_val[b] = '0; r[b] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      act = 8'($urandom) & 8'($urandom);
      if (in_valid) for (int b = 0; b < ACT_W; b++) r[b] += int'(act[b]);
    end
    @(negedge clk);
    in_valid = 0;
    #1 compare("count");
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int b = 0; b < ACT_W; b++) r[b] = 0;
    #1 compare("clear");
    for (int b = 0; b < ACT_W; b++) begin load_val[b] = SP_W'(100 * b + 7); r[b] = 100 * b + 7; end
    load = 1; in_valid = 1; act = 8'hA5;
    for (int b = 0; b < ACT_W; b++) r[b] += int'(act[b]);
    @(negedge clk);
    load = 0; in_valid = 0;
    #1 compare("load");
    for (int b = 0; b < ACT_W; b++) load_val[b] = '1;
    load = 1;
    @(negedge clk);
    load = 0; in_valid = 1; act = 8'hFF;
    for (int b = 0; b < ACT_W; b++) r[b] = 8191;
    @(negedge clk);
    in_valid = 0;
    #1 compare("saturate");
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
