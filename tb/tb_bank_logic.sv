// tb_bank_logic: drives the bank controller alone, with stand-ins for the
// array (sum_valid one clock after in_en) and the PCE (done some clocks
// after start). Activations are chosen so that Xin reveals which bit p is
// being issued. For commands at all four boundary levels it checks that
// exactly the digital (p,q) cycles of the computing map are issued, once
// each (16/15/13/10), that the accumulator shift is p+q in the clock after,
// that buffer clear, PCE start, the parallel transfer, the 64 pipeline
// reads, encoder load/park and sparsity emission (CONV: every output,
// LINEAR: only on layer_last) happen as specified.
module tb_bank_logic;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd = '0;
  logic [3:0] act_msb [N_ROWS];
  sp_t sx [ACT_W];
  sp_t n_len = 13'd256;
  logic dyn_en = 1;
  logic [7:0] th0 = 8'd10, th1 = 8'd20, th2 = 8'd30;
  layer_t layer_mode = LAYER_CONV;
  logic arr_in_en, arr_sum_valid, dacc_en, dacc_clear, pce_start, pce_done;
  logic [N_ROWS-1:0] arr_xin;
  logic [1:0] arr_bs;
  logic [3:0] dacc_shift;
  level_t pce_level, level_q;
  sp_t sx_q [ACT_W];
  logic buf_clear, buf_dcim_valid, pipe_in_valid, enc_clear, enc_load, ebuf_we, sp_out_valid, done;
  logic [5:0] buf_rd_idx;
  logic [3:0] ebuf_addr;
  logic [4:0] dig_cycles;
  int checks = 0, failures = 0;

  bank_logic dut (.*);

  // array stand-in
  logic [7:0] last_pq;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) arr_sum_valid <= 1'b0; else arr_sum_valid <= arr_in_en;

  // PCE stand-in: done 40 clocks after start
  int pce_timer = -1;
  always_ff @(posedge clk) begin
    if (pce_start) pce_timer <= 40;
    else if (pce_timer > 0) pce_timer <= pce_timer - 1;
    else pce_timer <= -1;
  end
  assign pce_done = (pce_timer == 0);

  // observation counters
  int issued [8][8];
  int start_level;
  int n_issue, n_clear, n_start, n_xfer, n_reads, n_load, n_park, n_emit, bad_shift, bad_order;
  int exp_shift = -1;
  always @(negedge clk) if (rst_n) begin
    if (arr_sum_valid && (!dacc_en || int'(dacc_shift) != exp_shift)) bad_shift++;
    exp_shift = -1;
    if (arr_in_en) begin
      int p;
      p = -1;
      for (int r = 0; r < 4; r++) if (arr_xin[r]) p = 4 + r;
      if (p >= 0) begin
        issued[p][4 + int'(arr_bs)]++;
        exp_shift = p + 4 + int'(arr_bs);
      end
      n_issue++;
    end
    if (buf_clear) n_clear++;
    if (pce_start) begin n_start++; start_level = int'(pce_level); end
    if (buf_dcim_valid) n_xfer++;
    if (pipe_in_valid) begin
      if (int'(buf_rd_idx) != n_reads) bad_order++;
      n_reads++;
    end
    if (enc_load) n_load++;
    if (ebuf_we) n_park++;
    if (sp_out_valid) n_emit++;
  end

  function automatic bit digital(int p, int q, int lv);
    return p >= 4 && q >= 4 && p + q >= 8 + lv;
  endfunction

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s = %0d, expected %0d", what, got, exp);
    end
  endtask

  task automatic run(input int mean, input int lv, input bit first, input bit last,
                     input bit resume, input bit park, input bit layer_last, input layer_t mode);
    int cyc;
    layer_mode = mode;
    for (int b = 0; b < ACT_W; b++) sx[b] = SP_W'(((mean >> b) & 1) * 256);
    for (int p = 0; p < 8; p++) for (int q = 0; q < 8; q++) issued[p][q] = 0;
    n_issue = 0; n_clear = 0; n_start = 0; n_xfer = 0; n_reads = 0;
    n_load = 0; n_park = 0; n_emit = 0; bad_shift = 0; bad_order = 0;
    @(negedge clk);
    cmd = '{first_tile: first, last_tile: last, enc_resume: resume, enc_park: park,
            enc_addr: 4'd5, layer_last: layer_last};
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 0;
    while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
    @(negedge clk);
    expect_eq("level", int'(level_q), lv);
    expect_eq("digital cycles", n_issue, 16 - (lv == 1 ? 1 : lv == 2 ? 3 : lv == 3 ? 6 : 0));
    expect_eq("dig_cycles status", int'(dig_cycles), n_issue);
    for (int p = 0; p < 8; p++)
      for (int q = 0; q < 8; q++)
        if (issued[p][q] != int'(digital(p, q, lv))) begin
          failures++;
          $display("FAIL: level %0d cell x%0dw%0d issued %0d times", lv, p, q, issued[p][q]);
        end
    checks++;
    expect_eq("shift errors", bad_shift, 0);
    expect_eq("buffer clears", n_clear, int'(first));
    expect_eq("PCE starts", n_start, int'(last));
    if (last) expect_eq("PCE level", start_level, lv);
    expect_eq("parallel transfers", n_xfer, 1);
    expect_eq("pipeline reads", n_reads, last ? 64 : 0);
    expect_eq("read order errors", bad_order, 0);
    expect_eq("encoder loads", n_load, int'(last && resume));
    expect_eq("encoder parks", n_park, int'(last && park));
    expect_eq("emissions", n_emit, int'(last && !park && (mode == LAYER_CONV || layer_last)));
  endtask

  initial begin
    for (int r = 0; r < N_ROWS; r++) act_msb[r] = (r < 4) ? 4'(1 << r) : 4'd0;
    for (int b = 0; b < ACT_W; b++) sx[b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(40, 0, 1, 1, 0, 0, 0, LAYER_CONV);
    run(25, 1, 1, 1, 0, 0, 0, LAYER_CONV);
    run(15, 2, 1, 0, 0, 0, 0, LAYER_CONV);
    run(15, 2, 0, 1, 0, 1, 0, LAYER_CONV);
    run(5,  3, 1, 1, 1, 0, 0, LAYER_CONV);
    run(30, 1, 1, 1, 0, 0, 0, LAYER_LINEAR);
    run(31, 0, 1, 1, 0, 0, 1, LAYER_LINEAR);
    dyn_en = 0;
    run(5,  0, 1, 1, 0, 0, 0, LAYER_CONV);
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
