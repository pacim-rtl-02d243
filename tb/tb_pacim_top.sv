// tb_pacim_top: end-to-end test of one PACiM bank at its full default size
// (256 rows, 64 channels, 6 PAC computing units).
//
// The testbench plays the cache: it holds random 8-bit activations and
// weights, loads the 4 weight MSBs into the array row by row, computes the
// bit-level sparsities of activations and weights itself, answers the
// bank's weight-sparsity reads, and issues operation commands. A reference
// model computes, per channel, the exact MSB x MSB part over all tiles plus
// the sparsity-domain estimate of all other (p,q) cycles, then BN, ReLU and
// quantisation, and from the 64 outputs the expected bit-level sparsity.
// Every output activation MSB and every emitted sparsity vector is checked.
// The sequence covers: all four boundary levels of the dynamic workload
// configuration, the static mode, a two-tile DP (512) with a weight update
// in between, parking the encoder state in the intermediate buffer and
// resuming it, layer-wise (LINEAR) encoding across two outputs and a
// 4096-long DP (16 tiles), and a DP of 576 (a 3x3x64 kernel) that fills
// three tiles with zero-padded rows while n stays 576. Each mechanism is counted and one that never
// occurs counts as a failure. It also reports the error of the hybrid MAC
// against the exact 8b x 8b MAC.
module tb_pacim_top;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic w_we = 0;
  logic [7:0] w_row = 0;
  logic [N_MWC*MSB_W-1:0] w_data = '0;
  logic bn_we = 0;
  logic [5:0] bn_ch = 0;
  logic signed [15:0] bn_gamma = 0;
  logic signed [31:0] bn_beta = 0;
  sp_t n_len = 0;
  logic dyn_en = 0;
  logic [7:0] th0 = 0, th1 = 0, th2 = 0;
  layer_t layer_mode = LAYER_CONV;
  logic [5:0] qshift = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd = '0;
  logic [3:0] act_msb [N_ROWS];
  sp_t sx [ACT_W];
  logic sw_req;
  logic [5:0] sw_ch;
  sp_t sw_data [ACT_W];
  logic act_out_valid, sp_out_valid, done;
  logic [5:0] act_out_ch;
  logic [3:0] act_out_msb;
  sp_t sp_out [ACT_W];
  level_t level;
  logic [4:0] dig_cycles;

  pacim_top dut (.*);

  localparam int MAXN = 4096;
  int checks = 0, failures = 0;

  // cache contents for the current output vector
  logic [7:0] x [MAXN];
  logic [7:0] w [MAXN][N_MWC];
  sp_t sw_tbl [N_MWC][ACT_W];
  int gam [N_MWC];
  int bet [N_MWC];

  always_ff @(posedge clk) if (sw_req) sw_data <= sw_tbl[sw_ch];

  // outputs captured from the bank
  int got_msb [N_MWC];
  int n_act_out;
  sp_t got_sp [ACT_W];
  int n_sp_out;
  always @(negedge clk) if (rst_n) begin
    if (act_out_valid) begin got_msb[act_out_ch] = int'(act_out_msb); n_act_out++; end
    if (sp_out_valid) begin got_sp = sp_out; n_sp_out++; end
  end

  // mechanism counters
  int cnt_level [4];
  int cnt_padded;
  int cnt_static, cnt_multitile, cnt_park, cnt_resume, cnt_linear_hold, cnt_linear_emit, cnt_conv_emit;
  int cnt_sat, cnt_relu;
  real err_sq, ref_sq;

  // reference state
  longint dig_acc [N_MWC];
  int enc_model [ACT_W];
  int parked [16][ACT_W];

  function automatic bit digital(int p, int q, int lv);
    return p >= 4 && q >= 4 && p + q >= 8 + lv;
  endfunction

  function automatic int bnq(longint acc, int g, int b, int sh);
    longint y = acc * g + b;
    if (y < 0) begin y = 0; cnt_relu++; end
    if (sh > 0) y = (y + (longint'(1) << (sh - 1))) >>> sh;
    if (y > 255) begin y = 255; cnt_sat++; end
    return int'(y);
  endfunction

  task automatic gen_vector(input int n, input int xmax);
    for (int i = 0; i < n; i++) begin
      x[i] = 8'($urandom % (xmax + 1));
      for (int c = 0; c < N_MWC; c++) w[i][c] = 8'($urandom);
    end
  endtask

  // sparsities of the whole vector
  task automatic set_sparsity(input int n);
    for (int b = 0; b < ACT_W; b++) begin
      int s = 0;
      for (int i = 0; i < n; i++) s += int'(x[i][b]);
      sx[b] = SP_W'(s);
    end
    for (int c = 0; c < N_MWC; c++)
      for (int b = 0; b < ACT_W; b++) begin
        int s = 0;
        for (int i = 0; i < n; i++) s += int'(w[i][c][b]);
        sw_tbl[c][b] = SP_W'(s);
      end
    n_len = SP_W'(n);
  endtask

  task automatic load_tile(input int t);
    for (int r = 0; r < N_ROWS; r++) begin
      @(negedge clk);
      w_we = 1; w_row = 8'(r);
      for (int c = 0; c < N_MWC; c++) w_data[c*MSB_W +: MSB_W] = w[t*N_ROWS + r][c][7:4];
      act_msb[r] = x[t*N_ROWS + r][7:4];
    end
    @(negedge clk);
    w_we = 0;
  endtask

  function automatic int exp_level(int n);
    longint s = 0;
    for (int i = 0; i < n; i++) s += longint'(x[i]);
    if (!dyn_en || s > longint'(th2) * n) return 0;
    if (s > longint'(th1) * n) return 1;
    if (s > longint'(th0) * n) return 2;
    return 3;
  endfunction

  // one output vector of DP length n (tiles * 256 unless dp is given, the
  // rows beyond dp being zero), with encoder actions
  task automatic run_output(input int tiles, input bit resume, input bit park,
                            input int addr, input bit layer_last, input int dp = 0);
    int n, lv, cyc, sp_before, outs [N_MWC];
    n = (dp > 0) ? dp : tiles * N_ROWS;
    for (int i = n; i < tiles * N_ROWS; i++) begin
      x[i] = '0;
      for (int c = 0; c < N_MWC; c++) w[i][c] = '0;
    end
    if (n % N_ROWS != 0) cnt_padded++;
    set_sparsity(n);
    lv = exp_level(n);
    for (int c = 0; c < N_MWC; c++) dig_acc[c] = 0;
    for (int t = 0; t < tiles; t++) begin
      load_tile(t);
      // reference digital part of this tile
      for (int c = 0; c < N_MWC; c++)
        for (int r = 0; r < N_ROWS; r++)
          for (int p = 4; p < 8; p++)
            for (int q = 4; q < 8; q++)
              if (digital(p, q, lv))
                dig_acc[c] += longint'(x[t*N_ROWS + r][p] & w[t*N_ROWS + r][c][q]) << (p + q);
      n_act_out = 0;
      sp_before = n_sp_out;
      @(negedge clk);
      cmd = '{first_tile: (t == 0), last_tile: (t == tiles - 1), enc_resume: resume,
              enc_park: park, enc_addr: 4'(addr), layer_last: layer_last};
      cmd_valid = 1;
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 0;
      cyc = 0;
      while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++;
      if (int'(level) != lv) begin failures++; $display("FAIL: level %0d expected %0d", level, lv); end
      checks++;
      if (int'(dig_cycles) != 16 - (lv == 1 ? 1 : lv == 2 ? 3 : lv == 3 ? 6 : 0)) begin
        failures++; $display("FAIL: %0d digital cycles at level %0d", dig_cycles, lv);
      end
    end
    cnt_level[lv]++;
    if (!dyn_en) cnt_static++;
    if (tiles > 1) cnt_multitile++;
    // reference: approximate part, pipeline, encoder
    if (resume) begin
      for (int b = 0; b < ACT_W; b++) enc_model[b] = parked[addr][b];
      cnt_resume++;
    end
    for (int c = 0; c < N_MWC; c++) begin
      longint a = 0, exact = 0;
      for (int p = 0; p < 8; p++)
        for (int q = 0; q < 8; q++)
          if (!digital(p, q, lv))
            a += longint'((int'(sx[p]) * int'(sw_tbl[c][q]) + n / 2) / n) << (p + q);
      for (int i = 0; i < n; i++) exact += longint'(x[i]) * longint'(w[i][c]);
      err_sq += real'(dig_acc[c] + a - exact) ** 2;
      ref_sq += real'(exact) ** 2;
      outs[c] = bnq(dig_acc[c] + a, gam[c], bet[c], int'(qshift));
      for (int b = 0; b < ACT_W; b++) enc_model[b] += (outs[c] >> b) & 1;
    end
    checks++;
    if (n_act_out != N_MWC) begin failures++; $display("FAIL: %0d output activations", n_act_out); end
    for (int c = 0; c < N_MWC; c++) begin
      checks++;
      if (got_msb[c] != (outs[c] >> 4)) begin
        failures++;
        if (failures < 20) $display("FAIL: ch %0d MSBs %0d expected %0d (act %0d)", c, got_msb[c], outs[c] >> 4, outs[c]);
      end
    end
    if (park) begin
      for (int b = 0; b < ACT_W; b++) begin parked[addr][b] = enc_model[b]; enc_model[b] = 0; end
      cnt_park++;
      checks++;
      if (n_sp_out != sp_before) begin failures++; $display("FAIL: emitted while parking"); end
    end else if (layer_mode == LAYER_CONV || layer_last) begin
      checks++;
      if (n_sp_out != sp_before + 1) begin failures++; $display("FAIL: no sparsity emitted"); end
      for (int b = 0; b < ACT_W; b++) begin
        checks++;
        if (int'(got_sp[b]) != enc_model[b]) begin
          failures++;
          $display("FAIL: sparsity bit %0d = %0d expected %0d", b, got_sp[b], enc_model[b]);
        end
        enc_model[b] = 0;
      end
      if (layer_mode == LAYER_CONV) cnt_conv_emit++; else cnt_linear_emit++;
    end else begin
      checks++;
      if (n_sp_out != sp_before) begin failures++; $display("FAIL: LINEAR emitted early"); end
      cnt_linear_hold++;
    end
  endtask

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism '%s' never happened", what); end
    else $display("mechanism %-28s happened %0d times", what, n);
  endtask

  initial begin
    for (int r = 0; r < N_ROWS; r++) act_msb[r] = '0;
    for (int b = 0; b < ACT_W; b++) begin sx[b] = '0; sw_data[b] = '0; enc_model[b] = 0; end
    cnt_level = '{0, 0, 0, 0};
    {cnt_static, cnt_multitile, cnt_park, cnt_resume, cnt_linear_hold, cnt_linear_emit, cnt_conv_emit} = '0;
    cnt_sat = 0; cnt_relu = 0; cnt_padded = 0; err_sq = 0; ref_sq = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N_MWC; c++) begin
      gam[c] = 1 + int'($urandom % 16);
      bet[c] = -int'($urandom % 2000000);
      @(negedge clk);
      bn_we = 1; bn_ch = 6'(c); bn_gamma = 16'(gam[c]); bn_beta = 32'(bet[c]);
    end
    @(negedge clk);
    bn_we = 0;
    qshift = 6'd19;
    th0 = 8'd40; th1 = 8'd80; th2 = 8'd120;

    // static 4-bit approximation, CONV
    dyn_en = 0; layer_mode = LAYER_CONV;
    gen_vector(256, 255); run_output(1, 0, 0, 0, 0);
    // dynamic configuration: mean activation sets the level
    dyn_en = 1;
    gen_vector(256, 255); run_output(1, 0, 0, 0, 0);   // mean ~127 -> level 0
    gen_vector(256, 200); run_output(1, 0, 0, 0, 0);   // mean ~100 -> level 1
    gen_vector(256, 120); run_output(1, 0, 0, 0, 0);   // mean ~60  -> level 2
    gen_vector(256, 60);  run_output(1, 0, 0, 0, 0);   // mean ~30  -> level 3
    // two tiles with a weight update in between (DP 512)
    gen_vector(512, 255); run_output(2, 0, 0, 0, 0);
    // a pixel with 128 output channels: park after the first 64, resume
    gen_vector(256, 255); run_output(1, 0, 1, 3, 0);
    gen_vector(256, 255); run_output(1, 1, 0, 3, 0);
    // LINEAR layer of two output groups: layer-wise encoding
    layer_mode = LAYER_LINEAR;
    gen_vector(256, 255); run_output(1, 0, 0, 0, 0);
    gen_vector(256, 255); run_output(1, 0, 0, 0, 1);
    // a 3x3x64 kernel: DP 576 over three tiles, the last one zero-padded
    layer_mode = LAYER_CONV;
    gen_vector(576, 255); run_output(3, 0, 0, 0, 0, 576);
    layer_mode = LAYER_LINEAR;
    // longest LINEAR DP of the paper, 4096 (16 tiles)
    gen_vector(4096, 255); run_output(16, 0, 0, 0, 1);

    need("level 0 (16 digital cycles)", cnt_level[0]);
    need("level 1 (15 digital cycles)", cnt_level[1]);
    need("level 2 (13 digital cycles)", cnt_level[2]);
    need("level 3 (10 digital cycles)", cnt_level[3]);
    need("static approximation", cnt_static);
    need("multi-tile DP", cnt_multitile);
    need("encoder park", cnt_park);
    need("encoder resume", cnt_resume);
    need("CONV pixel-wise emit", cnt_conv_emit);
    need("LINEAR hold", cnt_linear_hold);
    need("LINEAR layer-wise emit", cnt_linear_emit);
    need("zero-padded DP (576)", cnt_padded);
    need("ReLU clamp", cnt_relu);
    need("quantisation saturation", cnt_sat);
    $display("hybrid MAC relative RMS error vs exact 8b x 8b MAC: %0.3f %%", 100.0 * $sqrt(err_sq / ref_sq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
