// pacim_top: one PACiM bank, a hybrid digital / sparsity-domain
// compute-in-memory engine for 8b x 8b unsigned MACs.
//
// The CiM bank (dcim_array + dcim_shift_acc) computes the exact product of
// the 4 MSBs of weights and activations bit-serially over a 256-row tile.
// The CnM processing unit approximates every other binary MAC cycle from
// bit-level sparsity in the PAC computation engine (pce), merges both parts
// in the result_buffer, turns them into 8-bit activations in post_pipeline,
// sends their 4 MSBs back to the cache and encodes their bit-level sparsity
// in the sparsity_encoder (with the enc_buffer for parked states). The
// bank_logic sequences all of it and holds the speculation unit of the
// dynamic workload configuration.
//
// The cache is outside this module. Its ports are: weight rows (w_*),
// operation commands with the tile's MSB activations and the vector's
// activation sparsity (cmd_*), a weight-sparsity read port with one-clock
// latency (sw_*: the cache must return the sparsity of channel sw_ch on
// sw_data in the clock after sw_req), the output activation MSBs (act_out_*)
// and the encoded sparsity (sp_out_*). BN parameters and the configuration
// registers (n_len, thresholds, dyn_en, layer_mode, qshift) are plain
// inputs; they must stay constant during an operation.
module pacim_top
  import pacim_pkg::*;
#(
  parameter int N_ROWS_P = N_ROWS,
  parameter int N_CH     = N_MWC
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight load (4 MSBs of every weight; one array row per clock)
  input  logic                        w_we,
  input  logic [$clog2(N_ROWS_P)-1:0] w_row,
  input  logic [N_CH*MSB_W-1:0]       w_data,
  // BN parameters
  input  logic                        bn_we,
  input  logic [$clog2(N_CH)-1:0]     bn_ch,
  input  logic signed [15:0]          bn_gamma,
  input  logic signed [31:0]          bn_beta,
  // configuration
  input  sp_t                         n_len,
  input  logic                        dyn_en,
  input  logic [TH_W-1:0]             th0,
  input  logic [TH_W-1:0]             th1,
  input  logic [TH_W-1:0]             th2,
  input  layer_t                      layer_mode,
  input  logic [5:0]                  qshift,
  // operation command
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  cmd_t                        cmd,
  input  logic [MSB_W-1:0]            act_msb [N_ROWS_P],
  input  sp_t                         sx      [ACT_W],
  // weight sparsity read from the cache
  output logic                        sw_req,
  output logic [$clog2(N_CH)-1:0]     sw_ch,
  input  sp_t                         sw_data [ACT_W],
  // results to the cache
  output logic                        act_out_valid,
  output logic [$clog2(N_CH)-1:0]     act_out_ch,
  output logic [MSB_W-1:0]            act_out_msb,
  output logic                        sp_out_valid,
  output sp_t                         sp_out  [ACT_W],
  // status
  output logic                        done,
  output level_t                      level,
  output logic [4:0]                  dig_cycles
);
  localparam int SUM_W = $clog2(N_ROWS_P) + 1;

  // ---------------- CiM bank ----------------
  logic                      arr_in_en, arr_sum_valid;
  logic [N_ROWS_P-1:0]       arr_xin;
  logic [$clog2(MSB_W)-1:0]  arr_bs;
  logic [SUM_W-1:0]          arr_sum [N_CH];
  logic                      dacc_en, dacc_clear;
  logic [3:0]                dacc_shift;
  acc_t                      dacc [N_CH];

  dcim_array #(.N_ROWS(N_ROWS_P), .N_MWC(N_CH), .MSB_W(MSB_W)) u_array (
    .clk(clk), .rst_n(rst_n),
    .wr_en(w_we), .wr_row(w_row), .wr_data(w_data),
    .in_en(arr_in_en), .xin(arr_xin), .bs(arr_bs),
    .sum_valid(arr_sum_valid), .sum(arr_sum)
  );

  dcim_shift_acc #(.N_LANES(N_CH), .IN_W(SUM_W), .ACC_W(ACC_W)) u_dacc (
    .clk(clk), .rst_n(rst_n), .clear(dacc_clear), .en(dacc_en),
    .shift(dacc_shift), .psum(arr_sum), .acc(dacc)
  );

  // ---------------- CnM processing unit ----------------
  logic                    pce_start, pce_done, pce_busy;
  level_t                  pce_level;
  sp_t                     sx_q [ACT_W];
  logic                    pce_res_valid;
  logic [$clog2(N_CH)-1:0] pce_res_ch;
  acc_t                    pce_res_val;

  pce #(.N_PCU_P(N_PCU), .N_CH(N_CH)) u_pce (
    .clk(clk), .rst_n(rst_n), .start(pce_start), .level(pce_level),
    .sx(sx_q), .n_len(n_len),
    .sw_req(sw_req), .sw_ch(sw_ch), .sw_data(sw_data),
    .res_valid(pce_res_valid), .res_ch(pce_res_ch), .res_val(pce_res_val),
    .busy(pce_busy), .done(pce_done)
  );

  logic                    buf_clear, buf_dcim_valid;
  logic [$clog2(N_CH)-1:0] buf_rd_idx;
  acc_t                    buf_rd_data;

  result_buffer #(.N_CH(N_CH)) u_buf (
    .clk(clk), .rst_n(rst_n), .clear(buf_clear),
    .dcim_valid(buf_dcim_valid), .dcim_val(dacc),
    .pce_valid(pce_res_valid), .pce_ch(pce_res_ch), .pce_val(pce_res_val),
    .rd_idx(buf_rd_idx), .rd_data(buf_rd_data)
  );

  logic                    pipe_in_valid, pipe_out_valid;
  logic [$clog2(N_CH)-1:0] pipe_out_ch;
  logic [ACT_W-1:0]        pipe_out_act;

  post_pipeline #(.N_CH(N_CH)) u_pipe (
    .clk(clk), .rst_n(rst_n),
    .par_we(bn_we), .par_ch(bn_ch), .par_gamma(bn_gamma), .par_beta(bn_beta),
    .qshift(qshift),
    .in_valid(pipe_in_valid), .in_ch(buf_rd_idx), .in_val(buf_rd_data),
    .out_valid(pipe_out_valid), .out_ch(pipe_out_ch), .out_act(pipe_out_act)
  );

  // only the MSBs of the output activations go back to the cache
  assign act_out_valid = pipe_out_valid;
  assign act_out_ch    = pipe_out_ch;
  assign act_out_msb   = pipe_out_act[ACT_W-1 -: MSB_W];

  logic enc_clear, enc_load, ebuf_we;
  logic [3:0] ebuf_addr;
  sp_t  enc_cnt  [ACT_W];
  sp_t  ebuf_out [ACT_W];

  sparsity_encoder u_enc (
    .clk(clk), .rst_n(rst_n), .clear(enc_clear), .load(enc_load),
    .load_val(ebuf_out), .in_valid(pipe_out_valid), .act(pipe_out_act),
    .cnt(enc_cnt)
  );

  enc_buffer #(.DEPTH(ENC_DEPTH)) u_ebuf (
    .clk(clk), .we(ebuf_we), .waddr(ebuf_addr), .wdata(enc_cnt),
    .raddr(ebuf_addr), .rdata(ebuf_out)
  );

  assign sp_out = enc_cnt;

  // ---------------- bank logic ----------------
  bank_logic #(.N_ROWS_P(N_ROWS_P), .N_CH(N_CH)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .act_msb(act_msb), .sx(sx),
    .n_len(n_len), .dyn_en(dyn_en), .th0(th0), .th1(th1), .th2(th2),
    .layer_mode(layer_mode),
    .arr_in_en(arr_in_en), .arr_xin(arr_xin), .arr_bs(arr_bs),
    .arr_sum_valid(arr_sum_valid),
    .dacc_en(dacc_en), .dacc_shift(dacc_shift), .dacc_clear(dacc_clear),
    .pce_start(pce_start), .pce_level(pce_level), .sx_q(sx_q), .pce_done(pce_done),
    .buf_clear(buf_clear), .buf_dcim_valid(buf_dcim_valid), .buf_rd_idx(buf_rd_idx),
    .pipe_in_valid(pipe_in_valid),
    .enc_clear(enc_clear), .enc_load(enc_load), .ebuf_we(ebuf_we), .ebuf_addr(ebuf_addr),
    .sp_out_valid(sp_out_valid),
    .level_q(level), .dig_cycles(dig_cycles), .done(done)
  );

  // the PCE must be idle when a new output operation starts
  a_pce_idle: assert property (@(posedge clk) disable iff (!rst_n) pce_start |-> !pce_busy);
endmodule
