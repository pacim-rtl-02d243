// post_pipeline: batch normalisation, activation function and quantisation.
//
// Turns each merged MAC result of the buffer into an unsigned 8-bit output
// activation in three registered stages, one result per clock:
//   BN:    y1 = acc * gamma[ch] + beta[ch]   (signed, per-channel parameters)
//   AF:    y2 = max(y1, 0)                     (ReLU)
//   Quant: y3 = min((y2 + 2^(qshift-1)) >> qshift, 255)
// out_valid/out_ch/out_act follow in_valid by three clocks. Per-channel
// gamma and beta are written through par_we/par_ch. The paper names the
// three stages only; the fixed-point forms above are this design's choices.
module post_pipeline
  import pacim_pkg::*;
#(
  parameter int N_CH    = N_MWC,
  parameter int GAMMA_W = 16,
  parameter int BETA_W  = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       par_we,
  input  logic [$clog2(N_CH)-1:0]    par_ch,
  input  logic signed [GAMMA_W-1:0]  par_gamma,
  input  logic signed [BETA_W-1:0]   par_beta,
  input  logic [5:0]                 qshift,
  input  logic                       in_valid,
  input  logic [$clog2(N_CH)-1:0]    in_ch,
  input  acc_t                       in_val,
  output logic                       out_valid,
  output logic [$clog2(N_CH)-1:0]    out_ch,
  output logic [ACT_W-1:0]           out_act
);
  localparam int YW = ACC_W + GAMMA_W + 1;

  logic signed [GAMMA_W-1:0] gamma [N_CH];
  logic signed [BETA_W-1:0]  beta  [N_CH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) begin
        gamma[c] <= GAMMA_W'(1);
        beta[c]  <= '0;
      end
    end else if (par_we) begin
      gamma[par_ch] <= par_gamma;
      beta[par_ch]  <= par_beta;
    end
  end

  logic                     v1, v2;
  logic [$clog2(N_CH)-1:0]  c1, c2;
  logic signed [YW-1:0]     y1;
  logic [YW-1:0]            y2;
  logic [YW:0]              rounded;

  always_comb rounded = ({1'b0, y2} + ((YW+1)'(qshift != 0) << (qshift - 6'd1))) >> qshift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      c1 <= '0;   c2 <= '0;   out_ch    <= '0;
      y1 <= '0;   y2 <= '0;   out_act   <= '0;
    end else begin
      // BN
      v1 <= in_valid;
      c1 <= in_ch;
      y1 <= YW'(in_val) * YW'(gamma[in_ch]) + YW'(beta[in_ch]);
      // AF
      v2 <= v1;
      c2 <= c1;
      y2 <= y1[YW-1] ? '0 : YW'(y1);
      // quantisation
      out_valid <= v2;
      out_ch    <= c2;
      out_act   <= (rounded > (YW+1)'(255)) ? 8'hFF : rounded[ACT_W-1:0];
    end
  end
endmodule
