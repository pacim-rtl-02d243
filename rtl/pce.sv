// pce: PAC computation engine, N_PCU PAC computing units and their
// accumulators.
//
// For one output vector the engine computes, for every output channel c,
// the approximate part of the hybrid MAC
//     A_c = sum_{(p,q) not digital} 2^(p+q) * Sx[p] * Sw_c[q] / n,
// where "digital" is the computing map of pacim_pkg::is_digital at the given
// boundary level. A start pulse samples Sx, n and the level. The channels
// are handled in groups of N_PCU: the weight sparsity of each channel in the
// group is fetched from the cache (sw_req/sw_ch, data on sw_data one clock
// later) into its PCU, then all approximate (p,q) cycles are issued, one per
// clock in p-major order, to all PCUs at once (weight-stationary within the
// group). The accumulated results are transferred one per clock to the
// buffer (res_valid/res_ch/res_val) and the next group starts. done pulses
// after the last group. From start to done the engine takes
// 2 + groups * (2*N_PCU + approximate cycles + 7) clocks, 739 clocks for
// 64 channels at the full 16 digital cycles (48 approximate ones). The PCU count and the PCU contents follow the paper;
// the grouping of channels, the fetch port and the issue order are this
// design's choices.
module pce
  import pacim_pkg::*;
#(
  parameter int N_PCU_P = N_PCU,
  parameter int N_CH    = N_MWC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  level_t                   level,
  input  sp_t                      sx [ACT_W],
  input  sp_t                      n_len,
  output logic                     sw_req,
  output logic [$clog2(N_CH)-1:0]  sw_ch,
  input  sp_t                      sw_data [ACT_W],
  output logic                     res_valid,
  output logic [$clog2(N_CH)-1:0]  res_ch,
  output acc_t                     res_val,
  output logic                     busy,
  output logic                     done
);
  localparam int NGRP  = (N_CH + N_PCU_P - 1) / N_PCU_P;
  localparam int LW    = $clog2(N_PCU_P);
  localparam int NPAIR = ACT_W * ACT_W;
  localparam int PW    = $clog2(NPAIR);

  typedef enum logic [2:0] { S_IDLE, S_INIT, S_FETCH, S_COMP, S_DRAIN, S_UNLOAD, S_NEXT } state_t;
  state_t state;

  level_t                  level_q;
  logic [$clog2(NGRP)-1:0] grp;
  logic [LW:0]             fetch_i;      // lane being fetched
  logic                    fetch_pend;   // data for lane fetch_i-1 arrives now
  logic [PW:0]             pair;         // current (p,q) index, NPAIR = none
  logic [1:0]              drain;
  logic                    unload_sent;

  // first approximate pair at or after index i
  function automatic logic [PW:0] next_approx(input logic [PW:0] i, input level_t lv);
    logic [PW:0] r;
    r = (PW+1)'(NPAIR);
    for (int k = NPAIR - 1; k >= 0; k--)
      if (k >= int'(i) && !is_digital(k / ACT_W, k % ACT_W, lv)) r = (PW+1)'(k);
    return r;
  endfunction

  // per-PCU control
  logic                     sx_we, n_we, pcu_en;
  logic [N_PCU_P-1:0]       sw_we;
  logic [$clog2(ACT_W)-1:0] p_idx, q_idx;
  logic                     term_valid [N_PCU_P];
  sp_t                      term       [N_PCU_P];
  logic [$clog2(ACT_W):0]   term_shift [N_PCU_P];

  assign p_idx = pair[PW-1 -: $clog2(ACT_W)];
  assign q_idx = pair[$clog2(ACT_W)-1:0];

  for (genvar i = 0; i < N_PCU_P; i++) begin : g_pcu
    pcu u_pcu (
      .clk(clk), .rst_n(rst_n),
      .sx_we(sx_we), .sx_in(sx),
      .sw_we(sw_we[i]), .sw_in(sw_data),
      .n_we(n_we), .n_in(n_len),
      .en(pcu_en), .p(p_idx), .q(q_idx),
      .term_valid(term_valid[i]), .term(term[i]), .term_shift(term_shift[i])
    );
  end

  logic               acc_clear, unload, acc_busy, acc_out_valid;
  logic [LW-1:0]      acc_lane;
  acc_t               acc_value;

  pce_shift_acc #(.N_LANES(N_PCU_P), .IN_W(SP_W), .ACC_W(ACC_W)) u_acc (
    .clk(clk), .rst_n(rst_n), .clear(acc_clear),
    .en(term_valid[0]), .shift(term_shift[0]), .term(term),
    .unload(unload), .out_valid(acc_out_valid), .out_lane(acc_lane),
    .out_value(acc_value), .busy(acc_busy)
  );

  // channel of a lane in the current group
  logic [$clog2(N_CH*2)-1:0] lane_ch;
  assign lane_ch = ($clog2(N_CH*2))'(grp) * ($clog2(N_CH*2))'(N_PCU_P) + ($clog2(N_CH*2))'(acc_lane);

  assign res_valid = acc_out_valid && (lane_ch < ($clog2(N_CH*2))'(N_CH));
  assign res_ch    = lane_ch[$clog2(N_CH)-1:0];
  assign res_val   = acc_value;
  assign busy      = (state != S_IDLE);

  logic [$clog2(N_CH*2)-1:0] fetch_ch;
  assign fetch_ch = ($clog2(N_CH*2))'(grp) * ($clog2(N_CH*2))'(N_PCU_P) + ($clog2(N_CH*2))'(fetch_i);

  always_comb begin
    sx_we     = (state == S_INIT);
    n_we      = (state == S_INIT);
    sw_req    = (state == S_FETCH) && (fetch_i < (LW+1)'(N_PCU_P)) && (fetch_ch < ($clog2(N_CH*2))'(N_CH));
    sw_ch     = fetch_ch[$clog2(N_CH)-1:0];
    sw_we     = '0;
    if (state == S_FETCH && fetch_pend) sw_we[LW'(fetch_i - 1'b1)] = 1'b1;
    pcu_en    = (state == S_COMP) && (pair < (PW+1)'(NPAIR));
    acc_clear = (state == S_NEXT) || (state == S_INIT);
    unload    = (state == S_UNLOAD) && !unload_sent;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      level_q     <= '0;
      grp         <= '0;
      fetch_i     <= '0;
      fetch_pend  <= 1'b0;
      pair        <= '0;
      drain       <= '0;
      unload_sent <= 1'b0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          level_q <= level;
          grp     <= '0;
          state   <= S_INIT;
        end
        S_INIT: begin
          fetch_i    <= '0;
          fetch_pend <= 1'b0;
          state      <= S_FETCH;
        end
        S_FETCH: begin
          fetch_pend <= sw_req;
          if (fetch_i < (LW+1)'(N_PCU_P)) fetch_i <= fetch_i + 1'b1;
          else begin
            pair  <= next_approx('0, level_q);
            state <= S_COMP;
          end
        end
        S_COMP: begin
          if (pair < (PW+1)'(NPAIR)) pair <= next_approx(pair + 1'b1, level_q);
          else begin
            drain <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd1) begin
            unload_sent <= 1'b0;
            state       <= S_UNLOAD;
          end
        end
        S_UNLOAD: begin
          unload_sent <= 1'b1;
          if (unload_sent && !acc_busy) state <= S_NEXT;
        end
        S_NEXT: begin
          if (grp == ($clog2(NGRP))'(NGRP - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            grp        <= grp + 1'b1;
            fetch_i    <= '0;
            fetch_pend <= 1'b0;
            state      <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
