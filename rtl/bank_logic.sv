// bank_logic: controller of the PACiM bank, including the saliency
// speculation of the dynamic workload configuration.
//
// An operation is one pass of the D-CiM array over a 256-row tile of an
// output vector, started by cmd_valid/cmd_ready. On acceptance the MSB
// activations of the tile and the activation sparsity Sx of the whole
// vector are latched, and the speculation unit picks the boundary level.
// Then, in this order:
//  1. SETUP: on first_tile the buffer is cleared; on last_tile the PCE is
//     started, so it runs alongside the digital cycles.
//  2. DIG: the digital cycles of the computing map are issued one per
//     clock, (p,q) from (7,7) downward in p, then q; each presents bit p of
//     every activation as Xin and weight bit q as the bit select. There are
//     16, 15, 13 or 10 of them for levels 0..3.
//  3. XFER: after two drain clocks the 64 D-CiM totals are added to the
//     buffer in parallel and the D-CiM accumulators cleared. Without
//     last_tile the operation ends here (the next tile follows after a
//     weight update).
//  4. PWAIT: wait for the PCE, whose sequential results land in the buffer.
//  5. RESUME/OUT: optionally reload the sparsity encoder from the
//     intermediate buffer, then stream the 64 buffer entries through the
//     BN/AF/quantisation pipeline, whose outputs the encoder counts.
//  6. ENC: park the encoder state in the intermediate buffer (enc_park), or
//     emit the sparsity and clear the counters: always for CONV layers
//     (pixel-wise encoding), only on layer_last for LINEAR layers
//     (layer-wise encoding). done pulses.
// The sequence follows the data flow of the paper; the command format, the
// issue order and all latencies are this design's choices.
module bank_logic
  import pacim_pkg::*;
#(
  parameter int N_ROWS_P = N_ROWS,
  parameter int N_CH     = N_MWC
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command and operands from the cache
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  cmd_t                      cmd,
  input  logic [MSB_W-1:0]          act_msb [N_ROWS_P],
  input  sp_t                       sx      [ACT_W],
  // configuration
  input  sp_t                       n_len,
  input  logic                      dyn_en,
  input  logic [TH_W-1:0]           th0,
  input  logic [TH_W-1:0]           th1,
  input  logic [TH_W-1:0]           th2,
  input  layer_t                    layer_mode,
  // D-CiM array and its accumulator
  output logic                      arr_in_en,
  output logic [N_ROWS_P-1:0]       arr_xin,
  output logic [$clog2(MSB_W)-1:0]  arr_bs,
  input  logic                      arr_sum_valid,
  output logic                      dacc_en,
  output logic [3:0]                dacc_shift,
  output logic                      dacc_clear,
  // PCE
  output logic                      pce_start,
  output level_t                    pce_level,
  output sp_t                       sx_q    [ACT_W],
  input  logic                      pce_done,
  // buffer and pipeline
  output logic                      buf_clear,
  output logic                      buf_dcim_valid,
  output logic [$clog2(N_CH)-1:0]   buf_rd_idx,
  output logic                      pipe_in_valid,
  // sparsity encoder and intermediate buffer
  output logic                      enc_clear,
  output logic                      enc_load,
  output logic                      ebuf_we,
  output logic [3:0]                ebuf_addr,
  output logic                      sp_out_valid,
  // status
  output level_t                    level_q,
  output logic [4:0]                dig_cycles,
  output logic                      done
);
  typedef enum logic [3:0] {
    S_IDLE, S_SETUP, S_DIG, S_DWAIT, S_XFER, S_PWAIT, S_RESUME, S_OUT, S_OWAIT, S_ENC
  } state_t;
  state_t state;

  cmd_t              cmd_q;
  logic [MSB_W-1:0]  act_q [N_ROWS_P];
  level_t            spec_level;
  logic [2:0]        p, q;           // current bit indices (4..7)
  logic [2:0]        wait_cnt;
  logic              pce_seen;
  logic [$clog2(N_CH)-1:0] out_idx;

  speculation u_spec (
    .dyn_en(dyn_en), .sx(sx_q), .n_len(n_len),
    .th0(th0), .th1(th1), .th2(th2), .level(spec_level)
  );

  // lowest q that is still digital for activation bit pp
  function automatic logic [3:0] qmin(input logic [2:0] pp, input level_t lv);
    logic [4:0] m;
    m = 5'(2 * LSB_W) + 5'(lv) - 5'(pp);
    if (m < 5'(LSB_W)) m = 5'(LSB_W);
    return m[3:0];
  endfunction

  logic last_dig;
  always_comb begin
    last_dig = !({1'b0, q} > qmin(p, level_q)) &&
               !(p > 3'(LSB_W) && qmin(p - 3'd1, level_q) <= 4'(ACT_W - 1));
  end

  assign cmd_ready = (state == S_IDLE);
  assign pce_level = spec_level;   // the PCE samples it with pce_start, in SETUP

  logic [2:0]               p_off;
  logic [$clog2(MSB_W)-1:0] p_bit;
  assign p_off = p - 3'(LSB_W);
  assign p_bit = p_off[$clog2(MSB_W)-1:0];
  always_comb begin
    for (int r = 0; r < N_ROWS_P; r++) arr_xin[r] = act_q[r][p_bit];
  end
  assign arr_bs    = ($clog2(MSB_W))'(q - 3'(LSB_W));
  assign arr_in_en = (state == S_DIG);
  assign dacc_en   = arr_sum_valid;

  assign buf_clear      = (state == S_SETUP) && cmd_q.first_tile;
  assign pce_start      = (state == S_SETUP) && cmd_q.last_tile;
  assign dacc_clear     = (state == S_XFER) || (state == S_SETUP);
  assign buf_dcim_valid = (state == S_XFER);
  assign buf_rd_idx     = out_idx;
  assign pipe_in_valid  = (state == S_OUT);
  assign enc_load       = (state == S_RESUME) && cmd_q.enc_resume;
  assign ebuf_addr      = cmd_q.enc_addr;
  assign ebuf_we        = (state == S_ENC) && cmd_q.enc_park;
  assign sp_out_valid   = (state == S_ENC) && !cmd_q.enc_park &&
                          (layer_mode == LAYER_CONV || cmd_q.layer_last);
  assign enc_clear      = ebuf_we || sp_out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cmd_q      <= '0;
      for (int r = 0; r < N_ROWS_P; r++) act_q[r] <= '0;
      for (int b = 0; b < ACT_W; b++) sx_q[b] <= '0;
      level_q    <= '0;
      p          <= 3'd7;
      q          <= 3'd7;
      wait_cnt   <= '0;
      pce_seen   <= 1'b0;
      out_idx    <= '0;
      dig_cycles <= '0;
      dacc_shift <= '0;
      done       <= 1'b0;
    end else begin
      done       <= 1'b0;
      dacc_shift <= 4'({1'b0, p} + {1'b0, q});   // matches the array's input register
      if (pce_done) pce_seen <= 1'b1;
      case (state)
        S_IDLE: if (cmd_valid) begin
          cmd_q <= cmd;
          act_q <= act_msb;
          sx_q  <= sx;
          state <= S_SETUP;
        end
        S_SETUP: begin
          level_q    <= spec_level;
          p          <= 3'd7;
          q          <= 3'd7;
          dig_cycles <= '0;
          pce_seen   <= 1'b0;
          state      <= S_DIG;
        end
        S_DIG: begin
          dig_cycles <= dig_cycles + 1'b1;
          if ({1'b0, q} > qmin(p, level_q)) q <= q - 1'b1;
          else if (!last_dig) begin
            p <= p - 1'b1;
            q <= 3'd7;
          end
          if (last_dig) begin
            wait_cnt <= '0;
            state    <= S_DWAIT;
          end
        end
        S_DWAIT: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 3'd1) state <= S_XFER;
        end
        S_XFER: begin
          if (cmd_q.last_tile) state <= S_PWAIT;
          else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_PWAIT: if (pce_seen || pce_done) state <= S_RESUME;
        S_RESUME: begin
          out_idx <= '0;
          state   <= S_OUT;
        end
        S_OUT: begin
          out_idx <= out_idx + 1'b1;
          if (out_idx == ($clog2(N_CH))'(N_CH - 1)) begin
            wait_cnt <= '0;
            state    <= S_OWAIT;
          end
        end
        S_OWAIT: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 3'd3) state <= S_ENC;
        end
        S_ENC: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the number of digital cycles issued must match the computing map
  a_dig_cycles: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_DWAIT && wait_cnt == 3'd0) |-> (32'(dig_cycles) == digital_cycles(level_q)));
endmodule
