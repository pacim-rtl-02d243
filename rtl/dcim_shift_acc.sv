// dcim_shift_acc: shifter and accumulator of the CiM bank.
//
// One accumulator per multi-bit weight column. Each digital bit-serial cycle
// (p,q) delivers a binary MAC per column; with en the block adds it shifted
// left by shift = p+q, so after all digital cycles acc[k] holds
// sum_{(p,q) digital} 2^(p+q) * sum_r x_r[p] w_rk[q]. clear zeroes every
// lane and wins over en. The totals are read in parallel by the buffer.
// The 32-bit width is this design's choice.
module dcim_shift_acc #(
  parameter int N_LANES = 64,
  parameter int IN_W    = 9,
  parameter int ACC_W   = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  logic [3:0]              shift,
  input  logic [IN_W-1:0]         psum [N_LANES],
  output logic signed [ACC_W-1:0] acc  [N_LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_LANES; k++) acc[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < N_LANES; k++) acc[k] <= '0;
    end else if (en) begin
      for (int k = 0; k < N_LANES; k++)
        acc[k] <= acc[k] + (ACC_W'(psum[k]) << shift);
    end
  end
endmodule
