// mwc: one multi-bit weight column (MWC) of the D-CiM array.
//
// Each of the N_ROWS rows stores the MSB_W most significant bits of one
// weight (bits 7..4 in an 8-bit design; the LSB columns do not exist because
// those products are approximated from sparsity). In a bit-serial cycle the
// bit select BS picks weight bit LSB_W+bs in every row. As in the paper, the
// selected bit is taken from the Q-bar side of the cell and meets the
// activation bit at a NOR gate; the input driver presents the inverted
// activation bit, so the NOR yields x AND w. The adder tree then sums the
// rows. Writes are synchronous, one row per clock; the compute path is
// combinational from bs/xin to sum. Storage as a register array and the
// input inversion are this design's choices.
module mwc #(
  parameter int N_ROWS = 256,
  parameter int MSB_W  = 4
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(N_ROWS)-1:0]   wr_row,
  input  logic [MSB_W-1:0]            wr_data,   // bit b = weight bit (8-MSB_W)+b
  input  logic [$clog2(MSB_W)-1:0]    bs,
  input  logic [N_ROWS-1:0]           xin,
  output logic [$clog2(N_ROWS):0]     sum
);
  logic [MSB_W-1:0]  bits [N_ROWS];
  logic [N_ROWS-1:0] qbar_sel;   // Q-bar of the selected weight bit per row
  logic [N_ROWS-1:0] xin_n;      // inverted activation from the input driver
  logic [N_ROWS-1:0] dp;

  always_ff @(posedge clk) begin
    if (wr_en) bits[wr_row] <= wr_data;
  end

  always_comb begin
    for (int r = 0; r < N_ROWS; r++) begin
      qbar_sel[r] = ~bits[r][bs];
      xin_n[r]    = ~xin[r];
      dp[r]       = ~(qbar_sel[r] | xin_n[r]);   // NOR gate array
    end
  end

  adder_tree #(.N(N_ROWS)) u_tree (.dp(dp), .sum(sum));
endmodule
