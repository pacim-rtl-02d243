// result_buffer: the CnM buffer that merges the digital and the approximate
// partial sums of every output channel.
//
// N_CH signed entries. clear zeroes them. dcim_valid adds the D-CiM bank's
// N_CH accumulator totals, all in one clock (the parallel transfer);
// pce_valid adds one PCE result to entry pce_ch (the sequential transfer).
// Both may arrive in the same clock and are then both added. Because the
// entries keep accumulating until cleared, a DP longer than one array pass is
// summed over several passes. rd_idx selects the entry shown on rd_data
// (combinational read) for the BN/AF/quantisation pipeline. The merge
// function follows the paper; widths and read timing are this design's
// choices.
module result_buffer
  import pacim_pkg::*;
#(
  parameter int N_CH = N_MWC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     dcim_valid,
  input  acc_t                     dcim_val [N_CH],
  input  logic                     pce_valid,
  input  logic [$clog2(N_CH)-1:0]  pce_ch,
  input  acc_t                     pce_val,
  input  logic [$clog2(N_CH)-1:0]  rd_idx,
  output acc_t                     rd_data
);
  acc_t entry [N_CH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) entry[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < N_CH; c++) entry[c] <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        entry[c] <= entry[c]
                  + (dcim_valid ? dcim_val[c] : acc_t'(0))
                  + ((pce_valid && pce_ch == ($clog2(N_CH))'(c)) ? pce_val : acc_t'(0));
      end
    end
  end

  assign rd_data = entry[rd_idx];
endmodule
