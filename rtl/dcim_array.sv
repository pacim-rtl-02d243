// dcim_array: the 256 x 256-cell digital compute-in-memory array.
//
// N_MWC multi-bit weight columns of MSB_W bit columns each share a word-line
// driver (row decode for writes), a column write driver (one full row of
// N_MWC*MSB_W weight bits per write, MWC k in bits [k*MSB_W +: MSB_W]), an
// input driver and the bit select. For one bit-serial cycle the caller
// presents activation bit p of every row on xin and the weight bit select
// bs (weight bit 4+bs) with in_en; the input driver registers them and one
// clock later sum_valid rises with the binary MAC of every column,
// sum[k] = sum_r x_r[p] & w_rk[4+bs]. The structure follows the paper; the
// registered input driver, the write width and the column order are this
// design's choices.
module dcim_array #(
  parameter int N_ROWS = 256,
  parameter int N_MWC  = 64,
  parameter int MSB_W  = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [$clog2(N_ROWS)-1:0]     wr_row,
  input  logic [N_MWC*MSB_W-1:0]        wr_data,
  input  logic                          in_en,
  input  logic [N_ROWS-1:0]             xin,
  input  logic [$clog2(MSB_W)-1:0]      bs,
  output logic                          sum_valid,
  output logic [$clog2(N_ROWS):0]       sum [N_MWC]
);
  logic [N_ROWS-1:0]        xin_q;
  logic [$clog2(MSB_W)-1:0] bs_q;

  // input driver and bit select latch
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xin_q     <= '0;
      bs_q      <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= in_en;
      if (in_en) begin
        xin_q <= xin;
        bs_q  <= bs;
      end
    end
  end

  for (genvar k = 0; k < N_MWC; k++) begin : g_mwc
    mwc #(.N_ROWS(N_ROWS), .MSB_W(MSB_W)) u_mwc (
      .clk    (clk),
      .wr_en  (wr_en),
      .wr_row (wr_row),
      .wr_data(wr_data[k*MSB_W +: MSB_W]),
      .bs     (bs_q),
      .xin    (xin_q),
      .sum    (sum[k])
    );
  end
endmodule
