// pce_shift_acc: shifter and accumulator of the PAC computation engine.
//
// One accumulator per PAC computing unit. With en every lane adds its PAC
// term shifted left by shift (= p+q), so after all approximate cycles lane i
// holds sum_{(p,q) approximate} 2^(p+q) * Sx[p]*Sw_i[q]/n. clear zeroes the
// lanes and wins over en. A pulse on unload starts the sequential transfer
// to the buffer: on the following N_LANES clocks out_valid is high and
// out_lane/out_value present lane 0, 1, ... in turn; busy is high meanwhile.
// Accumulation during a transfer is not allowed (checked by an assertion).
// The lane order and the 32-bit width are this design's choices.
module pce_shift_acc #(
  parameter int N_LANES = 6,
  parameter int IN_W    = 13,
  parameter int ACC_W   = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          en,
  input  logic [3:0]                    shift,
  input  logic [IN_W-1:0]               term [N_LANES],
  input  logic                          unload,
  output logic                          out_valid,
  output logic [$clog2(N_LANES)-1:0]    out_lane,
  output logic signed [ACC_W-1:0]       out_value,
  output logic                          busy
);
  logic signed [ACC_W-1:0] acc [N_LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_LANES; k++) acc[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < N_LANES; k++) acc[k] <= '0;
    end else if (en) begin
      for (int k = 0; k < N_LANES; k++)
        acc[k] <= acc[k] + (ACC_W'(term[k]) << shift);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      out_lane <= '0;
    end else if (!busy && unload) begin
      busy     <= 1'b1;
      out_lane <= '0;
    end else if (busy) begin
      if (out_lane == ($clog2(N_LANES))'(N_LANES - 1)) busy <= 1'b0;
      else out_lane <= out_lane + 1'b1;
    end
  end

  assign out_valid = busy;
  assign out_value = acc[out_lane];

  a_no_acc_during_unload: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !en);
endmodule
