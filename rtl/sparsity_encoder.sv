// sparsity_encoder: on-die bit-level sparsity encoder.
//
// Eight counters, one per bit index of the 8-bit output activations, count
// how many activations have that bit set. For CONV layers the bank logic
// reads them after all channels of a pixel, for LINEAR layers after the
// whole layer, giving the next layer's activation sparsity Sx[7:0]. The
// state can be replaced by a stored one (load, from the intermediate
// encoding buffer) so that encoding resumes after a weight update, or
// cleared. Each clock: base = load ? load_val : (clear ? 0 : cnt), and
// cnt <= base + act (bit-wise), when in_valid. Counters saturate at their
// maximum. The eight counters follow the paper; the priority of load over
// clear and the saturation are this design's choices.
module sparsity_encoder
  import pacim_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             load,
  input  sp_t              load_val [ACT_W],
  input  logic             in_valid,
  input  logic [ACT_W-1:0] act,
  output sp_t              cnt [ACT_W]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < ACT_W; b++) cnt[b] <= '0;
    end else begin
      for (int b = 0; b < ACT_W; b++) begin
        automatic sp_t base = load ? load_val[b] : (clear ? '0 : cnt[b]);
        if (in_valid && act[b] && base != '1) cnt[b] <= base + 1'b1;
        else                                  cnt[b] <= base;
      end
    end
  end
endmodule
