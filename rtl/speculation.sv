// speculation: saliency speculation for the dynamic workload configuration.
//
// From the activation sparsity of an input vector it forms the weighted sum
// SPEC = sum_p 2^p * Sx[p], which equals the sum of all activations of the
// vector, and compares its normalised value SPEC/n (the mean activation)
// with three thresholds TH0 <= TH1 <= TH2. The comparison is done as
// SPEC > TH*n, so no divider is needed. The result is the computing-map
// boundary level:
//   SPEC/n > TH2        -> 0 (16 digital cycles)
//   TH1 < SPEC/n <= TH2 -> 1 (15: x4w4 goes to the sparsity domain)
//   TH0 < SPEC/n <= TH1 -> 2 (13: also x4w5, x5w4)
//   SPEC/n <= TH0       -> 3 (10: also x4w6, x5w5, x6w4)
// With dyn_en low the level is 0. Combinational. The formula, the three
// thresholds and the cycle counts follow the paper; normalising by n and the
// 8-bit threshold format are this design's choices.
module speculation
  import pacim_pkg::*;
(
  input  logic            dyn_en,
  input  sp_t             sx [ACT_W],
  input  sp_t             n_len,
  input  logic [TH_W-1:0] th0,
  input  logic [TH_W-1:0] th1,
  input  logic [TH_W-1:0] th2,
  output level_t          level
);
  localparam int SW = SP_W + ACT_W;
  logic [SW-1:0] spec;
  logic [SW-1:0] lim0, lim1, lim2;

  always_comb begin
    spec = '0;
    for (int p = 0; p < ACT_W; p++) spec = spec + (SW'(sx[p]) << p);
    lim0 = SW'(th0) * SW'(n_len);
    lim1 = SW'(th1) * SW'(n_len);
    lim2 = SW'(th2) * SW'(n_len);
    if (!dyn_en || spec > lim2) level = 2'd0;
    else if (spec > lim1)       level = 2'd1;
    else if (spec > lim0)       level = 2'd2;
    else                        level = 2'd3;
  end
endmodule
