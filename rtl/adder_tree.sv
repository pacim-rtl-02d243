// adder_tree: counts the ones in an N-bit dot-product vector.
//
// This is the adder tree at the foot of each multi-bit weight column: the
// NOR gates of the 256 rows each give one product bit x AND w, and the tree
// sums them into the column's binary MAC result. It is a balanced binary
// tree built level by level: level 0 holds the N input bits, and each
// later level adds neighbouring pairs of the level below, one bit wider,
// until level log2(N) holds the single total. Purely combinational. The paper
// names the block; its tree structure is this design's choice. N must be a
// power of two.
module adder_tree #(
  parameter int N = 256
) (
  input  logic [N-1:0]         dp,
  output logic [$clog2(N):0]   sum
);
  localparam int L = $clog2(N);
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    logic [l:0] s [N >> l];
    if (l == 0) begin : g_in
      for (genvar i = 0; i < N; i++) begin : g_b
        assign s[i] = dp[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < (N >> l); i++) begin : g_a
        assign s[i] = g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
  end
  assign sum = g_lvl[L].s[0];
endmodule
