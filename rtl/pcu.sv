// pcu: PAC computing unit.
//
// Holds a sparsity register file, eight 13-bit activation sparsities
// Sx[7:0], eight 13-bit weight sparsities Sw[7:0] and the 13-bit DP length
// n, and an arithmetic unit that evaluates the probabilistic estimate of one
// binary MAC cycle (p,q): E = Sx[p] * Sw[q] / n, the expected number of rows
// where both bit p of the activation and bit q of the weight are 1. The
// registers are written with sx_we / sw_we / n_we. With en the unit
// computes the term for (p,q); term, term_valid and term_shift (= p+q, for
// the accumulator) appear one clock later. Register file, multiplier and
// divider follow the paper. The rounding (to nearest, (Sx*Sw + n/2) / n),
// the result of 0 for n = 0 and the one-clock latency are this design's
// choices.
module pcu
  import pacim_pkg::*;
#(
  parameter int ACT_W_P = ACT_W,
  parameter int SP_W_P  = SP_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sx_we,
  input  logic [SP_W_P-1:0]           sx_in [ACT_W_P],
  input  logic                        sw_we,
  input  logic [SP_W_P-1:0]           sw_in [ACT_W_P],
  input  logic                        n_we,
  input  logic [SP_W_P-1:0]           n_in,
  input  logic                        en,
  input  logic [$clog2(ACT_W_P)-1:0]  p,
  input  logic [$clog2(ACT_W_P)-1:0]  q,
  output logic                        term_valid,
  output logic [SP_W_P-1:0]           term,
  output logic [$clog2(ACT_W_P):0]    term_shift
);
  logic [SP_W_P-1:0]   sx [ACT_W_P];
  logic [SP_W_P-1:0]   sw [ACT_W_P];
  logic [SP_W_P-1:0]   n_reg;
  logic [2*SP_W_P-1:0] prod;
  logic [2*SP_W_P-1:0] quot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ACT_W_P; i++) begin
        sx[i] <= '0;
        sw[i] <= '0;
      end
      n_reg <= '0;
    end else begin
      if (sx_we) sx <= sx_in;
      if (sw_we) sw <= sw_in;
      if (n_we)  n_reg <= n_in;
    end
  end

  // multiply, then divide by the DP length with rounding to nearest
  always_comb begin
    prod = sx[p] * sw[q];
    if (n_reg == '0) quot = '0;
    else             quot = (prod + (2*SP_W_P)'(n_reg >> 1)) / (2*SP_W_P)'(n_reg);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      term_valid <= 1'b0;
      term       <= '0;
      term_shift <= '0;
    end else begin
      term_valid <= en;
      if (en) begin
        // Sx, Sw <= n, so the quotient never exceeds n and fits SP_W_P bits
        term       <= quot[SP_W_P-1:0];
        term_shift <= {1'b0, p} + {1'b0, q};
      end
    end
  end
endmodule
