// pacim_pkg: sizes, types and computing-map helpers shared by the PACiM bank.
//
// The bank computes 8b x 8b unsigned MACs. The 4 most significant bits of
// weights and activations are multiplied exactly, bit-serially, in the D-CiM
// array; every other binary MAC cycle (p,q) is approximated from bit-level
// sparsity as Sx[p]*Sw[q]/n. Which (p,q) cycles stay digital is the
// "computing map": all (p,q) with p,q >= 4 and p+q >= 8+level, where the
// boundary level (0..3) comes from the dynamic workload configuration and
// gives 16, 15, 13 or 10 digital cycles. The sizes are the paper's: a
// 256-row array of 64 four-bit weight columns, 6 PAC computing units and
// 13-bit sparsity counts. The 32-bit accumulator width and the command
// format are this design's own choices.
package pacim_pkg;

  localparam int ACT_W     = 8;    // activation and weight width (8b/8b)
  localparam int MSB_W     = 4;    // bits kept digital: 4-bit approximation
  localparam int LSB_W     = ACT_W - MSB_W;
  localparam int N_ROWS    = 256;  // DP rows per array pass
  localparam int N_MWC     = 64;   // multi-bit weight columns = output channels
  localparam int SP_W      = 13;   // sparsity count width (Sx<12:0>)
  localparam int N_PCU     = 6;    // PAC computing units in the PCE
  localparam int ACC_W     = 32;   // partial-sum width
  localparam int ENC_DEPTH = 16;   // intermediate encoding buffer depth
  localparam int TH_W      = 8;    // speculation threshold width

  typedef logic [SP_W-1:0]            sp_t;
  typedef sp_t  [ACT_W-1:0]           sp_vec_t;   // sparsity per bit index
  typedef logic [1:0]                 level_t;    // computing-map boundary
  typedef logic signed [ACC_W-1:0]    acc_t;

  typedef enum logic { LAYER_CONV = 1'b0, LAYER_LINEAR = 1'b1 } layer_t;

  // One operation of the bank: one 256-row tile of one output vector.
  typedef struct packed {
    logic       first_tile;  // clear the buffer before this tile
    logic       last_tile;   // run the PCE, then the pipeline and the encoder
    logic       enc_resume;  // load the encoder from the intermediate buffer first
    logic       enc_park;    // afterwards store the encoder state instead of emitting
    logic [3:0] enc_addr;    // intermediate buffer address for resume/park
    logic       layer_last;  // LINEAR layers: emit the layer's sparsity now
  } cmd_t;

  // A binary MAC cycle (p,q) is computed in the digital domain when both
  // bits are MSBs and it lies on or above the boundary set by the level.
  function automatic logic is_digital(input int unsigned p, input int unsigned q,
                                      input level_t level);
    return (p >= LSB_W) && (q >= LSB_W) && (p + q >= 2 * LSB_W + int'(level));
  endfunction

  function automatic int unsigned digital_cycles(input level_t level);
    int unsigned n;
    n = 0;
    for (int unsigned p = 0; p < ACT_W; p++)
      for (int unsigned q = 0; q < ACT_W; q++)
        if (is_digital(p, q, level)) n++;
    return n;
  endfunction

endpackage
