// enc_buffer: intermediate encoding buffer.
//
// Holds DEPTH saved states of the eight sparsity counters, so that the
// encoding of a pixel (CONV) or layer (LINEAR) whose channels do not all fit
// in one load of the array can be parked while the weights are updated and
// resumed later. Synchronous write (we/waddr/wdata), asynchronous read
// (raddr/rdata). Depth 16 and 13-bit entries follow the paper; holding all
// eight counters at one address is this design's reading of the figure.
module enc_buffer
  import pacim_pkg::*;
#(
  parameter int DEPTH = ENC_DEPTH
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  sp_t                       wdata [ACT_W],
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output sp_t                       rdata [ACT_W]
);
  sp_t mem [DEPTH][ACT_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
