// Symbol decision: maps every soft equalizer output to the nearest PAM2 level.
//
// With the two levels placed symmetrically around THRESH (0 for levels -1/+1), the nearest
// level is found by comparing with THRESH: dec_out[n] = 1 for sym_in[n] >= THRESH (upper level),
// 0 otherwise. The decision itself follows the paper; the level placement and the tie rule
// are this design's assumptions. Purely combinational.
module slicer
  import cnneq_pkg::*;
#(
  parameter int unsigned N      = 512,
  parameter int unsigned A_W    = cnneq_pkg::CNN_A_W,
  parameter int              THRESH = 0
) (
  input  logic [N-1:0][A_W-1:0] sym_in,
  output logic [N-1:0]          dec_out
);
  always_comb begin
    for (int n = 0; n < int'(N); n++) dec_out[n] = (int'($signed(sym_in[n])) >= THRESH);
  end
endmodule
