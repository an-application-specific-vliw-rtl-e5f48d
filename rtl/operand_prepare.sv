// operand_prepare: the operand fetch and prepare stage (E3) of a vector ALU.
//
// It hands one 16-element vector to all slices of the vector ALU, either
// unchanged (broadcast, perm_en = 0) or permuted per slice (perm_en = 1):
// output lane l of slice s takes input lane pattern[s][l]. A pattern whose
// lanes of one slice all hold the same index splats that element, which is
// how a single filter weight is spread over 16 input pixels. The pattern is
// 4 slices x 16 lanes x 4 bit = 256 bit, one VR entry, written at run time.
// Broadcast and run-time permutation follow the paper; the pattern format is
// this design's. Combinational.
module operand_prepare
  import convaix_pkg::*;
#(
  parameter int unsigned NSLICE = 4
) (
  input  logic                                 perm_en,
  input  logic [NSLICE-1:0][VLEN-1:0][3:0]     pattern,
  input  vec_t                                 vin,
  output vec_t [NSLICE-1:0]                    vout
);
  always_comb
    for (int s = 0; s < NSLICE; s++)
      for (int l = 0; l < VLEN; l++)
        vout[s][l] = perm_en ? vin[pattern[s][l]] : vin[l];
endmodule
