// inv_iso_affine: inverse isomorphism delta^-1 fused with the AES affine transformation.
//
// Takes sigma = {sigma_h, sigma_l}, the inverse in the composite field, and returns the
// S-box output y = A delta^-1 sigma + 0x63. The affine part follows the AES standard; the
// combined 8x8 XOR matrix (hfs_pkg::INV_AFF_ROW) is derived for this design's field
// constants. Combinational.
module inv_iso_affine
  import hfs_pkg::*;
(
  input  logic [7:0] a,
  output logic [7:0] y
);
  always_comb y = mat8(INV_AFF_ROW, a) ^ AFFINE_C;
endmodule
