// iso_map: the isomorphic mapping delta of the composite-field S-box.
//
// Maps a byte of GF(2^8) (AES polynomial x^8+x^4+x^3+x+1) into GF(((2^2)^2)^2). The output
// {xi_h, xi_l} holds the high and low GF((2^2)^2) coefficients. Purely combinational: one
// 8x8 XOR matrix (hfs_pkg::DELTA_ROW). The paper names this block and its place (first
// stage of the pipeline); the matrix itself is derived for this design's field constants.
module iso_map
  import hfs_pkg::*;
(
  input  logic [7:0] x,
  output logic [7:0] y    // {xi_h, xi_l}
);
  always_comb y = mat8(DELTA_ROW, x);
endmodule
