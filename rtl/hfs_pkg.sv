// hfs_pkg: types, constants and GF(2^2) helpers shared by the HFS-box.
//
// Field tower (polynomial basis throughout):
//   GF(2^2)          = GF(2)[w]/(w^2 + w + 1)          element {b1, b0}
//   GF((2^2)^2)      = GF(2^2)[y]/(y^2 + y + PHI)       element {ah[1:0], al[1:0]}
//   GF(((2^2)^2)^2)  = GF((2^2)^2)[z]/(z^2 + z + LAMBDA) element {xi_h[3:0], xi_l[3:0]}
// The three polynomial shapes follow the paper; the constants PHI = {10} and LAMBDA = {1100}
// are this design's choice (the usual pair for this decomposition), and the isomorphism
// matrices below are derived from them.
//
// Pipeline payload: every register stage carries a stage_t, a valid bit plus a 16-bit field
// whose meaning depends on the stage (see the sN_t structs). All register stages share one
// width so that one register/voter/comparator design serves every stage.
package hfs_pkg;

  localparam int unsigned NSTAGE   = 5;            // logic stages of the pipelined S-box
  localparam int unsigned NREG     = NSTAGE + 1;   // register stages incl. the input register
  localparam int unsigned PAYLOAD_W = 16;

  localparam logic [1:0] PHI    = 2'b10;
  localparam logic [3:0] LAMBDA = 4'b1100;

  typedef struct packed {
    logic                 valid;
    logic [PAYLOAD_W-1:0] d;
  } stage_t;

  localparam int unsigned STAGE_W = $bits(stage_t);

  // Payload of each register stage (upper unused bits are zero).
  typedef struct packed { logic [7:0] pad; logic [7:0] x; } s0_t;                    // input byte
  typedef struct packed { logic [3:0] pad; logic [3:0] xh; logic [3:0] xl; logic [3:0] s; } s1_t;
  typedef struct packed { logic [3:0] xh; logic [3:0] s; logic [3:0] sql; logic [3:0] m; } s2_t;
  typedef struct packed { logic [3:0] pad; logic [3:0] xh; logic [3:0] s; logic [3:0] dinv; } s3_t;
  typedef struct packed { logic [7:0] pad; logic [3:0] sig_h; logic [3:0] sig_l; } s4_t;   // sigma
  typedef struct packed { logic [7:0] pad; logic [7:0] y; } s5_t;                    // S-box out

  // Isomorphism delta: GF(2^8) (x^8+x^4+x^3+x+1) -> composite field. Row i gives the input
  // bits that are XORed into output bit i. It maps alpha^k to beta^k with beta = 0x5f (a root
  // of the AES polynomial, written in the composite-field encoding).
  localparam logic [7:0] DELTA_ROW [8] = '{
    8'b01000011, 8'b01010010, 8'b10011110, 8'b11000110,
    8'b10101110, 8'b10101100, 8'b11011110, 8'b10100000 };

  // delta^-1 followed by the AES affine matrix (y_i = x_i ^ x_(i+4) ^ x_(i+5) ^ x_(i+6) ^ x_(i+7)),
  // as one matrix; row i for output bit i. The AES constant 0x63 is added afterwards.
  localparam logic [7:0] INV_AFF_ROW [8] = '{
    8'b11000111, 8'b10000001, 8'b01111101, 8'b00000111,
    8'b10010011, 8'b10000100, 8'b11110000, 8'b10001100 };
  localparam logic [7:0] AFFINE_C = 8'h63;

  // Multiply two GF(2^2) elements (w^2 = w + 1).
  function automatic logic [1:0] gf2_mul(input logic [1:0] a, input logic [1:0] b);
    logic hh, ll, mm;
    hh = a[1] & b[1];
    ll = a[0] & b[0];
    mm = (a[1] ^ a[0]) & (b[1] ^ b[0]);
    return {mm ^ ll, ll ^ hh};
  endfunction

  // Square in GF(2^2): {b1, b0}^2 = {b1, b1 ^ b0}.
  function automatic logic [1:0] gf2_sq(input logic [1:0] a);
    return {a[1], a[1] ^ a[0]};
  endfunction

  // Multiply by PHI = w in GF(2^2): {b1, b0} * w = {b1 ^ b0, b1}.
  function automatic logic [1:0] gf2_mul_phi(input logic [1:0] a);
    return gf2_mul(a, PHI);
  endfunction

  // 8x8 matrix times vector over GF(2).
  function automatic logic [7:0] mat8(input logic [7:0] rows [8], input logic [7:0] x);
    logic [7:0] y;
    for (int i = 0; i < 8; i++) y[i] = ^(rows[i] & x);
    return y;
  endfunction

endpackage
