// tb_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL.
//
// GF(2^2), GF((2^2)^2) and GF(((2^2)^2)^2) products are computed schoolbook-style from the
// defining polynomials (w^2 = w + 1, y^2 = y + {10}, z^2 = z + {1100}); the AES S-box is
// computed from its definition (brute-force inverse modulo x^8+x^4+x^3+x+1, then the FIPS-197
// affine map). The isomorphism delta is rebuilt from its definition: bit k of the input
// contributes beta^k, beta = 0x5f computed in the composite field.
package tb_ref_pkg;

  function automatic logic [1:0] r2_mul(input logic [1:0] a, input logic [1:0] b);
    logic [2:0] p;
    p = '0;
    for (int i = 0; i < 2; i++) if (b[i]) p ^= 3'(a) << i;
    if (p[2]) p ^= 3'b111;               // w^2 = w + 1
    return p[1:0];
  endfunction

  function automatic logic [3:0] r4_mul(input logic [3:0] a, input logic [3:0] b);
    logic [1:0] c2, c1, c0;
    c2 = r2_mul(a[3:2], b[3:2]);
    c1 = r2_mul(a[3:2], b[1:0]) ^ r2_mul(a[1:0], b[3:2]);
    c0 = r2_mul(a[1:0], b[1:0]);
    // y^2 = y + phi, phi = {10}
    return {c1 ^ c2, c0 ^ r2_mul(c2, 2'b10)};
  endfunction

  function automatic logic [7:0] r8_mul(input logic [7:0] a, input logic [7:0] b);
    logic [3:0] c2, c1, c0;
    c2 = r4_mul(a[7:4], b[7:4]);
    c1 = r4_mul(a[7:4], b[3:0]) ^ r4_mul(a[3:0], b[7:4]);
    c0 = r4_mul(a[3:0], b[3:0]);
    // z^2 = z + lambda, lambda = {1100}
    return {c1 ^ c2, c0 ^ r4_mul(c2, 4'b1100)};
  endfunction

  function automatic logic [3:0] r4_inv(input logic [3:0] a);
    for (int b = 1; b < 16; b++) if (r4_mul(a, 4'(b)) == 4'h1) return 4'(b);
    return 4'h0;
  endfunction

  function automatic logic [7:0] r8_inv(input logic [7:0] a);
    for (int b = 1; b < 256; b++) if (r8_mul(a, 8'(b)) == 8'h01) return 8'(b);
    return 8'h00;
  endfunction

  function automatic logic [7:0] aes_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0; x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = {x[6:0], 1'b0} ^ (x[7] ? 8'h1b : 8'h00);
    end
    return p;
  endfunction

  function automatic logic [7:0] aes_inv(input logic [7:0] a);
    for (int b = 1; b < 256; b++) if (aes_mul(a, 8'(b)) == 8'h01) return 8'(b);
    return 8'h00;
  endfunction

  function automatic logic [7:0] aes_affine(input logic [7:0] x);
    logic [7:0] y;
    for (int i = 0; i < 8; i++)
      y[i] = x[i] ^ x[(i+4)%8] ^ x[(i+5)%8] ^ x[(i+6)%8] ^ x[(i+7)%8];
    return y ^ 8'h63;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] x);
    return aes_affine(aes_inv(x));
  endfunction

  function automatic logic [7:0] delta(input logic [7:0] x);
    logic [7:0] p, y;
    p = 8'h01; y = '0;
    for (int k = 0; k < 8; k++) begin
      if (x[k]) y ^= p;
      p = r8_mul(p, 8'h5f);
    end
    return y;
  endfunction

  function automatic logic [7:0] delta_inv(input logic [7:0] s);
    for (int x = 0; x < 256; x++) if (delta(8'(x)) == s) return 8'(x);
    return 8'h00;
  endfunction

endpackage
