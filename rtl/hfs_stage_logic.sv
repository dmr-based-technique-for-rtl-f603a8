// hfs_stage_logic: combinational logic of one stage of the 5-stage pipelined S-box.
//
// The composite-field S-box is cut into five stages by six register lines:
//   STAGE 1: delta mapping; s = xi_h + xi_l
//   STAGE 2: xi_h^2 * lambda (X^2 then x lambda) and s * xi_l (general multiplier)
//   STAGE 3: d = s*xi_l + xi_h^2*lambda, then d^-1 (GF((2^2)^2) inverse)
//   STAGE 4: sigma_h = d^-1 * xi_h, sigma_l = d^-1 * s (two multipliers)
//   STAGE 5: delta^-1 and affine transformation
// xi_h and s are carried forward through the registers to the stage-4 multipliers. The
// stage placement follows the paper's pipelined S-box; the payload layout of each register
// stage (hfs_pkg::s1_t..s5_t) is this design's choice. The valid bit passes through
// unchanged. In the FC-DMR pipeline two instances exist per stage, original and redundant,
// each fed by its own voter of the previous register stage.
module hfs_stage_logic
  import hfs_pkg::*;
#(
  parameter int unsigned STAGE = 1     // 1..NSTAGE
) (
  input  stage_t d_i,
  output stage_t d_o
);

  if (STAGE == 1) begin : g_s1
    s0_t        i;
    logic [7:0] xi;
    assign i = s0_t'(d_i.d);
    iso_map u_delta (.x(i.x), .y(xi));
    always_comb begin
      s1_t o;
      o.pad = '0;
      o.xh  = xi[7:4];
      o.xl  = xi[3:0];
      o.s   = xi[7:4] ^ xi[3:0];
      d_o.valid = d_i.valid;
      d_o.d     = o;
    end
  end else if (STAGE == 2) begin : g_s2
    s1_t        i;
    logic [3:0] sq, sql, m;
    assign i = s1_t'(d_i.d);
    gf4_sq         u_sq  (.a(i.xh), .q(sq));
    gf4_mul_lambda u_lam (.a(sq),   .q(sql));
    gf4_mul        u_mul (.a(i.s),  .b(i.xl), .q(m));
    always_comb begin
      s2_t o;
      o.xh  = i.xh;
      o.s   = i.s;
      o.sql = sql;
      o.m   = m;
      d_o.valid = d_i.valid;
      d_o.d     = o;
    end
  end else if (STAGE == 3) begin : g_s3
    s2_t        i;
    logic [3:0] dinv;
    assign i = s2_t'(d_i.d);
    gf4_inv u_inv (.a(i.m ^ i.sql), .q(dinv));
    always_comb begin
      s3_t o;
      o.pad  = '0;
      o.xh   = i.xh;
      o.s    = i.s;
      o.dinv = dinv;
      d_o.valid = d_i.valid;
      d_o.d     = o;
    end
  end else if (STAGE == 4) begin : g_s4
    s3_t        i;
    logic [3:0] sig_h, sig_l;
    assign i = s3_t'(d_i.d);
    gf4_mul u_mh (.a(i.dinv), .b(i.xh), .q(sig_h));
    gf4_mul u_ml (.a(i.dinv), .b(i.s),  .q(sig_l));
    always_comb begin
      s4_t o;
      o.pad = '0;
      o.sig_h = sig_h;
      o.sig_l = sig_l;
      d_o.valid = d_i.valid;
      d_o.d     = o;
    end
  end else begin : g_s5
    s4_t        i;
    logic [7:0] y;
    assign i = s4_t'(d_i.d);
    inv_iso_affine u_aff (.a({i.sig_h, i.sig_l}), .y(y));
    always_comb begin
      s5_t o;
      o.pad = '0;
      o.y   = y;
      d_o.valid = d_i.valid;
      d_o.d     = o;
    end
  end

  initial assert (STAGE >= 1 && STAGE <= NSTAGE) else $fatal(1, "STAGE out of range");

endmodule
