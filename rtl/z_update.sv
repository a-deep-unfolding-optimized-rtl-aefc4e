// z_update -- the z-update unit of a BCD module, for the current pair A_m:
//   v     = K_m r_A + z_A^(k-1)          (v-update)
//   z_new = PLM(v)                       (BOX or piecewise-linear PME)
//   dz    = z_new - z_A^(k-1)            (complex adder)
// The PLM works on the real and imaginary parts of both users (4 lanes) with
// the table of this module's outer iteration, written through the init port.
// Combinational; the enclosing BCD module registers the results, which makes
// the one-cycle delay of the published z-update unit.
module z_update
  import gbcd_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  init_we,
  input  logic [$clog2(NBIN)-1:0] init_idx,
  input  plm_ent_t              init_ent,
  input  kmat_t                 k,
  input  cplx_r_t [1:0]         r_a,
  input  cplx_z_t [1:0]         z_old,
  output cplx_v_t [1:0]         v,
  output cplx_z_t [1:0]         z_new,
  output cplx_dz_t [1:0]        dz
);
  logic signed [3:0][VW-1:0] px;
  logic signed [3:0][ZW-1:0] py;

  v_update u_vup (.k, .r_a, .z_a(z_old), .v);

  assign px = {v[1].im, v[1].re, v[0].im, v[0].re};

  plm #(.LANES(4), .NB(NBIN), .IW(VW), .IFRAC(Z_FRAC), .OW(ZW), .OFRAC(Z_FRAC)) u_plm (
    .clk, .rst_n, .init_we, .init_idx, .init_ent, .x(px), .y(py));

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      z_new[i].re = py[2*i];
      z_new[i].im = py[2*i+1];
      dz[i].re    = DZW'(z_new[i].re) - DZW'(z_old[i].re);
      dz[i].im    = DZW'(z_new[i].im) - DZW'(z_old[i].im);
    end
  end
endmodule
