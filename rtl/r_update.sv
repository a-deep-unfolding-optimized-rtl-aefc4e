// r_update -- residual update of a BCD module:
//   r_i <- r_i - G_{i,a1} dz_1 - G_{i,a2} dz_2,   i = 1..U
// U parallel layers, each with two complex multipliers and two complex
// adders, as in the published r-update unit. G_{i,a} carries 12 fraction
// bits and dz 8, so the products (20) are shifted by 6 to the 14 fraction bits
// of r and the result saturates to RW = 18 bits. Combinational; the
// enclosing BCD module registers r (one-cycle delay).
module r_update
  import gbcd_pkg::*;
#(
  parameter int unsigned U = U_UE
) (
  input  cplx_r_t  [U-1:0] r_in,
  input  cplx_g_t  [U-1:0] g_a1,
  input  cplx_g_t  [U-1:0] g_a2,
  input  cplx_dz_t [1:0]   dz,
  output cplx_r_t  [U-1:0] r_out
);
  localparam int unsigned SH = G_FRAC + Z_FRAC - R_FRAC;

  always_comb begin
    for (int i = 0; i < int'(U); i++) begin
      logic signed [63:0] pr, pi;
      pr = 64'(g_a1[i].re) * 64'(dz[0].re) - 64'(g_a1[i].im) * 64'(dz[0].im)
         + 64'(g_a2[i].re) * 64'(dz[1].re) - 64'(g_a2[i].im) * 64'(dz[1].im);
      pi = 64'(g_a1[i].re) * 64'(dz[0].im) + 64'(g_a1[i].im) * 64'(dz[0].re)
         + 64'(g_a2[i].re) * 64'(dz[1].im) + 64'(g_a2[i].im) * 64'(dz[1].re);
      r_out[i].re = RW'(sat_s(64'(r_in[i].re) - (pr >>> SH), RW));
      r_out[i].im = RW'(sat_s(64'(r_in[i].im) - (pi >>> SH), RW));
    end
  end
endmodule
