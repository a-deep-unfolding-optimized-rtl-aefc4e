// v_update -- unconstrained estimate of one user pair:
//   v_A = K_m r_A + z_A,   K_m = [k11 k12; conj(k12) k22]
// Four complex products (K 12 fraction bits x r 14 -> 26, shifted to the 8
// fraction bits of z), added to the previous estimate and saturated to VW
// bits. Combinational. Part of the z-update unit.
module v_update
  import gbcd_pkg::*;
(
  input  kmat_t         k,
  input  cplx_r_t [1:0] r_a,
  input  cplx_z_t [1:0] z_a,
  output cplx_v_t [1:0] v
);
  localparam int unsigned SH = K_FRAC + R_FRAC - Z_FRAC;

  always_comb begin
    logic signed [63:0] kr, ki, k11, k22, v1r, v1i, v2r, v2i;
    kr  = 64'(k.k12.re); ki = 64'(k.k12.im);
    k11 = 64'(k.k11);    k22 = 64'(k.k22);
    // v1 = k11 r1 + k12 r2 ; v2 = conj(k12) r1 + k22 r2
    v1r = k11 * 64'(r_a[0].re) + kr * 64'(r_a[1].re) - ki * 64'(r_a[1].im);
    v1i = k11 * 64'(r_a[0].im) + kr * 64'(r_a[1].im) + ki * 64'(r_a[1].re);
    v2r = kr * 64'(r_a[0].re) + ki * 64'(r_a[0].im) + k22 * 64'(r_a[1].re);
    v2i = kr * 64'(r_a[0].im) - ki * 64'(r_a[0].re) + k22 * 64'(r_a[1].im);
    v[0].re = VW'(sat_s((v1r >>> SH) + 64'(z_a[0].re), VW));
    v[0].im = VW'(sat_s((v1i >>> SH) + 64'(z_a[0].im), VW));
    v[1].re = VW'(sat_s((v2r >>> SH) + 64'(z_a[1].re), VW));
    v[1].im = VW'(sat_s((v2i >>> SH) + 64'(z_a[1].im), VW));
  end
endmodule
