// tb_z_update -- self-checking testbench of the symbol update of one block:
// v = K r_A + z_A (checked against real arithmetic within 2 LSB), z_new =
// PLM(v) (checked exactly against a table search done here), dz = z_new -
// z_old. BOX and PME tables for 16- and 256-QAM. Watchdog.
module tb_z_update;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  logic clk = 0, rst_n = 0, init_we = 0;
  logic [$clog2(NBIN)-1:0] init_idx;
  plm_ent_t init_ent;
  kmat_t k;
  cplx_r_t [1:0] r_a;
  cplx_z_t [1:0] z_old;
  cplx_v_t [1:0] v;
  cplx_z_t [1:0] z_new;
  cplx_dz_t [1:0] dz;
  tab_t t;
  always #5 clk = ~clk;
  z_update dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; report(); $finish; end
  function automatic bit near(real a, real b, real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction
  initial begin
    init_idx = '0; init_ent = '0; k = '0; r_a = '0; z_old = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 4; mode++) begin
      t = (mode == 0) ? box_tab(1) : (mode == 1) ? box_tab(3) : (mode == 2) ? pme_tab(1, 2.0 / pam_d(1), pam_d(1)) : pme_tab(3, 2.0 / pam_d(3), pam_d(3));
      for (int i = 0; i < int'(NBIN); i++) begin
        @(negedge clk); init_we = 1; init_idx = 5'(i); init_ent = t[i];
      end
      @(negedge clk); init_we = 0;
      for (int n = 0; n < 300; n++) begin
        real k11, k22, kr, ki, r1r, r1i, r2r, r2i, e [4];
        @(negedge clk);
        k.k11 = 16'($urandom_range(2048, 8192)); k.k22 = 16'($urandom_range(2048, 8192));
        k.k12.re = 16'($signed(11'($urandom))); k.k12.im = 16'($signed(11'($urandom)));
        for (int i = 0; i < 2; i++) begin
          r_a[i].re = 18'($signed(15'($urandom))); r_a[i].im = 18'($signed(15'($urandom)));
          z_old[i].re = 11'($signed(9'($urandom))); z_old[i].im = 11'($signed(9'($urandom)));
        end
        #1;
        k11 = real'($signed(k.k11)) / 4096.0; k22 = real'($signed(k.k22)) / 4096.0;
        kr = real'($signed(k.k12.re)) / 4096.0; ki = real'($signed(k.k12.im)) / 4096.0;
        r1r = real'($signed(r_a[0].re)) / 16384.0; r1i = real'($signed(r_a[0].im)) / 16384.0;
        r2r = real'($signed(r_a[1].re)) / 16384.0; r2i = real'($signed(r_a[1].im)) / 16384.0;
        e[0] = k11 * r1r + kr * r2r - ki * r2i + real'($signed(z_old[0].re)) / 256.0;
        e[1] = k11 * r1i + kr * r2i + ki * r2r + real'($signed(z_old[0].im)) / 256.0;
        e[2] = kr * r1r + ki * r1i + k22 * r2r + real'($signed(z_old[1].re)) / 256.0;
        e[3] = kr * r1i - ki * r1r + k22 * r2i + real'($signed(z_old[1].im)) / 256.0;
        chk(near(real'($signed(v[0].re)) / 256.0, e[0], 2.0 / 256) && near(real'($signed(v[0].im)) / 256.0, e[1], 2.0 / 256) &&
            near(real'($signed(v[1].re)) / 256.0, e[2], 2.0 / 256) && near(real'($signed(v[1].im)) / 256.0, e[3], 2.0 / 256),
            $sformatf("v: %0d %f", $signed(v[0].re), e[0] * 256));
        for (int i = 0; i < 2; i++) begin
          longint zr, zi;
          zr = plm_ref(t, longint'($signed(v[i].re)), SLOPE_FRAC, ZW);
          zi = plm_ref(t, longint'($signed(v[i].im)), SLOPE_FRAC, ZW);
          chk(longint'($signed(z_new[i].re)) == zr && longint'($signed(z_new[i].im)) == zi, "z_new");
          chk(longint'($signed(dz[i].re)) == zr - $signed(z_old[i].re) && longint'($signed(dz[i].im)) == zi - $signed(z_old[i].im), "dz");
        end
      end
    end
    report();
    $finish;
  end
endmodule
