// tb_bcd_module -- self-checking testbench of one BCD iteration (U = 16).
// A random channel gives G = H^H H; y_MF = G s for 16-QAM symbols s plus
// noise; K_m are the exact 2x2 inverses of the pairs of a random order nu,
// rounded to the K format. The module runs from z = 0, r = y_MF with BOX
// tables; z-MEM, r-MEM and v-MEM are compared with a real-arithmetic sweep of
// the same algorithm (v = K_m r_A + z_A, z = clip(v), r -= G_{:,A} dz) within
// a few LSB, and done must follow start by U = 16 cycles. A second iteration
// fed from the first one's memories is checked the same way. Watchdog.
module tb_bcd_module;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE, B = 128;
  logic clk = 0, rst_n = 0, start = 0, busy, done, init_we = 0;
  logic [U-1:0][$clog2(U)-1:0] nu;
  kmat_t [U/2-1:0] k;
  logic [$clog2(U/2+1)-1:0] k_count;
  cplx_g_t [U-1:0][U-1:0] g;
  cplx_z_t [U-1:0] z_in, z_mem;
  cplx_r_t [U-1:0] r_in, r_mem;
  cplx_v_t [U-1:0] v_mem;
  logic [$clog2(NBIN)-1:0] init_idx;
  plm_ent_t init_ent;
  real gr [U][U], gi [U][U], kr [U/2][4];
  real zr [U], zi [U], rr [U], ri [U], vr [U], vi [U];
  real amax;
  tab_t t;
  always #5 clk = ~clk;
  bcd_module dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end

  function automatic real clip(real x);
    return (x > amax) ? amax : (x < -amax) ? -amax : x;
  endfunction
  function automatic bit near(real a, real b, real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  task automatic ref_sweep();
    for (int m = 0; m < U / 2; m++) begin
      int a1, a2;
      real v1r, v1i, v2r, v2i, d1r, d1i, d2r, d2i, n1r, n1i, n2r, n2i;
      a1 = nu[2*m]; a2 = nu[2*m+1];
      // K = [k11 k12; conj(k12) k22]
      v1r = kr[m][0] * rr[a1] + kr[m][2] * rr[a2] - kr[m][3] * ri[a2] + zr[a1];
      v1i = kr[m][0] * ri[a1] + kr[m][2] * ri[a2] + kr[m][3] * rr[a2] + zi[a1];
      v2r = kr[m][2] * rr[a1] + kr[m][3] * ri[a1] + kr[m][1] * rr[a2] + zr[a2];
      v2i = kr[m][2] * ri[a1] - kr[m][3] * rr[a1] + kr[m][1] * ri[a2] + zi[a2];
      n1r = clip(v1r); n1i = clip(v1i); n2r = clip(v2r); n2i = clip(v2i);
      d1r = n1r - zr[a1]; d1i = n1i - zi[a1]; d2r = n2r - zr[a2]; d2i = n2i - zi[a2];
      zr[a1] = n1r; zi[a1] = n1i; zr[a2] = n2r; zi[a2] = n2i;
      vr[a1] = v1r; vi[a1] = v1i; vr[a2] = v2r; vi[a2] = v2i;
      for (int u = 0; u < U; u++) begin
        rr[u] -= gr[u][a1] * d1r - gi[u][a1] * d1i + gr[u][a2] * d2r - gi[u][a2] * d2i;
        ri[u] -= gr[u][a1] * d1i + gi[u][a1] * d1r + gr[u][a2] * d2i + gi[u][a2] * d2r;
      end
    end
  endtask

  task automatic run_and_check(int it);
    int lat;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done && lat < 40) begin @(negedge clk); lat++; end
    chk(lat == U, $sformatf("BCD iteration %0d cycles", lat));
    ref_sweep();
    for (int u = 0; u < U; u++) begin
      chk(near(real'($signed(z_mem[u].re)) / 256.0, zr[u], 6.0 / 256) && near(real'($signed(z_mem[u].im)) / 256.0, zi[u], 6.0 / 256),
          $sformatf("it %0d z[%0d] %f ref %f", it, u, real'($signed(z_mem[u].re)) / 256.0, zr[u]));
      chk(near(real'($signed(v_mem[u].re)) / 256.0, vr[u], 8.0 / 256) && near(real'($signed(v_mem[u].im)) / 256.0, vi[u], 8.0 / 256),
          $sformatf("it %0d v[%0d]", it, u));
      chk(near(real'($signed(r_mem[u].re)) / 16384.0, rr[u], 0.03) && near(real'($signed(r_mem[u].im)) / 16384.0, ri[u], 0.03),
          $sformatf("it %0d r[%0d] %f ref %f", it, u, real'($signed(r_mem[u].re)) / 16384.0, rr[u]));
    end
  endtask

  initial begin
    real hr [B][U], hi [B][U];
    int perm [U], sr [U], si [U];
    nu = '0; k = '0; g = '0; z_in = '0; r_in = '0; init_idx = '0; init_ent = '0;
    k_count = 4'(U / 2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = box_tab(1);
    amax = real'($signed(t[2].bias)) / 256.0;
    for (int i = 0; i < int'(NBIN); i++) begin
      @(negedge clk); init_we = 1; init_idx = 5'(i); init_ent = t[i];
    end
    @(negedge clk); init_we = 0;
    for (int trial = 0; trial < 10; trial++) begin
      for (int b = 0; b < B; b++) for (int u = 0; u < U; u++) begin
        hr[b][u] = real'(int'($urandom_range(0, 2000)) - 1000) / 1000.0 * 0.1;
        hi[b][u] = real'(int'($urandom_range(0, 2000)) - 1000) / 1000.0 * 0.1;
      end
      for (int i = 0; i < U; i++) for (int j = 0; j < U; j++) begin
        real ar, ai;
        ar = 0; ai = 0;
        for (int b = 0; b < B; b++) begin
          ar += hr[b][i] * hr[b][j] + hi[b][i] * hi[b][j];
          ai += hr[b][i] * hi[b][j] - hi[b][i] * hr[b][j];
        end
        g[i][j] = '{re: 15'(rnd(ar * 4096)), im: 15'(rnd(ai * 4096))};
        gr[i][j] = real'(rnd(ar * 4096)) / 4096.0; gi[i][j] = real'(rnd(ai * 4096)) / 4096.0;
      end
      for (int i = 0; i < U; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < U; i++) nu[i] = 4'(perm[i]);
      for (int m = 0; m < U / 2; m++) begin
        int a1, a2;
        real det;
        a1 = perm[2*m]; a2 = perm[2*m+1];
        det = gr[a1][a1] * gr[a2][a2] - gr[a1][a2] ** 2 - gi[a1][a2] ** 2;
        k[m].k11 = 16'(rnd(gr[a2][a2] / det * 4096)); k[m].k22 = 16'(rnd(gr[a1][a1] / det * 4096));
        k[m].k12.re = 16'(rnd(-gr[a1][a2] / det * 4096)); k[m].k12.im = 16'(rnd(-gi[a1][a2] / det * 4096));
        kr[m][0] = real'($signed(k[m].k11)) / 4096; kr[m][1] = real'($signed(k[m].k22)) / 4096;
        kr[m][2] = real'($signed(k[m].k12.re)) / 4096; kr[m][3] = real'($signed(k[m].k12.im)) / 4096;
      end
      for (int u = 0; u < U; u++) begin sr[u] = $urandom_range(0, 3); si[u] = $urandom_range(0, 3); end
      for (int u = 0; u < U; u++) begin
        real ar, ai;
        ar = real'(int'($urandom_range(0, 200)) - 100) / 10000.0; ai = real'(int'($urandom_range(0, 200)) - 100) / 10000.0;
        for (int j = 0; j < U; j++) begin
          ar += gr[u][j] * pam_pt(1, sr[j]) - gi[u][j] * pam_pt(1, si[j]);
          ai += gr[u][j] * pam_pt(1, si[j]) + gi[u][j] * pam_pt(1, sr[j]);
        end
        r_in[u] = '{re: 18'(rnd(ar * 16384)), im: 18'(rnd(ai * 16384))};
        rr[u] = real'(rnd(ar * 16384)) / 16384.0; ri[u] = real'(rnd(ai * 16384)) / 16384.0;
        z_in[u] = '0; zr[u] = 0; zi[u] = 0;
      end
      run_and_check(0);
      // second iteration from the first one's memories
      z_in = z_mem; r_in = r_mem;
      for (int u = 0; u < U; u++) begin
        zr[u] = real'($signed(z_mem[u].re)) / 256.0; zi[u] = real'($signed(z_mem[u].im)) / 256.0;
        rr[u] = real'($signed(r_mem[u].re)) / 16384.0; ri[u] = real'($signed(r_mem[u].im)) / 16384.0;
      end
      run_and_check(1);
    end
    report();
    $finish;
  end
endmodule
