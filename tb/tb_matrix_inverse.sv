// tb_matrix_inverse -- self-checking testbench of the 2x2 block inverter.
// Random Hermitian, diagonally dominant G and a random user order nu; every
// K_m must match the exact inverse of [G_aa G_ab; G_ba G_bb] (real arithmetic
// here) within the reciprocal table's accuracy, k_count must rise by one
// every two cycles, and done must come U = 16 cycles after start, the paper's
// inverse latency. Watchdog.
module tb_matrix_inverse;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [U-1:0][$clog2(U)-1:0] nu;
  cplx_g_t [U-1:0][U-1:0] g;
  kmat_t [U/2-1:0] k;
  logic [$clog2(U/2+1)-1:0] k_count;
  always #5 clk = ~clk;
  matrix_inverse dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  function automatic bit near(real a, real b, real tol);
    return (a - b < tol) && (b - a < tol);
  endfunction
  initial begin
    nu = '0; g = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int lat, perm [U];
      @(negedge clk);
      for (int i = 0; i < U; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < U; i++) nu[i] = 4'(perm[i]);
      for (int i = 0; i < U; i++) begin
        g[i][i] = '{re: 15'($urandom_range(4000, 8000)), im: '0};
        for (int j = i + 1; j < U; j++) begin
          g[i][j].re = 15'($urandom_range(0, 2048) - 1024);
          g[i][j].im = 15'($urandom_range(0, 2048) - 1024);
          g[j][i].re = g[i][j].re;
          g[j][i].im = -g[i][j].im;
        end
      end
      start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 40) begin
        chk(int'(k_count) == (lat - 1) / 2, $sformatf("k_count %0d at cycle %0d", k_count, lat));
        @(negedge clk); lat++;
      end
      chk(lat - 1 == U, $sformatf("inverse latency %0d", lat - 1));
      chk(k_count == 4'(U / 2), "k_count at done");
      for (int m = 0; m < U / 2; m++) begin
        real a, c, br, bi, det, tol;
        int i1, i2;
        i1 = perm[2*m]; i2 = perm[2*m+1];
        a = real'($signed(g[i1][i1].re)) / 4096.0;
        c = real'($signed(g[i2][i2].re)) / 4096.0;
        br = real'($signed(g[i1][i2].re)) / 4096.0;
        bi = real'($signed(g[i1][i2].im)) / 4096.0;
        det = a * c - br * br - bi * bi;
        tol = 0.02 / det + 0.001;
        chk(near(real'($signed(k[m].k11)) / 4096.0, c / det, tol) &&
            near(real'($signed(k[m].k22)) / 4096.0, a / det, tol) &&
            near(real'($signed(k[m].k12.re)) / 4096.0, -br / det, tol) &&
            near(real'($signed(k[m].k12.im)) / 4096.0, -bi / det, tol), $sformatf("K_%0d k11 %f exp %f k12 %f exp %f det %f a %f c %f br %f bi %f", m, real'($signed(k[m].k11)) / 4096.0, c / det, real'($signed(k[m].k12.re)) / 4096.0, -br / det, det, a, c, br, bi));
      end
    end
    report();
    $finish;
  end
endmodule
